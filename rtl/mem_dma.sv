// mem_dma -- memory pipeline of a reasoning core: moves data between the
// core's HBM-CO pseudo-channel and its memory buffer.
//
// Instructions (one at a time, taken when idle via instr_valid/instr_ready):
//   MEM_LOAD  cnt entries: reads 4*cnt consecutive 256-bit beats from the
//             pseudo-channel starting at beat address {b,c}, packs every 4
//             beats (first beat in the low bits) into a 1024-bit entry and
//             writes it to memory-buffer entry a, a+1, ... with valid count
//             vcount; with check_valid each write waits until the entry is
//             free (its counter is zero), so loads can run ahead of the
//             compute pipeline in a ring of entries without overwriting
//             data that is still to be read.
//   MEM_STORE cnt entries: reads memory-buffer entries a, a+1, ... (with
//             check_valid / dec as in the instruction) and writes each as 4
//             beats to the pseudo-channel from beat address {b,c}.
// Read requests are pipelined: up to RD_OUTSTANDING beats may be in flight
// (enough to cover the pseudo-channel latency), and a response FIFO of the
// same depth absorbs them while the buffer write waits for its grant. The
// next entry is packed while the previous one is being written, so one beat
// per cycle (32 GB/s at 1 GHz) is sustained when the buffer keeps up.
//
// Pseudo-channel interface (this design's own): a read request channel
// (valid/ready, beat address), a read response channel (valid, no
// back-pressure, in request order) and a write channel (valid/ready, beat
// address and data).
//
// From the paper: a software-programmed memory DMA per core, moving data
// between its own pseudo-channel and its memory buffer, with valid_count and
// check_valid on buffer writes; 256 bits per 1 GHz cycle per pseudo-channel.
module mem_dma
  import rpu_pkg::*;
#(
  parameter int unsigned RD_OUTSTANDING = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 instr_valid,
  output logic                 instr_ready,
  input  instr_t               instr,
  output logic                 busy,
  // memory-buffer port
  output buf_req_t             mb_req,
  input  logic                 mb_gnt,
  input  logic                 mb_rvalid,
  input  logic [TILE_BITS-1:0] mb_rdata,
  // pseudo-channel
  output logic                 rd_req_valid,
  input  logic                 rd_req_ready,
  output logic [31:0]          rd_addr,
  input  logic                 rd_resp_valid,
  input  logic [MEMW-1:0]      rd_resp_data,
  output logic                 wr_valid,
  input  logic                 wr_ready,
  output logic [31:0]          wr_addr,
  output logic [MEMW-1:0]      wr_data
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_ST_RD, S_ST_WAIT, S_ST_WR} state_e;
  state_e state;
  instr_t ins;

  localparam int unsigned CW = $clog2(RD_OUTSTANDING + 1);

  logic [31:0] beats_total, beats_issued;
  logic [15:0] entries_done;
  logic [CW-1:0] inflight;            // issued but not yet popped from the FIFO
  logic [MEMW-1:0] fifo [RD_OUTSTANDING];
  logic [$clog2(RD_OUTSTANDING)-1:0] wp, rp;
  logic [CW-1:0] fcount;
  logic [TILE_BITS-1:0] entry;
  logic [1:0]  asm_cnt;               // beats packed into `entry`
  logic        entry_full;
  logic [1:0]  wbeat;

  assign instr_ready = (state == S_IDLE);
  assign busy        = (state != S_IDLE);

  // ---------------------------------------------------------------- read requests
  assign rd_req_valid = (state == S_LOAD) && (beats_issued != beats_total) &&
                        (inflight < CW'(RD_OUTSTANDING));
  assign rd_addr      = {ins.b, ins.c} + beats_issued;

  logic issue, fpop, wr_done;
  assign issue = rd_req_valid && rd_req_ready;
  assign fpop  = (state == S_LOAD) && (fcount != 0) && (!entry_full || wr_done);

  // ---------------------------------------------------------------- buffer requests
  always_comb begin
    mb_req             = '0;
    mb_req.check_valid = ins.check_valid;
    mb_req.addr        = ins.a + entries_done;
    if (state == S_LOAD && entry_full) begin
      mb_req.valid  = 1'b1;
      mb_req.write  = 1'b1;
      mb_req.vcount = ins.vcount;
      mb_req.wdata  = entry;
    end else if (state == S_ST_RD) begin
      mb_req.valid = 1'b1;
      mb_req.dec   = ins.dec;
    end
  end
  assign wr_done = (state == S_LOAD) && entry_full && mb_gnt;

  // ---------------------------------------------------------------- store beats
  assign wr_valid = (state == S_ST_WR);
  assign wr_addr  = {ins.b, ins.c} + {14'd0, entries_done, wbeat};
  assign wr_data  = entry[MEMW*wbeat +: MEMW];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      ins          <= '0;
      beats_total  <= '0;
      beats_issued <= '0;
      entries_done <= '0;
      inflight     <= '0;
      wp           <= '0;
      rp           <= '0;
      fcount       <= '0;
      entry        <= '0;
      asm_cnt      <= '0;
      entry_full   <= 1'b0;
      wbeat        <= '0;
    end else begin
      // response FIFO (only used by loads)
      if (rd_resp_valid) begin
        fifo[wp] <= rd_resp_data;
        wp       <= wp + 1'b1;
      end
      fcount   <= fcount + CW'(rd_resp_valid) - CW'(fpop);
      inflight <= inflight + CW'(issue) - CW'(fpop);
      if (issue) beats_issued <= beats_issued + 32'd1;
      if (fpop) begin
        entry[MEMW*asm_cnt +: MEMW] <= fifo[rp];
        rp      <= rp + 1'b1;
        asm_cnt <= asm_cnt + 2'd1;
        if (asm_cnt == 2'd3) entry_full <= 1'b1;
      end

      case (state)
        S_IDLE: if (instr_valid) begin
          ins          <= instr;
          beats_total  <= {14'd0, instr.cnt, 2'b00};
          beats_issued <= '0;
          entries_done <= '0;
          asm_cnt      <= '0;
          entry_full   <= 1'b0;
          wbeat        <= '0;
          if (instr.cnt == 0)                 state <= S_IDLE;
          else if (instr.op == OP_MEM_STORE)  state <= S_ST_RD;
          else                                state <= S_LOAD;
        end
        S_LOAD: if (wr_done) begin
          entry_full   <= 1'b0;
          entries_done <= entries_done + 16'd1;
          if (entries_done + 16'd1 == ins.cnt) state <= S_IDLE;
        end
        S_ST_RD:   if (mb_gnt) state <= S_ST_WAIT;
        S_ST_WAIT: if (mb_rvalid) begin
          entry <= mb_rdata;
          wbeat <= '0;
          state <= S_ST_WR;
        end
        S_ST_WR: if (wr_ready) begin
          wbeat <= wbeat + 2'd1;
          if (wbeat == 2'd3) begin
            entries_done <= entries_done + 16'd1;
            state        <= (entries_done + 16'd1 == ins.cnt) ? S_IDLE : S_ST_RD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) rd_resp_valid |-> fcount < CW'(RD_OUTSTANDING))
    else $error("mem_dma: read response without FIFO space");
endmodule
