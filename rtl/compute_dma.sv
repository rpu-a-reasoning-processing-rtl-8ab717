// compute_dma -- compute pipeline controller of a reasoning core. It runs
// the VMM instruction, O = V * W with V of K = 64*n1 values and W of
// K x N, N = 8*n2, on up to NT tile multipliers (TMACs) at once (one input
// vector per TMAC, all sharing the weights).
//
// Weight path. The weight shard lies in the memory buffer from entry a on,
// `cnt` entries, in the tile order of the stripe procedure: stripe by
// stripe (64 rows of W), inside a stripe tile column by tile column, inside
// a column the 8 tiles top to bottom. A fetch engine reads these entries
// (check_valid / dec from the instruction, so it waits for the memory
// pipeline and frees each entry for reuse once read) into a 4-entry FIFO.
// BF16 weights go from the FIFO straight to the compute bus, one tile per
// entry. Compressed weights are fed 256 bits per cycle into the stream
// decoder, whose BF16 tiles go to the compute bus. Every tile is broadcast
// to all active TMACs in the same cycle.
//
// Activation path. Before each stripe s the activation shard of every
// active TMAC t is read from entry b + s*ntm + t of the network buffer
// (sel_a = 0) or memory buffer (sel_a = 1) into that TMAC's register file.
// The read uses check_valid, so compute waits for activations still on their
// way over the network, while the weight FIFO keeps filling.
//
// Procedure (stripe-based): for each stripe, for each tile column, 8 tiles
// top to bottom; the 8th closes the column and starts the TMAC's tree sum
// into its accumulator scratchpad at column offset 8c (written on the first
// stripe, added afterwards). After the last stripe the controller waits for
// the trees to empty and drains: for each TMAC t and each group g of 64
// outputs, 8 reads of 8 FP32 accumulators pass through the HP-VOP unit
// (vop, scalar), are rounded to BF16 and packed into one 1024-bit entry,
// written to entry c + t*G + g (G = ceil(n2/8)) of the network buffer
// (sel_b = 0) or memory buffer (sel_b = 1) with valid count vcount.
// Outputs beyond N in the last group are zero.
//
// Timing: with weights available, one tile per cycle (64 MACs per TMAC per
// cycle); each stripe adds the activation loads (2 cycles per TMAC), the
// end adds about 8 + 11 cycles per output entry.
//
// From the paper: compute DMA reading memory or network buffers, stream
// decoder feeding a 1024-bit compute bus broadcast to all active TMACs,
// activation shards from the network buffer into per-TMAC register files,
// the stripe order of the VMM procedure, tree sum per column of tiles,
// partial sums kept for the next stripe. This design's choices: the
// instruction fields, FIFO depth, entry layouts and the drain path.
module compute_dma
  import rpu_pkg::*;
#(
  parameter int unsigned NT        = 4,
  parameter int unsigned ACC_DEPTH = 8192
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          instr_valid,
  output logic                          instr_ready,
  input  instr_t                        instr,
  output logic                          busy,
  // memory-buffer weight read port
  output buf_req_t                      w_req,
  input  logic                          w_gnt,
  input  logic                          w_rvalid,
  input  logic [TILE_BITS-1:0]          mb_rdata,
  // activation/output ports to the memory buffer and network buffer
  output buf_req_t                      am_req,
  input  logic                          am_gnt,
  input  logic                          am_rvalid,
  output buf_req_t                      an_req,
  input  logic                          an_gnt,
  input  logic                          an_rvalid,
  input  logic [TILE_BITS-1:0]          nb_rdata,
  // stream decoder
  output logic                          dec_flush,
  output wfmt_e                         dec_fmt,
  output logic                          dec_s_valid,
  input  logic                          dec_s_ready,
  output logic [MEMW-1:0]               dec_s_data,
  input  logic                          dec_m_valid,
  output logic                          dec_m_ready,
  input  logic [TILE_BITS-1:0]          dec_m_tile,
  // TMAC control (compute bus)
  output logic                          act_load [NT],
  output logic [TILE_BITS-1:0]          act_data,
  output logic                          tile_valid [NT],
  output logic [TILE_BITS-1:0]          tile,
  output logic [2:0]                    tile_row,
  output logic                          tile_last,
  output logic [$clog2(ACC_DEPTH)-1:0]  col_base,
  output logic                          first_stripe,
  output logic [$clog2(ACC_DEPTH)-1:0]  acc_rd_addr,
  input  fp32_t                         acc_rd_data [NT][TILE_DIM],
  input  logic                          tmac_busy [NT],
  // HP-VOPs
  output logic                          vop_in_valid,
  output vop_e                          vop_op,
  output bf16_t                         vop_scalar,
  output fp32_t                         vop_x [TILE_DIM],
  input  logic                          vop_out_valid,
  input  fp32_t                         vop_y [TILE_DIM],
  // event strobes
  output logic                          ev_tile,
  output logic                          ev_wait_weight,
  output logic                          ev_wait_act
);
  localparam int unsigned AW  = $clog2(ACC_DEPTH);
  localparam int unsigned TW  = (NT > 1) ? $clog2(NT) : 1;
  localparam int unsigned FD  = 4;

  typedef enum logic [2:0] {S_IDLE, S_ACT_REQ, S_ACT_WAIT, S_RUN, S_FLUSH, S_DRAIN, S_DRAIN_WR} state_e;
  state_e state;
  instr_t ins;

  logic [7:0]  s, c;                // stripe, tile column
  logic [2:0]  r;                   // tile row
  logic [TW-1:0] t;                 // TMAC index (act load / drain)
  logic [7:0]  g, ngroups;          // output group

  // ---------------------------------------------------------------- weight fetch
  logic [TILE_BITS-1:0] wf [FD];
  logic [1:0]  wf_wp, wf_rp;
  logic [2:0]  wf_cnt;
  logic        wf_out;              // read granted, data not yet back
  logic [15:0] wf_issued;
  logic        wf_run;
  logic [1:0]  ser;                 // 256-bit word of the FIFO head sent to the decoder
  logic        bypass;
  logic        tile_avail, consume, wf_pop;

  assign bypass = (ins.fmt == FMT_BF16);
  assign wf_run = (state == S_ACT_REQ) || (state == S_ACT_WAIT) || (state == S_RUN);

  always_comb begin
    w_req             = '0;
    w_req.valid       = wf_run && (wf_issued != ins.cnt) && (!wf_out || w_rvalid) &&
                        (wf_cnt + 3'(wf_out) < 3'(FD));
    w_req.check_valid = ins.check_valid;
    w_req.dec         = ins.dec;
    w_req.addr        = ins.a + wf_issued;
  end

  assign dec_fmt     = ins.fmt;
  assign dec_s_valid = !bypass && (wf_cnt != 0) && (state != S_IDLE);
  assign dec_s_data  = wf[wf_rp][MEMW*ser +: MEMW];
  assign tile_avail  = bypass ? (wf_cnt != 0) : dec_m_valid;
  assign consume     = (state == S_RUN) && tile_avail;
  assign dec_m_ready = !bypass && consume;
  assign wf_pop      = bypass ? consume : (dec_s_valid && dec_s_ready && ser == 2'd3);

  // ---------------------------------------------------------------- compute bus
  assign tile         = bypass ? wf[wf_rp] : dec_m_tile;
  assign tile_row     = r;
  assign tile_last    = (r == 3'd7);
  assign col_base     = AW'({c, 3'b000});
  assign first_stripe = (s == 0);
  always_comb
    for (int i = 0; i < NT; i++) begin
      tile_valid[i] = consume && (i < int'(ins.ntm));
      act_load[i]   = (state == S_ACT_WAIT) && (ins.sel_a ? am_rvalid : an_rvalid) && (t == TW'(i));
    end
  assign act_data = ins.sel_a ? mb_rdata : nb_rdata;

  // ---------------------------------------------------------------- drain pipeline
  logic       d_issue;              // issuing accumulator reads
  logic [2:0] dj, p1_j, p2_j;
  logic       p1_v;
  logic [TILE_BITS-1:0] oent;

  assign acc_rd_addr  = AW'({g, dj, 3'b000});
  assign vop_in_valid = p1_v;
  assign vop_op       = ins.vop;
  assign vop_scalar   = ins.scalar;
  always_comb for (int i = 0; i < TILE_DIM; i++) vop_x[i] = acc_rd_data[t][i];

  // ---------------------------------------------------------------- A-port requests
  buf_req_t a_req;
  logic     a_gnt;
  always_comb begin
    a_req             = '0;
    a_req.check_valid = ins.check_valid;
    if (state == S_ACT_REQ) begin
      a_req.valid = 1'b1;
      a_req.dec   = ins.dec;
      a_req.addr  = ins.b + BUF_AW'(s) * BUF_AW'(ins.ntm) + BUF_AW'(t);
    end else if (state == S_DRAIN_WR) begin
      a_req.valid  = 1'b1;
      a_req.write  = 1'b1;
      a_req.vcount = ins.vcount;
      a_req.addr   = ins.c + BUF_AW'(t) * BUF_AW'(ngroups) + BUF_AW'(g);
      a_req.wdata  = oent;
    end
    am_req = '0;
    an_req = '0;
    if (state == S_ACT_REQ ? ins.sel_a : ins.sel_b) am_req = a_req;
    else                                            an_req = a_req;
    a_gnt = (state == S_ACT_REQ ? ins.sel_a : ins.sel_b) ? am_gnt : an_gnt;
  end

  logic any_tmac_busy;
  always_comb begin
    any_tmac_busy = 1'b0;
    for (int i = 0; i < NT; i++) any_tmac_busy |= tmac_busy[i];
  end

  assign instr_ready    = (state == S_IDLE);
  assign busy           = (state != S_IDLE);
  assign ev_tile        = consume;
  assign ev_wait_weight = (state == S_RUN) && !tile_avail;
  assign ev_wait_act    = (state == S_ACT_REQ) && !a_gnt;
  assign dec_flush      = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      ins   <= '0;
      s <= '0; c <= '0; r <= '0; t <= '0; g <= '0; ngroups <= '0;
      wf_wp <= '0; wf_rp <= '0; wf_cnt <= '0; wf_out <= 1'b0; wf_issued <= '0; ser <= '0;
      d_issue <= 1'b0; dj <= '0; p1_j <= '0; p2_j <= '0; p1_v <= 1'b0;
      oent <= '0;
    end else begin
      // weight FIFO
      if (w_rvalid) begin
        wf[wf_wp] <= mb_rdata;
        wf_wp     <= wf_wp + 2'd1;
      end
      if (w_req.valid && w_gnt) begin
        wf_out    <= 1'b1;
        wf_issued <= wf_issued + 16'd1;
      end else if (w_rvalid) begin
        wf_out    <= 1'b0;
      end
      if (dec_s_valid && dec_s_ready) ser <= ser + 2'd1;
      wf_cnt <= wf_cnt + 3'(w_rvalid) - 3'(wf_pop);
      if (wf_pop) wf_rp <= wf_rp + 2'd1;

      // drain pipeline registers
      p1_v <= (state == S_DRAIN) && d_issue;
      p1_j <= dj;
      p2_j <= p1_j;

      case (state)
        S_IDLE: if (instr_valid) begin
          ins       <= instr;
          s <= '0; c <= '0; r <= '0; t <= '0; g <= '0;
          ngroups   <= (instr.n2 + 8'd7) >> 3;
          wf_wp <= '0; wf_rp <= '0; wf_cnt <= '0; wf_issued <= '0; ser <= '0;
          state     <= S_ACT_REQ;
        end
        S_ACT_REQ:  if (a_gnt) state <= S_ACT_WAIT;
        S_ACT_WAIT: if (ins.sel_a ? am_rvalid : an_rvalid) begin
          if (t == TW'(ins.ntm - 3'd1)) begin
            t     <= '0;
            state <= S_RUN;
          end else begin
            t     <= t + 1'b1;
            state <= S_ACT_REQ;
          end
        end
        S_RUN: if (consume) begin
          r <= r + 3'd1;
          if (r == 3'd7) begin
            if (c == ins.n2 - 8'd1) begin
              c <= '0;
              s <= s + 8'd1;
              state <= (s == ins.n1 - 8'd1) ? S_FLUSH : S_ACT_REQ;
            end else begin
              c <= c + 8'd1;
            end
          end
        end
        S_FLUSH: if (!any_tmac_busy && !wf_out) begin
          // discard whatever the fetch engine read beyond the last tile
          wf_wp <= '0; wf_rp <= '0; wf_cnt <= '0; ser <= '0;
          t       <= '0;
          g       <= '0;
          dj      <= '0;
          d_issue <= 1'b1;
          oent    <= '0;
          state   <= S_DRAIN;
        end
        S_DRAIN: begin
          if (d_issue) begin
            dj <= dj + 3'd1;
            if (dj == 3'd7) d_issue <= 1'b0;
          end
          if (vop_out_valid) begin
            for (int i = 0; i < TILE_DIM; i++)
              oent[SEG_BITS*p2_j + 16*i +: 16] <=
                ((11'(g) << 3) + 11'(p2_j) < 11'(ins.n2)) ? fp32_to_bf16(vop_y[i]) : 16'h0000;
            if (p2_j == 3'd7) state <= S_DRAIN_WR;
          end
        end
        S_DRAIN_WR: if (a_gnt) begin
          oent    <= '0;
          dj      <= '0;
          d_issue <= 1'b1;
          if (g == ngroups - 8'd1) begin
            g <= '0;
            if (t == TW'(ins.ntm - 3'd1)) state <= S_IDLE;
            else begin
              t     <= t + 1'b1;
              state <= S_DRAIN;
            end
          end else begin
            g     <= g + 8'd1;
            state <= S_DRAIN;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) w_rvalid |-> wf_cnt < 3'(FD))
    else $error("compute_dma: weight FIFO overflow");
  assert property (@(posedge clk) disable iff (!rst_n)
                   (instr_valid && state == S_IDLE) |-> (instr.ntm != 0 && int'(instr.ntm) <= NT &&
                                                         instr.n1 != 0 && instr.n2 != 0))
    else $error("compute_dma: VMM with an empty shape or too many TMACs");
endmodule
