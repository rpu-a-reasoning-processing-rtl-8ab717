// net_dma -- network pipeline of a reasoning core.
//
// The core has two outgoing and two incoming links, 128 bits per cycle
// each (16 GB/s at 1 GHz): direction 0 is the ring through the cores of the
// same compute unit (CU), direction 1 the ring through the positionally
// aligned cores of the adjacent CUs. A packet is one 1024-bit network-buffer
// entry sent as 8 beats (valid/ready); every beat carries the header
// {dst entry, vcount, hops}.
//
// Transmit (instruction NET_SEND): read network-buffer entry a (with
// check_valid / dec from the instruction, so a send waits for the data it
// forwards and releases it afterwards), then send it on link `dir` to entry
// b of the receiving core with valid count vcount, to reach `hops` cores
// along that ring (0 is taken as 1).
//
// Receive, per direction: beats are packed into an assembly register; a
// complete packet moves to a hold register, which frees the link for the
// next packet. From the hold register the entry is written into the local
// network buffer (check_valid set, so an entry still owned by its consumers
// is never overwritten; vcount 0 in the header means forward only) and, when
// hops remain, forwarded on the same ring with hops-1 -- this is how one
// core's output fragment is broadcast to every core of a ring without
// software on the intermediate cores. A forward has priority over a new
// local send on the same link; a packet, once started, keeps its link until
// its last beat.
//
// Flow control: each core buffers two packets per incoming ring, so a ring
// of N cores cannot lock up as long as fewer than 2N packets are in flight
// on it; software keeps to that bound (one broadcast per core at a time is
// always safe).
//
// From the paper: software-programmed network DMAs, links to neighbouring
// cores within a CU and to the aligned core in adjacent CUs, incoming data
// written to the network buffer and consumed locally and/or forwarded by
// forwarding instructions, 16 GB/s per core. This design's choices: two
// unidirectional rings, the packet format, hop-count forwarding carried in
// the header, the two-packet receive buffering.
module net_dma
  import rpu_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 instr_valid,
  output logic                 instr_ready,
  input  instr_t               instr,
  output logic                 busy,
  // network-buffer ports: transmit read, receive write per direction
  output buf_req_t             tx_req,
  input  logic                 tx_gnt,
  input  logic                 tx_rvalid,
  input  logic [TILE_BITS-1:0] nb_rdata,
  output buf_req_t             rx_req [2],
  input  logic                 rx_gnt [2],
  // links
  output link_t                out_link  [2],
  input  logic                 out_ready [2],
  input  link_t                in_link   [2],
  output logic                 in_ready  [2],
  // event strobes (performance counters)
  output logic                 ev_forward [2]
);
  // ---------------------------------------------------------------- transmit engine
  typedef enum logic [1:0] {T_IDLE, T_RD, T_WAIT, T_SEND} tstate_e;
  tstate_e              ts;
  instr_t               ins;
  logic [TILE_BITS-1:0] tx_data;

  // ---------------------------------------------------------------- receive side
  logic [TILE_BITS-1:0] a_data [2];
  logic [BUF_AW-1:0]    a_dst  [2];
  logic [1:0]           a_vc   [2];
  logic [5:0]           a_hops [2];
  logic [2:0]           a_beat [2];
  logic                 a_full [2];
  logic [TILE_BITS-1:0] h_data [2];
  logic [BUF_AW-1:0]    h_dst  [2];
  logic [1:0]           h_vc   [2];
  logic [5:0]           h_hops [2];
  logic                 h_full [2];
  logic                 h_wr_done [2];
  logic                 h_fw_done [2];

  // ---------------------------------------------------------------- link ownership
  typedef enum logic [1:0] {O_NONE, O_FWD, O_TX} own_e;
  own_e       own  [2];
  logic [2:0] ob   [2];   // beat counter of the packet on the link
  logic       fw_want [2];
  logic       tx_want [2];
  logic       beat_go [2];

  assign instr_ready = (ts == T_IDLE);
  assign busy        = (ts != T_IDLE);

  always_comb begin
    tx_req             = '0;
    tx_req.valid       = (ts == T_RD);
    tx_req.check_valid = ins.check_valid;
    tx_req.dec         = ins.dec;
    tx_req.addr        = ins.a;
    for (int d = 0; d < 2; d++) begin
      fw_want[d] = h_full[d] && !h_fw_done[d];
      tx_want[d] = (ts == T_SEND) && (ins.dir == d[0]);
      rx_req[d]             = '0;
      rx_req[d].valid       = h_full[d] && !h_wr_done[d];
      rx_req[d].write       = 1'b1;
      rx_req[d].check_valid = 1'b1;
      rx_req[d].vcount      = h_vc[d];
      rx_req[d].addr        = h_dst[d];
      rx_req[d].wdata       = h_data[d];
      in_ready[d]           = !a_full[d];
      out_link[d] = '0;
      if (own[d] == O_FWD) begin
        out_link[d].valid  = 1'b1;
        out_link[d].last   = (ob[d] == 3'd7);
        out_link[d].dst    = h_dst[d];
        out_link[d].vcount = h_vc[d];
        out_link[d].hops   = h_hops[d] - 6'd1;
        out_link[d].data   = h_data[d][LINKW*ob[d] +: LINKW];
      end else if (own[d] == O_TX) begin
        out_link[d].valid  = 1'b1;
        out_link[d].last   = (ob[d] == 3'd7);
        out_link[d].dst    = ins.b;
        out_link[d].vcount = ins.vcount;
        out_link[d].hops   = (ins.hops == 0) ? 6'd0 : ins.hops - 6'd1;
        out_link[d].data   = tx_data[LINKW*ob[d] +: LINKW];
      end
      beat_go[d]    = out_link[d].valid && out_ready[d];
      ev_forward[d] = beat_go[d] && (own[d] == O_FWD) && out_link[d].last;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts      <= T_IDLE;
      ins     <= '0;
      tx_data <= '0;
      for (int d = 0; d < 2; d++) begin
        a_data[d] <= '0; a_dst[d] <= '0; a_vc[d] <= '0; a_hops[d] <= '0;
        a_beat[d] <= '0; a_full[d] <= 1'b0;
        h_data[d] <= '0; h_dst[d] <= '0; h_vc[d] <= '0; h_hops[d] <= '0;
        h_full[d] <= 1'b0; h_wr_done[d] <= 1'b0; h_fw_done[d] <= 1'b0;
        own[d]    <= O_NONE;
        ob[d]     <= '0;
      end
    end else begin
      // transmit engine
      case (ts)
        T_IDLE: if (instr_valid) begin ins <= instr; ts <= T_RD; end
        T_RD:   if (tx_gnt) ts <= T_WAIT;
        T_WAIT: if (tx_rvalid) begin tx_data <= nb_rdata; ts <= T_SEND; end
        default: ;   // T_SEND: left by the link logic below
      endcase

      for (int d = 0; d < 2; d++) begin
        // outgoing link
        if (own[d] == O_NONE) begin
          if (fw_want[d])      own[d] <= O_FWD;
          else if (tx_want[d]) own[d] <= O_TX;
          ob[d] <= '0;
        end else if (beat_go[d]) begin
          ob[d] <= ob[d] + 3'd1;
          if (ob[d] == 3'd7) begin
            if (own[d] == O_FWD) h_fw_done[d] <= 1'b1;
            else                 ts <= T_IDLE;
            own[d] <= O_NONE;
          end
        end

        // incoming link: assembly register
        if (in_link[d].valid && in_ready[d]) begin
          a_data[d][LINKW*a_beat[d] +: LINKW] <= in_link[d].data;
          a_dst[d]  <= in_link[d].dst;
          a_vc[d]   <= in_link[d].vcount;
          a_hops[d] <= in_link[d].hops;
          a_beat[d] <= a_beat[d] + 3'd1;
          if (in_link[d].last) begin
            a_full[d] <= 1'b1;
            a_beat[d] <= '0;
          end
        end

        // hold register
        if (h_full[d]) begin
          if (rx_req[d].valid && rx_gnt[d]) h_wr_done[d] <= 1'b1;
          if ((h_wr_done[d] || (rx_req[d].valid && rx_gnt[d])) &&
              (h_fw_done[d] || (own[d] == O_FWD && beat_go[d] && ob[d] == 3'd7)))
            h_full[d] <= 1'b0;
        end else if (a_full[d]) begin
          h_data[d]    <= a_data[d];
          h_dst[d]     <= a_dst[d];
          h_vc[d]      <= a_vc[d];
          h_hops[d]    <= a_hops[d];
          h_full[d]    <= 1'b1;
          h_wr_done[d] <= (a_vc[d] == 2'd0);
          h_fw_done[d] <= (a_hops[d] == 6'd0);
          a_full[d]    <= 1'b0;
        end
      end
    end
  end

  for (genvar d = 0; d < 2; d++) begin : g_chk
    // a packet on a link is never abandoned half-way
    assert property (@(posedge clk) disable iff (!rst_n)
                     (out_link[d].valid && !out_ready[d]) |=> out_link[d].valid)
      else $error("net_dma: link beat withdrawn before it was accepted");
  end
endmodule
