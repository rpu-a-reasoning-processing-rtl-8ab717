// reasoning_core -- one RPU reasoning core: a NUMA domain of its own with a
// private HBM-CO pseudo-channel, on-chip buffers and three decoupled
// pipelines.
//
// Structure:
//   inst_fetch      64 KB instruction memory, fetch, one queue per pipeline
//   mem_dma         memory pipeline: pseudo-channel <-> memory buffer
//   compute_dma     compute pipeline: memory/network buffer -> stream
//                   decoder -> 1024-bit compute bus -> NT TMACs -> HP-VOPs ->
//                   network/memory buffer
//   net_dma         network pipeline: network buffer <-> two ring links
//   memory buffer   pipeline_arbiter_buffer, MB_DEPTH x 1024b (512 KB),
//                   ports 0 mem_dma, 1 compute weights, 2 compute act/out
//   network buffer  pipeline_arbiter_buffer, NB_DEPTH x 1024b (256 KB),
//                   ports 0 receive intra-CU ring, 1 receive inter-CU ring,
//                   2 network send, 3 compute act/out
//   NT x tmac, stream_decoder, hp_vops
// The pipelines never wait for each other directly: a consumer waits on the
// valid counter of the buffer entry it needs (check_valid), a producer on
// the entry becoming free. The buffer port priorities come from the
// cfg_mb_prio / cfg_nb_prio inputs (software-set, static while running).
//
// Host interface: program load (imem_*), start, done (program halted and
// every pipeline idle) and irq, a one-cycle pulse when done rises.
//
// From the paper: the core's block structure (memory/network buffers with
// pipeline arbiters, four TMACs, stream decoder, HP-VOPs, compute/memory/
// network control, I$), its buffer sizes and bus rates, NUMA operation with
// a private pseudo-channel. This design's choices are listed in each
// sub-module; the wiring of buffer ports is this design's own.
module reasoning_core
  import rpu_pkg::*;
#(
  parameter int unsigned NT        = 4,
  parameter int unsigned MB_DEPTH  = 4096,
  parameter int unsigned NB_DEPTH  = 2048,
  parameter int unsigned ACC_DEPTH = 8192,
  parameter int unsigned IM_DEPTH  = 4096
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host
  input  logic                          imem_we,
  input  logic [$clog2(IM_DEPTH)-1:0]   imem_addr,
  input  instr_t                        imem_wdata,
  input  logic                          start,
  output logic                          done,
  output logic                          irq,
  input  logic [1:0]                    cfg_mb_prio [3],
  input  logic [1:0]                    cfg_nb_prio [4],
  // HBM-CO pseudo-channel
  output logic                          rd_req_valid,
  input  logic                          rd_req_ready,
  output logic [31:0]                   rd_addr,
  input  logic                          rd_resp_valid,
  input  logic [MEMW-1:0]               rd_resp_data,
  output logic                          wr_valid,
  input  logic                          wr_ready,
  output logic [31:0]                   wr_addr,
  output logic [MEMW-1:0]               wr_data,
  // ring links: 0 intra-CU, 1 inter-CU
  output link_t                         out_link  [2],
  input  logic                          out_ready [2],
  input  link_t                         in_link   [2],
  output logic                          in_ready  [2],
  output core_ev_t                      ev
);
  localparam int unsigned AW = $clog2(ACC_DEPTH);

  // ---------------------------------------------------------------- fetch
  logic   q_valid [3];
  logic   q_ready [3];
  instr_t q_instr [3];
  logic   halted;

  inst_fetch #(.DEPTH(IM_DEPTH)) u_fetch (
    .clk, .rst_n, .imem_we, .imem_addr, .imem_wdata, .start, .halted,
    .q_valid, .q_ready, .q_instr
  );

  // ---------------------------------------------------------------- buffers
  buf_req_t             mb_req [3];
  logic                 mb_gnt [3], mb_stall [3], mb_rvalid [3];
  logic [TILE_BITS-1:0] mb_rdata;
  buf_req_t             nb_req [4];
  logic                 nb_gnt [4], nb_stall [4], nb_rvalid [4];
  logic [TILE_BITS-1:0] nb_rdata;

  pipeline_arbiter_buffer #(.DEPTH(MB_DEPTH), .NP(3)) u_mem_buf (
    .clk, .rst_n, .prio(cfg_mb_prio), .req(mb_req), .gnt(mb_gnt),
    .stall(mb_stall), .rvalid(mb_rvalid), .rdata(mb_rdata)
  );
  pipeline_arbiter_buffer #(.DEPTH(NB_DEPTH), .NP(4)) u_net_buf (
    .clk, .rst_n, .prio(cfg_nb_prio), .req(nb_req), .gnt(nb_gnt),
    .stall(nb_stall), .rvalid(nb_rvalid), .rdata(nb_rdata)
  );

  // ---------------------------------------------------------------- memory pipeline
  logic mem_busy;
  mem_dma u_mem_dma (
    .clk, .rst_n,
    .instr_valid(q_valid[0]), .instr_ready(q_ready[0]), .instr(q_instr[0]), .busy(mem_busy),
    .mb_req(mb_req[0]), .mb_gnt(mb_gnt[0]), .mb_rvalid(mb_rvalid[0]), .mb_rdata,
    .rd_req_valid, .rd_req_ready, .rd_addr, .rd_resp_valid, .rd_resp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data
  );

  // ---------------------------------------------------------------- network pipeline
  logic     net_busy;
  buf_req_t rx_req [2];
  logic     rx_gnt [2];
  logic     ev_fwd [2];
  assign nb_req[0] = rx_req[0];
  assign nb_req[1] = rx_req[1];
  assign rx_gnt[0] = nb_gnt[0];
  assign rx_gnt[1] = nb_gnt[1];

  net_dma u_net_dma (
    .clk, .rst_n,
    .instr_valid(q_valid[2]), .instr_ready(q_ready[2]), .instr(q_instr[2]), .busy(net_busy),
    .tx_req(nb_req[2]), .tx_gnt(nb_gnt[2]), .tx_rvalid(nb_rvalid[2]), .nb_rdata,
    .rx_req, .rx_gnt, .out_link, .out_ready, .in_link, .in_ready, .ev_forward(ev_fwd)
  );

  // ---------------------------------------------------------------- compute pipeline
  logic                 comp_busy;
  logic                 dec_flush, dec_s_valid, dec_s_ready, dec_m_valid, dec_m_ready;
  wfmt_e                dec_fmt;
  logic [MEMW-1:0]      dec_s_data;
  logic [TILE_BITS-1:0] dec_m_tile;
  logic                 act_load [NT];
  logic [TILE_BITS-1:0] act_data;
  logic                 tile_valid [NT];
  logic [TILE_BITS-1:0] tile;
  logic [2:0]           tile_row;
  logic                 tile_last, first_stripe;
  logic [AW-1:0]        col_base, acc_rd_addr;
  fp32_t                acc_rd_data [NT][TILE_DIM];
  logic                 tmac_busy [NT];
  logic                 vop_in_valid, vop_out_valid;
  vop_e                 vop_op;
  bf16_t                vop_scalar;
  fp32_t                vop_x [TILE_DIM];
  fp32_t                vop_y [TILE_DIM];
  logic                 ev_tile, ev_wait_weight, ev_wait_act;

  compute_dma #(.NT(NT), .ACC_DEPTH(ACC_DEPTH)) u_comp_dma (
    .clk, .rst_n,
    .instr_valid(q_valid[1]), .instr_ready(q_ready[1]), .instr(q_instr[1]), .busy(comp_busy),
    .w_req(mb_req[1]), .w_gnt(mb_gnt[1]), .w_rvalid(mb_rvalid[1]), .mb_rdata,
    .am_req(mb_req[2]), .am_gnt(mb_gnt[2]), .am_rvalid(mb_rvalid[2]),
    .an_req(nb_req[3]), .an_gnt(nb_gnt[3]), .an_rvalid(nb_rvalid[3]), .nb_rdata,
    .dec_flush, .dec_fmt, .dec_s_valid, .dec_s_ready, .dec_s_data,
    .dec_m_valid, .dec_m_ready, .dec_m_tile,
    .act_load, .act_data, .tile_valid, .tile, .tile_row, .tile_last, .col_base, .first_stripe,
    .acc_rd_addr, .acc_rd_data, .tmac_busy,
    .vop_in_valid, .vop_op, .vop_scalar, .vop_x, .vop_out_valid, .vop_y,
    .ev_tile, .ev_wait_weight, .ev_wait_act
  );

  stream_decoder u_stream_dec (
    .clk, .rst_n, .flush(dec_flush), .fmt(dec_fmt),
    .s_valid(dec_s_valid), .s_ready(dec_s_ready), .s_data(dec_s_data),
    .m_valid(dec_m_valid), .m_ready(dec_m_ready), .m_tile(dec_m_tile)
  );

  for (genvar i = 0; i < NT; i++) begin : g_tmac
    tmac #(.ACC_DEPTH(ACC_DEPTH)) u_tmac (
      .clk, .rst_n,
      .act_load(act_load[i]), .act_data,
      .tile_valid(tile_valid[i]), .tile, .tile_row, .tile_last, .col_base, .first_stripe,
      .acc_rd_addr, .acc_rd_data(acc_rd_data[i]), .busy(tmac_busy[i])
    );
  end

  hp_vops u_hp_vops (
    .clk, .rst_n, .in_valid(vop_in_valid), .op(vop_op), .scalar(vop_scalar),
    .x(vop_x), .out_valid(vop_out_valid), .y(vop_y)
  );

  // ---------------------------------------------------------------- status
  logic done_q;
  assign done = halted && !q_valid[0] && !q_valid[1] && !q_valid[2] &&
                !mem_busy && !comp_busy && !net_busy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done_q <= 1'b1;
    else        done_q <= done;
  end
  assign irq = done && !done_q;

  always_comb begin
    int nreq;
    nreq = 0;
    for (int p = 0; p < 4; p++) if (nb_req[p].valid) nreq++;
    ev.tile        = ev_tile;
    ev.wait_weight = ev_wait_weight;
    ev.wait_act    = ev_wait_act;
    ev.fwd_intra   = ev_fwd[0];
    ev.fwd_inter   = ev_fwd[1];
    ev.mb_stall    = mb_stall[0] | mb_stall[1] | mb_stall[2];
    ev.nb_stall    = nb_stall[0] | nb_stall[1] | nb_stall[2] | nb_stall[3];
    ev.nb_conflict = nreq > 1;
  end
endmodule
