// compute_unit -- one compute chiplet (CU): N_CORES reasoning cores, half
// along each of the two memory shorelines, each with its own HBM-CO
// pseudo-channel (two HBM-CO stacks of 8 pseudo-channels per CU at the
// default of 16 cores, 2 x 256 GB/s).
//
// Network: the cores' direction-0 links form a unidirectional ring through
// all cores of the CU (core i sends to core i+1 mod N_CORES). The
// direction-1 links of core i leave the CU as inter_out[i] / inter_in[i]
// and are joined, at package level, to core i of the neighbouring CUs.
//
// Host side: every core has its own program-load strobe, start, done and
// irq; the load address and data are shared. The buffer-port priorities are
// common to all cores of the CU.
//
// From the paper: 16 cores per CU, each with its own pseudo-channel, links
// to neighbouring cores within the CU and to the aligned core of adjacent
// CUs. This design's choices: a single ring as the intra-CU topology and the
// host interface.
module compute_unit
  import rpu_pkg::*;
#(
  parameter int unsigned N_CORES  = 16,
  parameter int unsigned IM_DEPTH = 4096
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         imem_we   [N_CORES],
  input  logic [$clog2(IM_DEPTH)-1:0]  imem_addr,
  input  instr_t                       imem_wdata,
  input  logic                         start,
  output logic                         done      [N_CORES],
  output logic                         irq       [N_CORES],
  input  logic [1:0]                   cfg_mb_prio [3],
  input  logic [1:0]                   cfg_nb_prio [4],
  // HBM-CO pseudo-channels, one per core
  output logic                         rd_req_valid  [N_CORES],
  input  logic                         rd_req_ready  [N_CORES],
  output logic [31:0]                  rd_addr       [N_CORES],
  input  logic                         rd_resp_valid [N_CORES],
  input  logic [MEMW-1:0]              rd_resp_data  [N_CORES],
  output logic                         wr_valid      [N_CORES],
  input  logic                         wr_ready      [N_CORES],
  output logic [31:0]                  wr_addr       [N_CORES],
  output logic [MEMW-1:0]              wr_data       [N_CORES],
  // links to the aligned cores of the neighbouring CUs
  output link_t                        inter_out       [N_CORES],
  input  logic                         inter_out_ready [N_CORES],
  input  link_t                        inter_in        [N_CORES],
  output logic                         inter_in_ready  [N_CORES],
  output core_ev_t                     ev [N_CORES]
);
  link_t ring      [N_CORES];   // ring[i]: link leaving core i
  logic  ring_rdy  [N_CORES];   // ready seen by core i's outgoing ring link

  for (genvar i = 0; i < N_CORES; i++) begin : g_core
    localparam int unsigned PREV = (i + N_CORES - 1) % N_CORES;
    link_t out_l [2];
    logic  out_r [2];
    link_t in_l  [2];
    logic  in_r  [2];

    assign ring[i]      = out_l[0];
    assign out_r[0]     = ring_rdy[i];
    assign in_l[0]      = ring[PREV];
    assign ring_rdy[PREV] = in_r[0];

    assign inter_out[i]      = out_l[1];
    assign out_r[1]          = inter_out_ready[i];
    assign in_l[1]           = inter_in[i];
    assign inter_in_ready[i] = in_r[1];

    reasoning_core #(.IM_DEPTH(IM_DEPTH)) u_core (
      .clk, .rst_n,
      .imem_we(imem_we[i]), .imem_addr, .imem_wdata, .start,
      .done(done[i]), .irq(irq[i]), .cfg_mb_prio, .cfg_nb_prio,
      .rd_req_valid(rd_req_valid[i]), .rd_req_ready(rd_req_ready[i]), .rd_addr(rd_addr[i]),
      .rd_resp_valid(rd_resp_valid[i]), .rd_resp_data(rd_resp_data[i]),
      .wr_valid(wr_valid[i]), .wr_ready(wr_ready[i]), .wr_addr(wr_addr[i]), .wr_data(wr_data[i]),
      .out_link(out_l), .out_ready(out_r), .in_link(in_l), .in_ready(in_r),
      .ev(ev[i])
    );
  end
endmodule
