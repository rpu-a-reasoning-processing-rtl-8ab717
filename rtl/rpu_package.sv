// rpu_package -- one RPU package: N_CU compute units on a substrate, each
// with its two HBM-CO stacks (brought out here as N_CU x N_CORES
// pseudo-channel ports, since the DRAM is not part of this RTL).
//
// The package is a segment of the outer ring: the inter-CU links of core i
// run CU0 -> CU1 -> ... -> CU(N_CU-1) and leave the package on ring_out[i];
// ring_in[i] enters at CU0. A board closes the ring through the ring
// station (or, for a single package, by looping ring_out back to ring_in),
// so a broadcast on the inter-CU ring reaches the aligned core of every CU.
// The CU-to-CU links model the UCIe die-to-die connections as plain
// valid/ready wires.
//
// Default configuration: 4 CUs x 16 cores = 64 cores, 256 TMACs; 64
// pseudo-channels of 256 bits per 1 GHz cycle (2 TB/s).
//
// Host side: per-core program load strobes (shared address/data), a common
// start, per-core done and irq, common buffer-port priorities.
//
// From the paper: four CUs per package, each with a pair of HBM-CO
// memories, CUs forming a segment of the outer ring with short-reach links
// between neighbours. This design's choices: the link model and the ports.
module rpu_package
  import rpu_pkg::*;
#(
  parameter int unsigned N_CU     = 4,
  parameter int unsigned N_CORES  = 16,
  parameter int unsigned IM_DEPTH = 4096
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         imem_we   [N_CU][N_CORES],
  input  logic [$clog2(IM_DEPTH)-1:0]  imem_addr,
  input  instr_t                       imem_wdata,
  input  logic                         start,
  output logic                         done      [N_CU][N_CORES],
  output logic                         irq       [N_CU][N_CORES],
  input  logic [1:0]                   cfg_mb_prio [3],
  input  logic [1:0]                   cfg_nb_prio [4],
  output logic                         rd_req_valid  [N_CU][N_CORES],
  input  logic                         rd_req_ready  [N_CU][N_CORES],
  output logic [31:0]                  rd_addr       [N_CU][N_CORES],
  input  logic                         rd_resp_valid [N_CU][N_CORES],
  input  logic [MEMW-1:0]              rd_resp_data  [N_CU][N_CORES],
  output logic                         wr_valid      [N_CU][N_CORES],
  input  logic                         wr_ready      [N_CU][N_CORES],
  output logic [31:0]                  wr_addr       [N_CU][N_CORES],
  output logic [MEMW-1:0]              wr_data       [N_CU][N_CORES],
  // outer-ring segment ends (to/from the ring station)
  output link_t                        ring_out       [N_CORES],
  input  logic                         ring_out_ready [N_CORES],
  input  link_t                        ring_in        [N_CORES],
  output logic                         ring_in_ready  [N_CORES],
  output core_ev_t                     ev [N_CU][N_CORES]
);
  link_t cu_out     [N_CU][N_CORES];
  logic  cu_out_rdy [N_CU][N_CORES];
  link_t cu_in      [N_CU][N_CORES];
  logic  cu_in_rdy  [N_CU][N_CORES];

  for (genvar j = 0; j < N_CU; j++) begin : g_cu
    for (genvar i = 0; i < N_CORES; i++) begin : g_link
      if (j == 0) begin : g_first
        assign cu_in[0][i]      = ring_in[i];
        assign ring_in_ready[i] = cu_in_rdy[0][i];
      end else begin : g_mid
        assign cu_in[j][i]          = cu_out[j-1][i];
        assign cu_out_rdy[j-1][i]   = cu_in_rdy[j][i];
      end
      if (j == N_CU - 1) begin : g_last
        assign ring_out[i]          = cu_out[j][i];
        assign cu_out_rdy[j][i]     = ring_out_ready[i];
      end
    end

    compute_unit #(.N_CORES(N_CORES), .IM_DEPTH(IM_DEPTH)) u_cu (
      .clk, .rst_n,
      .imem_we(imem_we[j]), .imem_addr, .imem_wdata, .start,
      .done(done[j]), .irq(irq[j]), .cfg_mb_prio, .cfg_nb_prio,
      .rd_req_valid(rd_req_valid[j]), .rd_req_ready(rd_req_ready[j]), .rd_addr(rd_addr[j]),
      .rd_resp_valid(rd_resp_valid[j]), .rd_resp_data(rd_resp_data[j]),
      .wr_valid(wr_valid[j]), .wr_ready(wr_ready[j]), .wr_addr(wr_addr[j]), .wr_data(wr_data[j]),
      .inter_out(cu_out[j]), .inter_out_ready(cu_out_rdy[j]),
      .inter_in(cu_in[j]), .inter_in_ready(cu_in_rdy[j]),
      .ev(ev[j])
    );
  end
endmodule
