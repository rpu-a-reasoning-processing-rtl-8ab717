// hbm_co_model -- behavioural model of one HBM-CO pseudo-channel for the
// testbenches (not synthesizable logic, no DRAM timing): a word array of
// DEPTH 256-bit beats, read requests always accepted and answered in order
// LAT cycles later, writes always accepted; requests are ignored while
// rst_n is low. Addresses wrap modulo DEPTH.
// A testbench fills it through the pl_* preload port (one beat per cycle,
// taking precedence over a write from the design) and inspects it through
// the combinational pk_* peek port.
module hbm_co_model #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned LAT   = 12
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           rd_req_valid,
  output logic           rd_req_ready,
  input  logic [31:0]    rd_addr,
  output logic           rd_resp_valid,
  output logic [255:0]   rd_resp_data,
  input  logic           wr_valid,
  output logic           wr_ready,
  input  logic [31:0]    wr_addr,
  input  logic [255:0]   wr_data,
  input  logic           pl_we,
  input  logic [31:0]    pl_addr,
  input  logic [255:0]   pl_data,
  input  logic [31:0]    pk_addr,
  output logic [255:0]   pk_data
);
  logic [255:0] mem [DEPTH];
  logic         pv [LAT];
  logic [255:0] pd [LAT];
  int           reads, writes;

  assign rd_req_ready  = 1'b1;
  assign wr_ready      = 1'b1;
  assign rd_resp_valid = pv[LAT-1];
  assign rd_resp_data  = pd[LAT-1];
  assign pk_data       = mem[pk_addr % DEPTH];

  initial begin
    for (int i = 0; i < LAT; i++) begin pv[i] = 1'b0; pd[i] = '0; end
    reads = 0; writes = 0;
  end

  always @(posedge clk) begin
    for (int i = LAT - 1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    pv[0] <= rd_req_valid && rst_n;
    pd[0] <= mem[rd_addr % DEPTH];
    if (rd_req_valid && rst_n) reads <= reads + 1;
    if (pl_we) begin
      mem[pl_addr % DEPTH] <= pl_data;
    end else if (wr_valid && rst_n) begin
      mem[wr_addr % DEPTH] <= wr_data;
      writes <= writes + 1;
    end
  end
endmodule
