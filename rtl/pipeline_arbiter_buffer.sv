// pipeline_arbiter_buffer -- an on-chip SRAM buffer with the pipeline arbiter
// embedded in it. Instantiated as the core's memory buffer (512 KB) and
// network buffer (256 KB).
//
// Every entry (W bits, one 64 x BF16 tile) carries a 2-bit valid counter:
// the number of consumers that still have to read it. Requests from NP DMA
// ports are serialised: at most one port is granted per cycle, so a read,
// a write or a counter update is atomic per entry.
//   write: stores wdata and sets the counter to vcount. With check_valid it
//          is held back while the counter is non-zero (entry still owned).
//   read:  returns the entry (rdata, rvalid[p] one cycle after the grant).
//          With check_valid it is held back while the counter is zero (data
//          not yet produced); with dec the counter is decremented.
// A request that is held back raises stall[p] and does not block requests
// from other ports. Among the eligible requests the grant goes to the port
// that comes first in prio[], a software-set priority order (prio[0] is the
// highest-priority port number). A requester keeps its request steady until
// gnt[p].
//
// From the paper: one buffer per pipeline with an arbiter embedded, 2-bit
// valid counters per entry, valid_count on writes, check_valid on writes
// and reads, optional decrement on reads, one access per cycle under a
// software-configurable priority. This design's choices: the port protocol,
// one-cycle read latency, a priority permutation as the policy, counters
// cleared by reset, data left uninitialised.
module pipeline_arbiter_buffer
  import rpu_pkg::*;
#(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned W     = TILE_BITS,
  parameter int unsigned NP    = 3
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [$clog2(NP)-1:0]   prio   [NP],
  input  buf_req_t                req    [NP],
  output logic                    gnt    [NP],
  output logic                    stall  [NP],
  output logic                    rvalid [NP],
  output logic [W-1:0]            rdata
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [1:0]   vcnt [DEPTH];

  logic          elig [NP];
  logic          any;
  logic [$clog2(NP)-1:0] win;

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      logic [1:0] c;
      c = vcnt[AW'(req[p].addr)];
      if (!req[p].valid)        elig[p] = 1'b0;
      else if (req[p].write)    elig[p] = !req[p].check_valid || (c == 2'd0);
      else                      elig[p] = !req[p].check_valid || (c != 2'd0);
      stall[p] = req[p].valid && !elig[p];
    end
    any = 1'b0;
    win = '0;
    for (int i = NP - 1; i >= 0; i--)
      if (elig[prio[i]]) begin
        any = 1'b1;
        win = prio[i];
      end
    for (int p = 0; p < NP; p++) gnt[p] = any && (win == p[$clog2(NP)-1:0]);
  end

  // data array
  always_ff @(posedge clk) begin
    if (any) begin
      if (req[win].write) mem[AW'(req[win].addr)] <= req[win].wdata[W-1:0];
      else                rdata <= mem[AW'(req[win].addr)];
    end
  end

  // valid counters and read-valid pulses
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) vcnt[i] <= 2'd0;
      for (int p = 0; p < NP; p++) rvalid[p] <= 1'b0;
    end else begin
      for (int p = 0; p < NP; p++) rvalid[p] <= gnt[p] && !req[p].write;
      if (any) begin
        if (req[win].write)
          vcnt[AW'(req[win].addr)] <= req[win].vcount;
        else if (req[win].dec && vcnt[AW'(req[win].addr)] != 2'd0)
          vcnt[AW'(req[win].addr)] <= vcnt[AW'(req[win].addr)] - 2'd1;
      end
    end
  end

  // at most one grant per cycle, and only to a requesting port
  always_comb begin
    int n;
    n = 0;
    for (int p = 0; p < NP; p++) if (gnt[p]) n++;
    assert (!rst_n || n <= 1) else $error("pipeline_arbiter_buffer: several grants");
  end
  for (genvar p = 0; p < NP; p++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) gnt[p] |-> req[p].valid)
      else $error("pipeline_arbiter_buffer: grant without request");
  end
endmodule
