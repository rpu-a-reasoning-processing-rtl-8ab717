// tb_pipeline_arbiter_buffer -- self-checking testbench of the buffer with
// its pipeline arbiter (3 ports, 64 entries).
// Checks: a write sets the valid counter and data; reads with check_valid
// and dec return the data and count down; a checked read of a consumed
// entry stalls until a producer rewrites it; a checked write to an occupied
// entry stalls until the last consumer has read it; simultaneous requests
// are granted one per cycle in the programmed priority order, and the order
// follows a change of the priority setting; a stalled port does not block
// the others; read data arrive one cycle after the grant.
module tb_pipeline_arbiter_buffer;
  import rpu_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [1:0]           prio   [3];
  buf_req_t             req    [3];
  logic                 gnt    [3];
  logic                 stall  [3];
  logic                 rvalid [3];
  logic [TILE_BITS-1:0] rdata;

  pipeline_arbiter_buffer #(.DEPTH(64), .NP(3)) dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic buf_req_t mk(input bit we, input int addr, input bit cv, input bit dec,
                                  input int vc, input logic [TILE_BITS-1:0] d);
    buf_req_t r;
    r = '0;
    r.valid = 1; r.write = we; r.addr = 16'(addr); r.check_valid = cv; r.dec = dec;
    r.vcount = 2'(vc); r.wdata = d;
    return r;
  endfunction

  // issue on port p and wait for the grant; returns cycles waited
  task automatic access(input int p, input buf_req_t r, output int waited);
    waited = 0;
    @(negedge clk);
    req[p] = r;
    #1;
    while (!gnt[p]) begin @(negedge clk); #1; waited++; end
    @(negedge clk);
    req[p] = '0;
  endtask

  initial begin
    int wt;
    logic [TILE_BITS-1:0] d0, d1;
    for (int p = 0; p < 3; p++) req[p] = '0;
    prio = '{2'd0, 2'd1, 2'd2};
    repeat (3) @(negedge clk);
    rst_n = 1;
    d0 = {32{32'hCAFE0000 + 32'($urandom_range(0, 65535))}};
    d1 = {32{32'h0BAD0000 + 32'($urandom_range(0, 65535))}};

    // producer writes entry 5 with two consumers
    access(0, mk(1, 5, 1, 0, 2, d0), wt);
    check(wt == 0, "write to a free entry granted at once");
    check(dut.vcnt[5] == 2, "valid counter set to 2");
    // consumer 1 reads with check/dec
    @(negedge clk); req[1] = mk(0, 5, 1, 1, 0, '0); #1;
    check(gnt[1], "checked read of valid entry granted");
    @(negedge clk); req[1] = '0; #1;
    check(rvalid[1] && rdata == d0, "read data one cycle after grant");
    check(dut.vcnt[5] == 1, "counter decremented to 1");
    // producer tries to overwrite: must stall while consumer 2 has not read
    fork
      begin
        access(0, mk(1, 5, 1, 0, 1, d1), wt);
        check(wt >= 5, "checked write stalls while the entry is owned");
      end
      begin
        repeat (3) @(negedge clk);
        #1 check(stall[0], "stall flag raised for the held-back write");
        repeat (3) @(negedge clk);
        access(2, mk(0, 5, 1, 1, 0, '0), wt);
      end
    join
    check(dut.vcnt[5] == 1 && dut.mem[5] == d1, "overwrite after last consumer");
    // consumer of an empty entry stalls until it is produced, others proceed
    fork
      begin
        access(1, mk(0, 9, 1, 1, 0, '0), wt);
        check(wt >= 3, "checked read of an empty entry stalls");
        #1 check(rdata == d0, "stalled read returns the produced data");
      end
      begin
        @(negedge clk);
        access(2, mk(1, 10, 0, 0, 1, d1), wt);
        check(wt == 0, "other port proceeds past a stalled one");
        access(0, mk(1, 9, 1, 0, 1, d0), wt);
      end
    join
    // priority: all three request in the same cycle
    for (int round = 0; round < 2; round++) begin
      int order [3];
      int n;
      if (round == 1) prio = '{2'd2, 2'd0, 2'd1};
      @(negedge clk);
      for (int p = 0; p < 3; p++) req[p] = mk(0, 20 + p, 0, 0, 0, '0);
      n = 0;
      while (n < 3) begin
        #1;
        for (int p = 0; p < 3; p++) if (gnt[p]) begin order[n] = p; n++; req[p] = '0; end
        @(negedge clk);
      end
      check(order[0] == int'(prio[0]) && order[1] == int'(prio[1]) && order[2] == int'(prio[2]),
            $sformatf("grant order follows priority setting (round %0d: %0d %0d %0d)",
                      round, order[0], order[1], order[2]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
