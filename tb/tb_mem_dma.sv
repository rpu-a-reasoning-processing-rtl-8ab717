// tb_mem_dma -- self-checking testbench of the memory DMA, with a real
// memory buffer (pipeline_arbiter_buffer, port 0 = DMA, port 1 = testbench)
// and a behavioural pseudo-channel (12-cycle read latency).
// Checks: MEM_LOAD of 8 entries packs 4 beats per entry in order and sets
// the valid counters, at one beat per cycle (<= 4*8 + latency + 8 cycles);
// MEM_STORE writes the entries back beat by beat; a checked MEM_LOAD into
// entries that still hold unread data waits until the consumer has read
// them, then overwrites them.
module tb_mem_dma;
  import rpu_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic instr_valid, instr_ready, busy;
  instr_t instr;
  buf_req_t req [2];
  logic gnt [2], stall [2], rvalid [2];
  logic [TILE_BITS-1:0] rdata;
  logic prio [2];
  logic rd_req_valid, rd_req_ready, rd_resp_valid, wr_valid, wr_ready;
  logic [31:0] rd_addr, wr_addr;
  logic [MEMW-1:0] rd_resp_data, wr_data;

  mem_dma dut (
    .clk, .rst_n, .instr_valid, .instr_ready, .instr, .busy,
    .mb_req(req[0]), .mb_gnt(gnt[0]), .mb_rvalid(rvalid[0]), .mb_rdata(rdata),
    .rd_req_valid, .rd_req_ready, .rd_addr, .rd_resp_valid, .rd_resp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data
  );
  pipeline_arbiter_buffer #(.DEPTH(64), .NP(2)) u_mb (
    .clk, .rst_n, .prio, .req, .gnt, .stall, .rvalid, .rdata
  );
  logic pl_we;
  logic [31:0] pl_addr, pk_addr;
  logic [MEMW-1:0] pl_data, pk_data;
  hbm_co_model #(.DEPTH(4096), .LAT(12)) u_hbm (
    .clk, .rst_n, .rd_req_valid, .rd_req_ready, .rd_addr, .rd_resp_valid, .rd_resp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .pl_we, .pl_addr, .pl_data, .pk_addr, .pk_data
  );
  logic [MEMW-1:0] src [64];          // what was preloaded at beats 100..163


  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic issue(input opcode_e op, input int a, input int ext, input int cnt,
                       input bit cv, input int vc, output int cycles);
    @(negedge clk);
    instr = '0;
    instr.op = op; instr.a = 16'(a); {instr.b, instr.c} = 32'(ext); instr.cnt = 16'(cnt);
    instr.check_valid = cv; instr.vcount = 2'(vc);
    instr_valid = 1;
    @(negedge clk);
    instr_valid = 0;
    cycles = 1;
    while (busy) begin @(negedge clk); cycles++; end
  endtask

  task automatic tb_read(input int a, output logic [TILE_BITS-1:0] d);
    @(negedge clk);
    req[1] = '0; req[1].valid = 1; req[1].addr = 16'(a); req[1].check_valid = 1; req[1].dec = 1;
    #1;
    while (!gnt[1]) begin @(negedge clk); #1; end
    @(negedge clk);
    req[1] = '0;
    d = rdata;
  endtask

  initial begin
    int cyc;
    logic [TILE_BITS-1:0] d;
    instr_valid = 0; instr = '0; req[1] = '0; pl_we = 0; pl_addr = 0; pl_data = '0; pk_addr = 0;
    prio = '{1'b0, 1'b1};
    repeat (3) @(negedge clk);
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      src[i] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      pl_we = 1; pl_addr = 32'(100 + i); pl_data = src[i];
    end
    @(negedge clk);
    pl_we = 0;
    rst_n = 1;

    issue(OP_MEM_LOAD, 10, 100, 8, 1, 1, cyc);
    check(cyc <= 4 * 8 + 12 + 8, $sformatf("load of 8 entries took %0d cycles", cyc));
    for (int e = 0; e < 8; e++) begin
      check(u_mb.vcnt[10 + e] == 1, "valid counter set by load");
      tb_read(10 + e, d);
      check(d == {src[4*e + 3], src[4*e + 2], src[4*e + 1], src[4*e]},
            $sformatf("entry %0d packed from 4 beats", e));
    end
    // store entries 10..17 (now consumed, so unchecked) to beat 2000
    issue(OP_MEM_STORE, 10, 2000, 8, 0, 0, cyc);
    for (int b = 0; b < 32; b++) begin
      pk_addr = 32'(2000 + b);
      #1 check(pk_data == src[b], $sformatf("stored beat %0d", b));
    end
    // occupied entries: checked load must wait for the consumer
    issue(OP_MEM_LOAD, 30, 100, 2, 1, 1, cyc);
    fork
      issue(OP_MEM_LOAD, 30, 140, 2, 1, 1, cyc);
      begin
        repeat (60) @(negedge clk);
        check(busy, "checked load waits on occupied entries");
        tb_read(30, d);
        check(d[MEMW-1:0] == src[0], "consumer reads old data first");
        tb_read(31, d);
      end
    join
    tb_read(30, d);
    check(d[MEMW-1:0] == src[40], "entry overwritten after it was consumed");
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
