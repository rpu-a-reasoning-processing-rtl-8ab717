// tb_inst_fetch -- self-checking testbench of the instruction fetch unit.
// Loads a 40-instruction program of random memory, compute, network and
// NOP instructions ending in HALT, starts it, drains the three queues with
// random ready patterns and checks that every pipeline receives exactly its
// own instructions in program order, that NOPs are dropped, that fetch
// stops at HALT (an instruction placed after HALT is never dispatched) and
// that a full queue makes fetch wait without losing instructions. Also
// checks that with all queues ready the program is dispatched at one
// instruction per cycle.
module tb_inst_fetch;
  import rpu_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        imem_we, start, halted;
  logic [11:0] imem_addr;
  instr_t      imem_wdata;
  logic        q_valid [3];
  logic        q_ready [3];
  instr_t      q_instr [3];

  inst_fetch dut (.*);

  int checks = 0, failures = 0;
  instr_t prog [$];
  instr_t expq [3][$];
  int     got [3];

  task automatic run(input int ready_pct, output int cycles);
    for (int q = 0; q < 3; q++) begin expq[q].delete(); got[q] = 0; end
    prog.delete();
    for (int i = 0; i < 40; i++) begin
      instr_t x;
      x = '0;
      x.a = 16'(i);
      x.cnt = 16'($urandom);
      case ($urandom_range(0, 4))
        0: x.op = OP_MEM_LOAD;
        1: x.op = OP_MEM_STORE;
        2: x.op = OP_VMM;
        3: x.op = OP_NET_SEND;
        default: x.op = OP_NOP;
      endcase
      prog.push_back(x);
      case (x.op)
        OP_MEM_LOAD, OP_MEM_STORE: expq[0].push_back(x);
        OP_VMM:                    expq[1].push_back(x);
        OP_NET_SEND:               expq[2].push_back(x);
        default: ;
      endcase
    end
    begin instr_t h; h = '0; h.op = OP_HALT; prog.push_back(h); end
    begin instr_t v; v = '0; v.op = OP_VMM; v.a = 16'hDEAD; prog.push_back(v); end   // after HALT
    for (int i = 0; i < prog.size(); i++) begin
      @(negedge clk);
      imem_we = 1; imem_addr = 12'(i); imem_wdata = prog[i];
    end
    @(negedge clk);
    imem_we = 0; start = 1;
    @(negedge clk);
    start = 0;
    cycles = 0;
    while (cycles < 2000) begin
      for (int q = 0; q < 3; q++) q_ready[q] = ($urandom_range(1, 100) <= ready_pct);
      #1;
      for (int q = 0; q < 3; q++)
        if (q_valid[q] && q_ready[q]) begin
          checks++;
          if (got[q] >= expq[q].size() || q_instr[q] != expq[q][got[q]]) begin
            failures++;
            $display("FAIL queue %0d instruction %0d: a=%h", q, got[q], q_instr[q].a);
          end
          got[q]++;
        end
      @(negedge clk);
      cycles++;
      if (halted && !q_valid[0] && !q_valid[1] && !q_valid[2]) break;
    end
    for (int q = 0; q < 3; q++) begin
      checks++;
      if (got[q] != expq[q].size()) begin
        failures++;
        $display("FAIL queue %0d got %0d of %0d", q, got[q], expq[q].size());
      end
    end
  endtask

  initial begin
    int cyc;
    imem_we = 0; start = 0; imem_addr = '0; imem_wdata = '0;
    for (int q = 0; q < 3; q++) q_ready[q] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    checks++;
    if (!halted) begin failures++; $display("FAIL not halted after reset"); end
    run(30, cyc);
    run(100, cyc);
    checks++;
    if (cyc > 42 + 4) begin failures++; $display("FAIL dispatch rate: %0d cycles for 42 instructions", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
