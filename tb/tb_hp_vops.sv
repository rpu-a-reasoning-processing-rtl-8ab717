// tb_hp_vops -- self-checking testbench of the 8-lane FP32 vector unit.
// Random FP32 operands (exponents kept close so that the real-valued
// reference is exact before its single rounding) and random BF16 scalars
// go through every operation, one vector every other cycle; every lane
// is compared with the real-arithmetic result rounded to FP32, one cycle
// after the input.
module tb_hp_vops;
  import rpu_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  in_valid, out_valid;
  vop_e  op;
  bf16_t scalar;
  fp32_t x [8];
  fp32_t y [8];

  hp_vops dut (.*);

  int checks = 0, failures = 0;

  function automatic fp32_t rnd_fp32();
    return {1'($urandom), 8'(120 + $urandom_range(0, 14)), 23'($urandom)};
  endfunction

  initial begin
    fp32_t xs [8];
    vop_e  ops;
    bf16_t ss;
    in_valid = 0; op = VOP_PASS; scalar = '0;
    for (int i = 0; i < 8; i++) x[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      in_valid = 1;
      op       = vop_e'(n % 4);
      scalar   = (n % 17 == 3) ? 16'h0000 : {1'($urandom), 8'(120 + $urandom_range(0, 14)), 7'($urandom)};
      for (int i = 0; i < 8; i++) x[i] = rnd_fp32();
      xs = x; ops = op; ss = scalar;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL out_valid missing"); end
      for (int i = 0; i < 8; i++) begin
        real a, s, e;
        fp32_t exp_b;
        a = fp32_val(xs[i]);
        s = bf16_val(ss);
        case (ops)
          VOP_MUL: e = a * s;
          VOP_ADD: e = a + s;
          VOP_MAX: e = (a > s) ? a : s;
          default: e = a;
        endcase
        exp_b = real_to_fp32(e);
        checks++;
        if (fp32_val(y[i]) != fp32_val(exp_b)) begin
          failures++;
          if (failures < 10) $display("FAIL op %0d lane %0d: %h %h -> %h expected %h", ops, i, xs[i], ss, y[i], exp_b);
        end
      end
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
