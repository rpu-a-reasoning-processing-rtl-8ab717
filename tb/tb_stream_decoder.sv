// tb_stream_decoder -- self-checking testbench of the stream decoder.
// For every supported format it builds a bit stream of random tile records
// (shared exponent + 64 random elements, packed back to back), feeds it 256
// bits per cycle with the output always ready, and compares every decoded
// BF16 element with the value computed from the element's definition in
// real arithmetic. For MXFP4 it also checks the rate: T tiles must leave
// within ceil(T*264/256) + 3 cycles of the first input word.
module tb_stream_decoder;
  import rpu_pkg::*;
  import tb_util_pkg::*;

  localparam int T = 12;                 // tiles per format

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 flush, s_valid, s_ready, m_valid, m_ready;
  wfmt_e                fmt;
  logic [MEMW-1:0]      s_data;
  logic [TILE_BITS-1:0] m_tile;

  stream_decoder dut (.*);

  int checks = 0, failures = 0;
  logic [7:0]  se   [T];
  logic [7:0]  el   [T][64];
  logic        bits [$];

  function automatic real elem_real(input wfmt_e f, input logic [7:0] x);
    int s, e, m;
    case (f)
      FMT_MXFP4: begin s = x[3]; e = x[2:1]; m = x[0];
        return (s ? -1.0 : 1.0) * ((e == 0) ? (m / 2.0) : (1.0 + m / 2.0) * pow2(e - 1)); end
      FMT_MXFP6: begin s = x[5]; e = x[4:2]; m = x[1:0];
        return (s ? -1.0 : 1.0) * ((e == 0) ? (m / 4.0) * pow2(-2) : (1.0 + m / 4.0) * pow2(e - 3)); end
      FMT_MXFP8: begin s = x[7]; e = x[6:3]; m = x[2:0];
        return (s ? -1.0 : 1.0) * ((e == 0) ? (m / 8.0) * pow2(-6) : (1.0 + m / 8.0) * pow2(e - 7)); end
      FMT_BFP4: return real'($signed(x[3:0]));
      default:  return real'($signed(x));
    endcase
  endfunction

  task automatic run_fmt(input wfmt_e f);
    int b, nwords, got, cyc, t_first, t_last;
    b = elem_bits(f);
    bits.delete();
    for (int t = 0; t < T; t++) begin
      se[t] = 8'(110 + $urandom_range(0, 30));
      for (int i = 0; i < 8; i++) bits.push_back(se[t][i]);
      for (int i = 0; i < 64; i++) begin
        el[t][i] = 8'($urandom);
        for (int k = 0; k < b; k++) bits.push_back(el[t][i][k]);
      end
    end
    nwords = (bits.size() + 255) / 256;
    @(negedge clk);
    fmt = f; flush = 1;
    @(negedge clk);
    flush = 0;
    got = 0; cyc = 0; t_first = -1; t_last = 0;
    for (int wi = 0; got < T && cyc < 2000; cyc++) begin
      s_valid = (wi < nwords);
      for (int k = 0; k < 256; k++) s_data[k] = (wi * 256 + k < bits.size()) ? bits[wi * 256 + k] : 1'b0;
      if (s_valid && t_first < 0) t_first = cyc;
      #1;
      if (m_valid) begin
        for (int i = 0; i < 64; i++) begin
          logic [15:0] exp_b;
          exp_b = real_to_bf16(elem_real(f, el[got][i]) * pow2(int'(se[got]) - 127));
          checks++;
          if (bf16_val(m_tile[16*i +: 16]) != bf16_val(exp_b)) begin   // compares values: -0 == +0
            failures++;
            if (failures < 10)
              $display("FAIL fmt %0d tile %0d el %0d: got %h expected %h", f, got, i, m_tile[16*i +: 16], exp_b);
          end
        end
        got++;
        t_last = cyc;
      end
      if (s_valid && s_ready) wi++;
      @(negedge clk);
    end
    s_valid = 0;
    checks++;
    if (got != T) begin failures++; $display("FAIL fmt %0d: %0d tiles", f, got); end
    if (f == FMT_MXFP4) begin
      checks++;
      if (t_last - t_first + 1 > (T * 264 + 255) / 256 + 3) begin
        failures++;
        $display("FAIL MXFP4 rate: %0d tiles in %0d cycles", T, t_last - t_first + 1);
      end
    end
  endtask

  initial begin
    flush = 0; s_valid = 0; s_data = '0; m_ready = 1; fmt = FMT_MXFP4;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_fmt(FMT_MXFP4);
    run_fmt(FMT_MXFP6);
    run_fmt(FMT_MXFP8);
    run_fmt(FMT_BFP4);
    run_fmt(FMT_BFP8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
