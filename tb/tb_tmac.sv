// tb_tmac -- self-checking testbench of the TMAC.
// Runs a (1 x 128) * (128 x 24) vector-matrix product in the stripe order
// (2 stripes x 3 tile columns x 8 tiles, one tile per cycle) with random
// small integer activations and weights, so the exact result is known in
// integer arithmetic, and reads the 24 FP32 results back from the
// accumulator scratchpad. The run is repeated with new data to check that
// the first stripe overwrites the old partial sums. Also checks that the
// tree sum has finished at most 8 + 4 cycles after the last tile.
module tb_tmac;
  import rpu_pkg::*;
  import tb_util_pkg::*;

  localparam int N1 = 2, N2 = 3, K = 64 * N1, N = 8 * N2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 act_load, tile_valid, tile_last, first_stripe, busy;
  logic [TILE_BITS-1:0] act_data, tile;
  logic [2:0]           tile_row;
  logic [12:0]          col_base, acc_rd_addr;
  fp32_t                acc_rd_data [TILE_DIM];

  tmac dut (.*);

  int checks = 0, failures = 0;
  int act [K];
  int w   [K][N];

  task automatic run_vmm();
    int lat;
    for (int k = 0; k < K; k++) act[k] = int'($urandom_range(0, 6)) - 3;
    for (int k = 0; k < K; k++) for (int n = 0; n < N; n++) w[k][n] = int'($urandom_range(0, 6)) - 3;
    for (int s = 0; s < N1; s++) begin
      @(negedge clk);
      act_load = 1;
      for (int k = 0; k < 64; k++) act_data[16*k +: 16] = real_to_bf16(real'(act[64*s + k]));
      @(negedge clk);
      act_load = 0;
      for (int c = 0; c < N2; c++)
        for (int j = 0; j < 8; j++) begin
          tile_valid   = 1;
          tile_row     = 3'(j);
          tile_last    = (j == 7);
          col_base     = 13'(8 * c);
          first_stripe = (s == 0);
          for (int r = 0; r < 8; r++)
            for (int cc = 0; cc < 8; cc++)
              tile[16*(8*r+cc) +: 16] = real_to_bf16(real'(w[64*s + 8*j + r][8*c + cc]));
          @(negedge clk);
          tile_valid = 0;
        end
    end
    lat = 0;
    while (busy) begin @(negedge clk); lat++; end
    checks++;
    if (lat > 12) begin failures++; $display("FAIL tree latency %0d cycles", lat); end
    for (int c = 0; c < N2; c++) begin
      acc_rd_addr = 13'(8 * c);
      @(negedge clk);
      for (int i = 0; i < 8; i++) begin
        int exp_v;
        exp_v = 0;
        for (int k = 0; k < K; k++) exp_v += act[k] * w[k][8*c + i];
        checks++;
        if (fp32_val(acc_rd_data[i]) != real'(exp_v)) begin
          failures++;
          $display("FAIL out[%0d] = %f expected %0d", 8*c + i, fp32_val(acc_rd_data[i]), exp_v);
        end
      end
    end
  endtask

  initial begin
    act_load = 0; tile_valid = 0; tile_last = 0; first_stripe = 0; tile_row = 0;
    act_data = '0; tile = '0; col_base = '0; acc_rd_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_vmm();
    run_vmm();
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
