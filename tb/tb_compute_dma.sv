// tb_compute_dma -- self-checking testbench of the compute pipeline
// controller. The controller is wired as in a reasoning core: a memory
// buffer and a network buffer (pipeline-arbitrated, the testbench owning
// port 0 of each for preloading and reading back), the stream decoder, four
// TMACs and the HP-VOP unit. Two VMM instructions are run and every output
// is compared with a reference computed in real arithmetic from small
// integer operands (exact in FP32, then rounded to BF16):
//   1. BF16 weights (decoder bypassed), 2 TMACs, K = 128 (2 stripes),
//      N = 24, activations from the network buffer with check_valid; the
//      second stripe's activations are written late, so compute must wait
//      for them. Outputs to the memory buffer, no vector op.
//   2. MXFP4 weights through the decoder, 4 TMACs, K = 64, N = 72 (two
//      output groups), activations from the memory buffer, ReLU (MAX with 0)
//      on the HP-VOPs, outputs to the network buffer.
// It also checks the number of tiles consumed, that outputs beyond N are
// zero, and the weight rate: one tile per cycle for BF16 and no more than
// about 264/256 cycles per tile for MXFP4 (plus a fixed start-up).
module tb_compute_dma;
  import rpu_pkg::*;
  import tb_util_pkg::*;

  localparam int NT = 4;
  localparam int DEPTH = 512;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ---------------------------------------------------------------- buffers
  buf_req_t mb_req [3], nb_req [2];
  logic     mb_gnt [3], mb_stall [3], mb_rvalid [3];
  logic     nb_gnt [2], nb_stall [2], nb_rvalid [2];
  logic [TILE_BITS-1:0] mb_rdata, nb_rdata;
  logic [1:0] mb_prio [3];
  logic       nb_prio [2];
  assign mb_prio[0] = 2'd0; assign mb_prio[1] = 2'd2; assign mb_prio[2] = 2'd1;
  assign nb_prio[0] = 1'b0; assign nb_prio[1] = 1'b1;

  pipeline_arbiter_buffer #(.DEPTH(DEPTH), .NP(3)) u_mb (
    .clk, .rst_n, .prio(mb_prio), .req(mb_req), .gnt(mb_gnt), .stall(mb_stall),
    .rvalid(mb_rvalid), .rdata(mb_rdata));
  pipeline_arbiter_buffer #(.DEPTH(DEPTH), .NP(2)) u_nb (
    .clk, .rst_n, .prio(nb_prio), .req(nb_req), .gnt(nb_gnt), .stall(nb_stall),
    .rvalid(nb_rvalid), .rdata(nb_rdata));

  // ---------------------------------------------------------------- DUT and its neighbours
  logic   instr_valid, instr_ready, busy;
  instr_t instr;
  logic   dec_flush, dec_s_valid, dec_s_ready, dec_m_valid, dec_m_ready;
  wfmt_e  dec_fmt;
  logic [MEMW-1:0]      dec_s_data;
  logic [TILE_BITS-1:0] dec_m_tile, act_data, tile;
  logic   act_load [NT], tile_valid [NT], tmac_busy [NT];
  logic [2:0] tile_row;
  logic   tile_last, first_stripe;
  logic [12:0] col_base, acc_rd_addr;
  fp32_t  acc_rd_data [NT][TILE_DIM];
  logic   vop_in_valid, vop_out_valid;
  vop_e   vop_op;
  bf16_t  vop_scalar;
  fp32_t  vop_x [TILE_DIM], vop_y [TILE_DIM];
  logic   ev_tile, ev_wait_weight, ev_wait_act;

  compute_dma #(.NT(NT)) dut (
    .clk, .rst_n, .instr_valid, .instr_ready, .instr, .busy,
    .w_req(mb_req[1]), .w_gnt(mb_gnt[1]), .w_rvalid(mb_rvalid[1]), .mb_rdata,
    .am_req(mb_req[2]), .am_gnt(mb_gnt[2]), .am_rvalid(mb_rvalid[2]),
    .an_req(nb_req[1]), .an_gnt(nb_gnt[1]), .an_rvalid(nb_rvalid[1]), .nb_rdata,
    .dec_flush, .dec_fmt, .dec_s_valid, .dec_s_ready, .dec_s_data,
    .dec_m_valid, .dec_m_ready, .dec_m_tile,
    .act_load, .act_data, .tile_valid, .tile, .tile_row, .tile_last, .col_base,
    .first_stripe, .acc_rd_addr, .acc_rd_data, .tmac_busy,
    .vop_in_valid, .vop_op, .vop_scalar, .vop_x, .vop_out_valid, .vop_y,
    .ev_tile, .ev_wait_weight, .ev_wait_act);

  stream_decoder u_dec (
    .clk, .rst_n, .flush(dec_flush), .fmt(dec_fmt), .s_valid(dec_s_valid), .s_ready(dec_s_ready),
    .s_data(dec_s_data), .m_valid(dec_m_valid), .m_ready(dec_m_ready), .m_tile(dec_m_tile));

  for (genvar i = 0; i < NT; i++) begin : g_tmac
    tmac u_tmac (
      .clk, .rst_n, .act_load(act_load[i]), .act_data, .tile_valid(tile_valid[i]), .tile,
      .tile_row, .tile_last, .col_base, .first_stripe, .acc_rd_addr,
      .acc_rd_data(acc_rd_data[i]), .busy(tmac_busy[i]));
  end

  hp_vops u_vops (
    .clk, .rst_n, .in_valid(vop_in_valid), .op(vop_op), .scalar(vop_scalar), .x(vop_x),
    .out_valid(vop_out_valid), .y(vop_y));

  // ---------------------------------------------------------------- testbench side
  int checks = 0, failures = 0;
  int n_tile = 0, n_wait_w = 0, n_wait_a = 0, first_tile = -1, last_tile = 0, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (ev_tile) begin
      n_tile++;
      if (first_tile < 0) first_tile = cyc;
      last_tile = cyc;
    end
    n_wait_w += int'(ev_wait_weight);
    n_wait_a += int'(ev_wait_act);
  end

  real V [NT][128];       // activations
  real Wm [128][72];      // weights

  task automatic buf_write(input bit to_mb, input int addr, input logic [TILE_BITS-1:0] d,
                           input logic [1:0] vc);
    buf_req_t q;
    q = '0; q.valid = 1; q.write = 1; q.addr = 16'(addr); q.wdata = d; q.vcount = vc;
    @(negedge clk);
    if (to_mb) mb_req[0] = q; else nb_req[0] = q;
    #1;
    while (!(to_mb ? mb_gnt[0] : nb_gnt[0])) begin @(negedge clk); #1; end
    @(negedge clk);
    mb_req[0] = '0; nb_req[0] = '0;
  endtask

  task automatic buf_read(input bit from_mb, input int addr, output logic [TILE_BITS-1:0] d);
    buf_req_t q;
    q = '0; q.valid = 1; q.addr = 16'(addr);
    @(negedge clk);
    if (from_mb) mb_req[0] = q; else nb_req[0] = q;
    #1;
    while (!(from_mb ? mb_gnt[0] : nb_gnt[0])) begin @(negedge clk); #1; end
    @(negedge clk);
    mb_req[0] = '0; nb_req[0] = '0;
    d = from_mb ? mb_rdata : nb_rdata;
  endtask

  function automatic logic [TILE_BITS-1:0] act_entry(input int t, input int s);
    logic [TILE_BITS-1:0] e;
    for (int k = 0; k < 64; k++) e[16*k +: 16] = real_to_bf16(V[t][64*s + k]);
    return e;
  endfunction

  function automatic real e2m1(input logic [3:0] x);
    real m;
    m = (x[2:1] == 0) ? x[0] / 2.0 : (1.0 + x[0] / 2.0) * pow2(int'(x[2:1]) - 1);
    return x[3] ? -m : m;
  endfunction

  task automatic check_outputs(input bit from_mb, input int c, input int ntm, input int n2,
                               input bit relu);
    int G;
    logic [TILE_BITS-1:0] d;
    G = (n2 + 7) / 8;
    for (int t = 0; t < ntm; t++)
      for (int g = 0; g < G; g++) begin
        buf_read(from_mb, c + t * G + g, d);
        for (int i = 0; i < 64; i++) begin
          real expv;
          int n;
          n = 64 * g + i;
          expv = 0.0;
          if (n < 8 * n2) for (int k = 0; k < 128; k++) expv += V[t][k] * Wm[k][n];
          if (relu && expv < 0.0) expv = 0.0;
          checks++;
          if (bf16_val(d[16*i +: 16]) != bf16_val(real_to_bf16(expv))) begin
            failures++;
            if (failures < 10) $display("FAIL TMAC %0d output %0d: got %h expected %f", t, n, d[16*i +: 16], expv);
          end
        end
      end
  endtask

  task automatic run_vmm(input instr_t x);
    @(negedge clk);
    instr_valid = 1; instr = x;
    @(negedge clk);
    instr_valid = 0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    instr_t x;
    logic [TILE_BITS-1:0] e;
    logic bits [$];
    int nent;
    mb_req[0] = '0; nb_req[0] = '0; instr_valid = 0; instr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ------------------------------------------------ test 1: BF16, 2 TMACs, K=128, N=24
    for (int t = 0; t < NT; t++) for (int k = 0; k < 128; k++) V[t][k] = real'($urandom_range(0, 8)) - 4.0;
    for (int k = 0; k < 128; k++) for (int n = 0; n < 72; n++)
      Wm[k][n] = (n < 24) ? real'($urandom_range(0, 8)) - 4.0 : 0.0;
    nent = 0;
    for (int s = 0; s < 2; s++) for (int col = 0; col < 3; col++) for (int r = 0; r < 8; r++) begin
      for (int i = 0; i < 64; i++) e[16*i +: 16] = real_to_bf16(Wm[64*s + 8*r + i/8][8*col + i%8]);
      buf_write(1, 10 + nent, e, 2'd1);
      nent++;
    end
    for (int t = 0; t < 2; t++) buf_write(0, 100 + t, act_entry(t, 0), 2'd1);
    x = '0; x.op = OP_VMM; x.a = 16'd10; x.cnt = 16'(nent); x.b = 16'd100; x.c = 16'd200;
    x.n1 = 8'd2; x.n2 = 8'd3; x.fmt = FMT_BF16; x.ntm = 3'd2; x.check_valid = 1; x.dec = 1;
    x.sel_a = 0; x.sel_b = 1; x.vcount = 2'd1; x.vop = VOP_PASS;
    fork
      run_vmm(x);
      begin
        repeat (60) @(negedge clk);
        for (int t = 0; t < 2; t++) buf_write(0, 102 + t, act_entry(t, 1), 2'd1);
      end
    join
    check_outputs(1, 200, 2, 3, 0);
    checks++;
    if (n_tile != 48) begin failures++; $display("FAIL test 1: %0d tiles", n_tile); end
    checks++;
    if (n_wait_a == 0) begin failures++; $display("FAIL test 1: never waited for late activations"); end
    checks++;   // stripe 0 streams from preloaded weights: at most a start-up bubble
    if (n_wait_w > 6) begin failures++; $display("FAIL test 1 rate: %0d cycles without a weight tile", n_wait_w); end

    // ------------------------------------------------ test 2: MXFP4, 4 TMACs, K=64, N=72, ReLU
    for (int t = 0; t < NT; t++) for (int k = 0; k < 64; k++) V[t][k] = real'($urandom_range(0, 8)) - 4.0;
    for (int t = 0; t < NT; t++) for (int k = 64; k < 128; k++) V[t][k] = 0.0;
    bits.delete();
    for (int col = 0; col < 9; col++) for (int r = 0; r < 8; r++) begin
      logic [7:0] se;
      se = 8'(126 + $urandom_range(0, 2));
      for (int b = 0; b < 8; b++) bits.push_back(se[b]);
      for (int i = 0; i < 64; i++) begin
        logic [3:0] code;
        code = 4'($urandom);
        Wm[8*r + i/8][8*col + i%8] = e2m1(code) * pow2(int'(se) - 127);
        for (int b = 0; b < 4; b++) bits.push_back(code[b]);
      end
    end
    for (int k = 64; k < 128; k++) for (int n = 0; n < 72; n++) Wm[k][n] = 0.0;
    nent = (bits.size() + 1023) / 1024;
    for (int j = 0; j < nent; j++) begin
      for (int b = 0; b < 1024; b++) e[b] = (1024 * j + b < bits.size()) ? bits[1024 * j + b] : 1'b0;
      buf_write(1, 40 + j, e, 2'd1);
    end
    for (int t = 0; t < NT; t++) buf_write(1, 120 + t, act_entry(t, 0), 2'd1);
    n_tile = 0; n_wait_w = 0; first_tile = -1;
    x = '0; x.op = OP_VMM; x.a = 16'd40; x.cnt = 16'(nent); x.b = 16'd120; x.c = 16'd300;
    x.n1 = 8'd1; x.n2 = 8'd9; x.fmt = FMT_MXFP4; x.ntm = 3'd4; x.check_valid = 1; x.dec = 1;
    x.sel_a = 1; x.sel_b = 0; x.vcount = 2'd1; x.vop = VOP_MAX; x.scalar = 16'h0000;
    run_vmm(x);
    check_outputs(0, 300, 4, 9, 1);
    checks++;
    if (n_tile != 72) begin failures++; $display("FAIL test 2: %0d tiles", n_tile); end
    checks++;
    if (last_tile - first_tile + 1 > (72 * 264 + 255) / 256 + 4) begin
      failures++;
      $display("FAIL test 2 rate: 72 MXFP4 tiles in %0d cycles", last_tile - first_tile + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("dbg state=%0d s=%0d c=%0d r=%0d t=%0d ntile=%0d wf_cnt=%0d issued=%0d", dut.state, dut.s, dut.c, dut.r, dut.t, n_tile, dut.wf_cnt, dut.wf_issued);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
