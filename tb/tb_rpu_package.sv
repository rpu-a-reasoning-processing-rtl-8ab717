// tb_rpu_package -- end-to-end testbench of the whole RPU package, run at a
// reduced size (3 compute units of 4 reasoning cores; the design's defaults
// are 4 x 16), each core with its own behavioural HBM-CO pseudo-channel.
// The outer-ring segment ends are looped back (ring_out[i] -> ring_in[i]),
// standing in for the ring station, so the aligned cores i of the CUs form
// one ring.
//
// Every core runs its own program (same code, core-specific addresses):
//   P   batch-4 projection: 4 request vectors, K = 64, N = 8, on all four
//       TMACs at once, stored back to the pseudo-channel.
//   L1  y1 = W1 x (K = 64, N = 64, BF16 weights, decoder bypassed); the
//       output entry is broadcast to the 15 other cores of the CU over the
//       intra-CU ring (hop forwarding) and kept locally (valid count 2).
//   L2  y2 = ReLU(W2 [y1 of all cores of the CU]) (one stripe per core,
//       N = 8, MXFP4 weights through the stream decoder); compute waits on
//       the valid counters for activations still on the ring. The output is
//       broadcast to the aligned cores of the other CUs over the
//       inter-CU ring.
//   L3  y3 = W3 [y2 of the aligned cores] (one stripe per CU, N = 8,
//       BF16), stored to the pseudo-channel.
// The testbench computes every result independently in real arithmetic
// (operands chosen so that FP32 accumulation is exact, then rounded to
// BF16), compares P and L3 of every core, and counts the mechanisms of the
// design, failing if any of them never occurred: weight tiles into the
// TMACs, compute waiting for weights and for activations, intra- and
// inter-CU forwards, memory- and network-buffer check_valid stalls,
// network-buffer port conflicts, the ReLU clipping on the HP-VOPs, decoder
// and bypass use, and the completion interrupts.
module tb_rpu_package;
  import rpu_pkg::*;
  import tb_util_pkg::*;

  localparam int NC = 3;     // compute units
  localparam int NK = 4;     // cores per compute unit

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        imem_we [NC][NK];
  logic [11:0] imem_addr;
  instr_t      imem_wdata;
  logic        start;
  logic        done [NC][NK], irq [NC][NK];
  logic [1:0]  cfg_mb_prio [3];
  logic [1:0]  cfg_nb_prio [4];
  logic        rd_req_valid [NC][NK], rd_req_ready [NC][NK], rd_resp_valid [NC][NK];
  logic [31:0] rd_addr [NC][NK], wr_addr [NC][NK];
  logic [255:0] rd_resp_data [NC][NK], wr_data [NC][NK];
  logic        wr_valid [NC][NK], wr_ready [NC][NK];
  link_t       ring_out [NK], ring_in [NK];
  logic        ring_out_ready [NK], ring_in_ready [NK];
  core_ev_t    ev [NC][NK];

  rpu_package #(.N_CU(NC), .N_CORES(NK)) dut (.*);

  // ring station stand-in: close each outer ring
  always_comb
    for (int i = 0; i < NK; i++) begin
      ring_in[i]        = ring_out[i];
      ring_out_ready[i] = ring_in_ready[i];
    end

  // pseudo-channel models
  logic        pl_we;
  logic [31:0] pl_addr, pk_addr;
  logic [255:0] pl_data [NC][NK], pk_data [NC][NK];
  for (genvar j = 0; j < NC; j++) begin : g_cu
    for (genvar i = 0; i < NK; i++) begin : g_pc
      hbm_co_model #(.DEPTH(2048)) u_hbm (
        .clk, .rst_n, .rd_req_valid(rd_req_valid[j][i]), .rd_req_ready(rd_req_ready[j][i]),
        .rd_addr(rd_addr[j][i]), .rd_resp_valid(rd_resp_valid[j][i]),
        .rd_resp_data(rd_resp_data[j][i]), .wr_valid(wr_valid[j][i]), .wr_ready(wr_ready[j][i]),
        .wr_addr(wr_addr[j][i]), .wr_data(wr_data[j][i]), .pl_we, .pl_addr,
        .pl_data(pl_data[j][i]), .pk_addr, .pk_data(pk_data[j][i]));
    end
  end


  // ---------------------------------------------------------------- mechanism counters
  int checks = 0, failures = 0;
  longint n_tile, n_wait_w, n_wait_a, n_fwd0, n_fwd1, n_mbs, n_nbs, n_nbc, n_irq;
  initial begin n_tile = 0; n_wait_w = 0; n_wait_a = 0; n_fwd0 = 0; n_fwd1 = 0; n_mbs = 0;
    n_nbs = 0; n_nbc = 0; n_irq = 0; end
  always @(posedge clk) if (rst_n)
    for (int j = 0; j < NC; j++)
      for (int i = 0; i < NK; i++) begin
        n_tile   += longint'(ev[j][i].tile);
        n_wait_w += longint'(ev[j][i].wait_weight);
        n_wait_a += longint'(ev[j][i].wait_act);
        n_fwd0   += longint'(ev[j][i].fwd_intra);
        n_fwd1   += longint'(ev[j][i].fwd_inter);
        n_mbs    += longint'(ev[j][i].mb_stall);
        n_nbs    += longint'(ev[j][i].nb_stall);
        n_nbc    += longint'(ev[j][i].nb_conflict);
        n_irq    += longint'(irq[j][i]);
      end

  // ---------------------------------------------------------------- data and reference
  // pseudo-channel beat map (per core)
  localparam int HB_PW = 0, HB_PA = 64, HB_X = 96, HB_W1 = 128, HB_W2 = 384, HB_W3 = 640;
  localparam int HB_PO = 1024, HB_Y3 = 1100;
  // memory-buffer entry map
  localparam int MB_PW = 0, MB_PA = 10, MB_PO = 20, MB_X = 30, MB_W1 = 40, MB_W2 = 110, MB_W3 = 150;
  localparam int MB_Y3 = 200;
  // network-buffer entry map: L2 activations 0..15, L3 activations 32..35
  localparam int NB_Y1 = 0, NB_Y2 = 32;

  logic [255:0] img [NC][NK][768];
  real x [64];
  real pa [NC][NK][4][64];
  real pw [NC][NK][64][8];
  real w1 [NC][NK][64][64];
  real w2 [NC][NK][1024][8];
  real w3 [NC][NK][256][8];
  real y1 [NC][NK][64];
  real y2 [NC][NK][8];
  int  n_w2_entries;
  int  n_relu_clip = 0;

  function automatic real e2m1(input logic [3:0] c);
    real m;
    m = (c[2:1] == 0) ? c[0] / 2.0 : (1.0 + c[0] / 2.0) * pow2(int'(c[2:1]) - 1);
    return c[3] ? -m : m;
  endfunction

  function automatic real rbf(input real v);
    return bf16_val(real_to_bf16(v));
  endfunction

  task automatic put_entry(input int j, input int i, input int beat, input logic [TILE_BITS-1:0] e);
    for (int b = 0; b < 4; b++) img[j][i][beat + b] = e[256*b +: 256];
  endtask

  task automatic build_data();
    logic [TILE_BITS-1:0] e;
    for (int k = 0; k < 64; k++) x[k] = real'($urandom_range(0, 1));
    for (int j = 0; j < NC; j++) for (int i = 0; i < NK; i++) begin
      logic bits [$];
      for (int b = 0; b < 768; b++) img[j][i][b] = '0;
      // P: 8 tiles of pw, 4 activation entries
      for (int k = 0; k < 64; k++) for (int n = 0; n < 8; n++) pw[j][i][k][n] = real'($urandom_range(0, 4)) - 2.0;
      for (int r = 0; r < 8; r++) begin
        for (int q = 0; q < 64; q++) e[16*q +: 16] = real_to_bf16(pw[j][i][8*r + q/8][q%8]);
        put_entry(j, i, HB_PW + 4 * r, e);
      end
      for (int t = 0; t < 4; t++) begin
        for (int k = 0; k < 64; k++) begin
          pa[j][i][t][k] = real'($urandom_range(0, 6)) - 3.0;
          e[16*k +: 16] = real_to_bf16(pa[j][i][t][k]);
        end
        put_entry(j, i, HB_PA + 4 * t, e);
      end
      // L1: x and 64 BF16 tiles (8 tile columns)
      for (int k = 0; k < 64; k++) e[16*k +: 16] = real_to_bf16(x[k]);
      put_entry(j, i, HB_X, e);
      for (int k = 0; k < 64; k++) for (int n = 0; n < 64; n++) w1[j][i][k][n] = real'($urandom_range(0, 2)) - 1.0;
      for (int c = 0; c < 8; c++) for (int r = 0; r < 8; r++) begin
        for (int q = 0; q < 64; q++) e[16*q +: 16] = real_to_bf16(w1[j][i][8*r + q/8][8*c + q%8]);
        put_entry(j, i, HB_W1 + 4 * (8 * c + r), e);
      end
      // L2: 16 stripes x 8 tiles of MXFP4 records (shared exponent 127)
      bits.delete();
      for (int s = 0; s < NK; s++) for (int r = 0; r < 8; r++) begin
        for (int b = 0; b < 8; b++) bits.push_back(1'(8'd127 >> b));
        for (int q = 0; q < 64; q++) begin
          logic [3:0] code;
          code = 4'($urandom);
          w2[j][i][64*s + 8*r + q/8][q%8] = e2m1(code);
          for (int b = 0; b < 4; b++) bits.push_back(code[b]);
        end
      end
      n_w2_entries = (bits.size() + 1023) / 1024;
      for (int en = 0; en < n_w2_entries; en++) begin
        for (int b = 0; b < 1024; b++) e[b] = (1024 * en + b < bits.size()) ? bits[1024 * en + b] : 1'b0;
        put_entry(j, i, HB_W2 + 4 * en, e);
      end
      // L3: 4 stripes x 8 tiles BF16
      for (int k = 0; k < 256; k++) for (int n = 0; n < 8; n++)
        w3[j][i][k][n] = (k % 64 < 8) ? real'($urandom_range(0, 2)) - 1.0 : 0.0;
      for (int s = 0; s < NC; s++) for (int r = 0; r < 8; r++) begin
        for (int q = 0; q < 64; q++) e[16*q +: 16] = real_to_bf16(w3[j][i][64*s + 8*r + q/8][q%8]);
        put_entry(j, i, HB_W3 + 4 * (8 * s + r), e);
      end
    end
    // reference of L1 and L2
    for (int j = 0; j < NC; j++) for (int i = 0; i < NK; i++)
      for (int n = 0; n < 64; n++) begin
        real s;
        s = 0.0;
        for (int k = 0; k < 64; k++) s += x[k] * w1[j][i][k][n];
        y1[j][i][n] = rbf(s);
      end
    for (int j = 0; j < NC; j++) for (int i = 0; i < NK; i++)
      for (int n = 0; n < 8; n++) begin
        real s;
        s = 0.0;
        for (int k = 0; k < 64 * NK; k++) s += y1[j][k/64][k%64] * w2[j][i][k][n];
        if (s < 0.0) n_relu_clip++;
        y2[j][i][n] = (s < 0.0) ? 0.0 : rbf(s);
      end
  endtask

  function automatic instr_t mk(input opcode_e op);
    instr_t q;
    q = '0;
    q.op = op;
    return q;
  endfunction

  task automatic build_program(input int j, input int i, ref instr_t p [15]);
    p[0]  = mk(OP_MEM_LOAD);  p[0].a = 16'(MB_PW); p[0].c = 16'(HB_PW); p[0].cnt = 16'd8; p[0].vcount = 2'd1;
    p[1]  = mk(OP_MEM_LOAD);  p[1].a = 16'(MB_PA); p[1].c = 16'(HB_PA); p[1].cnt = 16'd4; p[1].vcount = 2'd1;
    p[2]  = mk(OP_VMM);       p[2].a = 16'(MB_PW); p[2].cnt = 16'd8; p[2].b = 16'(MB_PA); p[2].sel_a = 1;
    p[2].c = 16'(MB_PO); p[2].sel_b = 1; p[2].n1 = 8'd1; p[2].n2 = 8'd1; p[2].ntm = 3'd4; p[2].fmt = FMT_BF16;
    p[2].check_valid = 1; p[2].dec = 1; p[2].vcount = 2'd1; p[2].vop = VOP_PASS;
    p[3]  = mk(OP_MEM_STORE); p[3].a = 16'(MB_PO); p[3].c = 16'(HB_PO); p[3].cnt = 16'd4;
    p[3].check_valid = 1; p[3].dec = 1;
    p[4]  = mk(OP_MEM_LOAD);  p[4].a = 16'(MB_X); p[4].c = 16'(HB_X); p[4].cnt = 16'd1; p[4].vcount = 2'd1;
    p[5]  = mk(OP_MEM_LOAD);  p[5].a = 16'(MB_W1); p[5].c = 16'(HB_W1); p[5].cnt = 16'd64; p[5].vcount = 2'd1;
    p[6]  = mk(OP_VMM);       p[6].a = 16'(MB_W1); p[6].cnt = 16'd64; p[6].b = 16'(MB_X); p[6].sel_a = 1;
    p[6].c = 16'(NB_Y1 + i); p[6].sel_b = 0; p[6].n1 = 8'd1; p[6].n2 = 8'd8; p[6].ntm = 3'd1;
    p[6].fmt = FMT_BF16; p[6].check_valid = 1; p[6].dec = 1; p[6].vcount = 2'd2; p[6].vop = VOP_PASS;
    p[7]  = mk(OP_NET_SEND);  p[7].a = 16'(NB_Y1 + i); p[7].b = 16'(NB_Y1 + i); p[7].dir = 0;
    p[7].hops = 6'(NK - 1); p[7].vcount = 2'd1; p[7].check_valid = 1; p[7].dec = 1;
    p[8]  = mk(OP_MEM_LOAD);  p[8].a = 16'(MB_W2); p[8].c = 16'(HB_W2); p[8].cnt = 16'(n_w2_entries);
    p[8].vcount = 2'd1;
    p[9]  = mk(OP_VMM);       p[9].a = 16'(MB_W2); p[9].cnt = 16'(n_w2_entries); p[9].b = 16'(NB_Y1);
    p[9].sel_a = 0; p[9].c = 16'(NB_Y2 + j); p[9].sel_b = 0; p[9].n1 = 8'(NK); p[9].n2 = 8'd1;
    p[9].ntm = 3'd1; p[9].fmt = FMT_MXFP4; p[9].check_valid = 1; p[9].dec = 1; p[9].vcount = 2'd2;
    p[9].vop = VOP_MAX; p[9].scalar = 16'h0000;
    p[10] = mk(OP_NET_SEND);  p[10].a = 16'(NB_Y2 + j); p[10].b = 16'(NB_Y2 + j); p[10].dir = 1;
    p[10].hops = 6'(NC - 1); p[10].vcount = 2'd1; p[10].check_valid = 1; p[10].dec = 1;
    p[11] = mk(OP_MEM_LOAD);  p[11].a = 16'(MB_W3); p[11].c = 16'(HB_W3); p[11].cnt = 16'(8 * NC); p[11].vcount = 2'd1;
    p[12] = mk(OP_VMM);       p[12].a = 16'(MB_W3); p[12].cnt = 16'(8 * NC); p[12].b = 16'(NB_Y2); p[12].sel_a = 0;
    p[12].c = 16'(MB_Y3); p[12].sel_b = 1; p[12].n1 = 8'(NC); p[12].n2 = 8'd1; p[12].ntm = 3'd1;
    p[12].fmt = FMT_BF16; p[12].check_valid = 1; p[12].dec = 1; p[12].vcount = 2'd1; p[12].vop = VOP_PASS;
    p[13] = mk(OP_MEM_STORE); p[13].a = 16'(MB_Y3); p[13].c = 16'(HB_Y3); p[13].cnt = 16'd1;
    p[13].check_valid = 1; p[13].dec = 1;
    p[14] = mk(OP_HALT);
  endtask

  function automatic bit all_done();
    for (int j = 0; j < NC; j++) for (int i = 0; i < NK; i++) if (!done[j][i]) return 0;
    return 1;
  endfunction

  task automatic count(input string what, input longint n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin
    int cyc;
    instr_t p [15];
    logic [TILE_BITS-1:0] e;
    imem_addr = '0; imem_wdata = '0; start = 0; pl_we = 0; pl_addr = '0; pk_addr = '0;
    for (int j = 0; j < NC; j++) for (int i = 0; i < NK; i++) begin
      imem_we[j][i] = 0; pl_data[j][i] = '0;
    end
    // memory buffer: memory DMA first; network buffer: receive ports first
    for (int q = 0; q < 3; q++) cfg_mb_prio[q] = 2'(q);
    for (int q = 0; q < 4; q++) cfg_nb_prio[q] = 2'(q);
    build_data();
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 768; b++) begin
      @(negedge clk);
      pl_we = 1; pl_addr = 32'(b);
      for (int j = 0; j < NC; j++) for (int i = 0; i < NK; i++) pl_data[j][i] = img[j][i][b];
    end
    @(negedge clk);
    pl_we = 0;
    for (int j = 0; j < NC; j++) for (int i = 0; i < NK; i++) begin
      build_program(j, i, p);
      for (int a = 0; a < 15; a++) begin
        @(negedge clk);
        imem_we[j][i] = 1; imem_addr = 12'(a); imem_wdata = p[a];
      end
      @(negedge clk);
      imem_we[j][i] = 0;
    end
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!all_done() && cyc < 50000) begin @(negedge clk); cyc++; end
    $display("program ran %0d cycles", cyc);
    checks++;
    if (!all_done()) begin failures++; $display("FAIL not all cores finished"); end
    repeat (4) @(negedge clk);
    // results
    for (int j = 0; j < NC; j++) for (int i = 0; i < NK; i++) begin
      bit ok;
      ok = 1;
      for (int t = 0; t < 4; t++) begin
        for (int b = 0; b < 4; b++) begin pk_addr = 32'(HB_PO + 4 * t + b); #1; e[256*b +: 256] = pk_data[j][i]; end
        for (int n = 0; n < 64; n++) begin
          real s;
          s = 0.0;
          if (n < 8) for (int k = 0; k < 64; k++) s += pa[j][i][t][k] * pw[j][i][k][n];
          if (bf16_val(e[16*n +: 16]) != rbf(s)) ok = 0;
        end
      end
      checks++;
      if (!ok) begin failures++; $display("FAIL batch projection of core %0d.%0d", j, i); end
      ok = 1;
      for (int b = 0; b < 4; b++) begin pk_addr = 32'(HB_Y3 + b); #1; e[256*b +: 256] = pk_data[j][i]; end
      for (int n = 0; n < 64; n++) begin
        real s;
        s = 0.0;
        if (n < 8) for (int k = 0; k < 64 * NC; k++) s += ((k % 64 < 8) ? y2[k/64][i][k%64] : 0.0) * w3[j][i][k][n];
        if (bf16_val(e[16*n +: 16]) != rbf(s)) begin
          ok = 0;
          if (failures < 4) $display("  core %0d.%0d y3[%0d]: got %h expected %f", j, i, n, e[16*n +: 16], s);
        end
      end
      checks++;
      if (!ok) begin failures++; $display("FAIL three-layer result of core %0d.%0d", j, i); end
    end
    checks++;
    if (n_tile != longint'(NC * NK * (8 + 64 + 8 * NK + 8 * NC))) begin
      failures++; $display("FAIL %0d tiles", n_tile);
    end
    count("weight tile into the TMACs", n_tile);
    count("compute waiting for weights", n_wait_w);
    count("compute waiting for activations", n_wait_a);
    count("intra-CU forward", n_fwd0);
    count("inter-CU forward", n_fwd1);
    count("memory-buffer check_valid stall", n_mbs);
    count("network-buffer check_valid stall", n_nbs);
    count("network-buffer port conflict", n_nbc);
    count("ReLU clipping on the HP-VOPs", longint'(n_relu_clip));
    count("completion interrupt", n_irq);
    checks++;
    if (n_fwd0 != longint'(NC * NK * (NK - 2))) begin failures++; $display("FAIL %0d intra-CU forwards", n_fwd0); end
    checks++;
    if (n_fwd1 != longint'(NC * NK * (NC - 2))) begin failures++; $display("FAIL %0d inter-CU forwards", n_fwd1); end
    checks++;
    if (n_irq != longint'(NC * NK)) begin failures++; $display("FAIL %0d interrupts", n_irq); end
    $display("mechanisms: tiles %0d (MXFP4 via decoder %0d, BF16 bypass %0d) wait_weight %0d wait_act %0d",
             n_tile, NC * NK * 8 * NK, NC * NK * (72 + 8 * NC), n_wait_w, n_wait_a);
    $display("            fwd_intra %0d fwd_inter %0d mb_stall %0d nb_stall %0d nb_conflict %0d relu_clip %0d irq %0d",
             n_fwd0, n_fwd1, n_mbs, n_nbs, n_nbc, n_relu_clip, n_irq);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
