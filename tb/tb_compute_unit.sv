// tb_compute_unit -- self-checking testbench of one compute unit (CU), run
// with 4 reasoning cores (the design's default is 16), each with its own
// behavioural HBM-CO pseudo-channel. The inter-CU ports are observed by the
// testbench. Every core i runs:
//   MEM_LOAD x and W1 (BF16), VMM y1_i = W1_i x (N = 64) into network-buffer
//   entry i (valid count 2), NET_SEND entry i on the intra-CU ring with
//   hops = 3 (reaches every other core by forwarding), MEM_LOAD W2 (BF16),
//   VMM y2_i = W2_i [y1_0 .. y1_3] (4 stripes, N = 8) into network-buffer
//   entry 8, NET_SEND entry 8 on the inter-CU link, HALT.
// The testbench checks each core's y2 packet on inter_out[i] against a
// reference in real arithmetic, the number of intra-CU forwards (2 per
// packet), that the broadcast made some core wait for activations, and that
// every core raised its interrupt once.
module tb_compute_unit;
  import rpu_pkg::*;
  import tb_util_pkg::*;

  localparam int NK = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        imem_we [NK];
  logic [11:0] imem_addr;
  instr_t      imem_wdata;
  logic        start;
  logic        done [NK], irq [NK];
  logic [1:0]  cfg_mb_prio [3];
  logic [1:0]  cfg_nb_prio [4];
  logic        rd_req_valid [NK], rd_req_ready [NK], rd_resp_valid [NK];
  logic [31:0] rd_addr [NK], wr_addr [NK];
  logic [255:0] rd_resp_data [NK], wr_data [NK];
  logic        wr_valid [NK], wr_ready [NK];
  link_t       inter_out [NK], inter_in [NK];
  logic        inter_out_ready [NK], inter_in_ready [NK];
  core_ev_t    ev [NK];

  compute_unit #(.N_CORES(NK)) dut (.*);

  logic        pl_we;
  logic [31:0] pl_addr, pk_addr;
  logic [255:0] pl_data [NK], pk_data [NK];
  for (genvar i = 0; i < NK; i++) begin : g_pc
    hbm_co_model #(.DEPTH(1024)) u_hbm (
      .clk, .rst_n, .rd_req_valid(rd_req_valid[i]), .rd_req_ready(rd_req_ready[i]),
      .rd_addr(rd_addr[i]), .rd_resp_valid(rd_resp_valid[i]), .rd_resp_data(rd_resp_data[i]),
      .wr_valid(wr_valid[i]), .wr_ready(wr_ready[i]), .wr_addr(wr_addr[i]), .wr_data(wr_data[i]),
      .pl_we, .pl_addr, .pl_data(pl_data[i]), .pk_addr, .pk_data(pk_data[i]));
  end

  int checks = 0, failures = 0;
  int n_fwd = 0, n_wait_a = 0, n_irq = 0, n_pkt = 0;
  always @(posedge clk) if (rst_n)
    for (int i = 0; i < NK; i++) begin
      n_fwd    += int'(ev[i].fwd_intra);
      n_wait_a += int'(ev[i].wait_act);
      n_irq    += int'(irq[i]);
    end

  localparam int HB_X = 0, HB_W1 = 4, HB_W2 = 260;
  logic [255:0] img [NK][400];
  real x [64], w1 [NK][64][64], w2 [NK][256][8], y1 [NK][64];

  task automatic put_entry(input int i, input int beat, input logic [TILE_BITS-1:0] e);
    for (int b = 0; b < 4; b++) img[i][beat + b] = e[256*b +: 256];
  endtask

  // packet observers on the inter-CU outputs
  logic [TILE_BITS-1:0] rx [NK];
  int rx_beat [NK];
  initial for (int i = 0; i < NK; i++) rx_beat[i] = 0;
  always @(posedge clk) if (rst_n)
    for (int i = 0; i < NK; i++)
      if (inter_out[i].valid && inter_out_ready[i]) begin
        rx[i][LINKW*rx_beat[i] +: LINKW] = inter_out[i].data;
        rx_beat[i]++;
        if (inter_out[i].last) begin
          bit ok;
          ok = (rx_beat[i] == 8) && (inter_out[i].dst == 16'd8);
          for (int n = 0; n < 64; n++) begin
            real s;
            s = 0.0;
            if (n < 8) for (int k = 0; k < 256; k++) s += y1[k/64][k%64] * w2[i][k][n];
            if (bf16_val(rx[i][16*n +: 16]) != bf16_val(real_to_bf16(s))) ok = 0;
          end
          checks++;
          n_pkt++;
          if (!ok) begin failures++; $display("FAIL core %0d result packet", i); end
          rx_beat[i] = 0;
        end
      end

  initial begin
    logic [TILE_BITS-1:0] e;
    instr_t p [8];
    int cyc;
    imem_addr = '0; imem_wdata = '0; start = 0; pl_we = 0; pl_addr = '0; pk_addr = '0;
    for (int i = 0; i < NK; i++) begin
      imem_we[i] = 0; pl_data[i] = '0; inter_in[i] = '0; inter_out_ready[i] = 1;
    end
    for (int q = 0; q < 3; q++) cfg_mb_prio[q] = 2'(q);
    for (int q = 0; q < 4; q++) cfg_nb_prio[q] = 2'(3 - q);
    for (int k = 0; k < 64; k++) x[k] = real'($urandom_range(0, 1));
    for (int i = 0; i < NK; i++) begin
      for (int k = 0; k < 64; k++) e[16*k +: 16] = real_to_bf16(x[k]);
      put_entry(i, HB_X, e);
      for (int k = 0; k < 64; k++) for (int n = 0; n < 64; n++) w1[i][k][n] = real'($urandom_range(0, 2)) - 1.0;
      for (int c = 0; c < 8; c++) for (int r = 0; r < 8; r++) begin
        for (int q = 0; q < 64; q++) e[16*q +: 16] = real_to_bf16(w1[i][8*r + q/8][8*c + q%8]);
        put_entry(i, HB_W1 + 4 * (8 * c + r), e);
      end
      for (int k = 0; k < 256; k++) for (int n = 0; n < 8; n++) w2[i][k][n] = real'($urandom_range(0, 4)) - 2.0;
      for (int s = 0; s < 4; s++) for (int r = 0; r < 8; r++) begin
        for (int q = 0; q < 64; q++) e[16*q +: 16] = real_to_bf16(w2[i][64*s + 8*r + q/8][q%8]);
        put_entry(i, HB_W2 + 4 * (8 * s + r), e);
      end
      for (int n = 0; n < 64; n++) begin
        real s;
        s = 0.0;
        for (int k = 0; k < 64; k++) s += x[k] * w1[i][k][n];
        y1[i][n] = bf16_val(real_to_bf16(s));
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 388; b++) begin
      @(negedge clk);
      pl_we = 1; pl_addr = 32'(b);
      for (int i = 0; i < NK; i++) pl_data[i] = img[i][b];
    end
    @(negedge clk);
    pl_we = 0;
    for (int i = 0; i < NK; i++) begin
      for (int a = 0; a < 8; a++) p[a] = '0;
      p[0].op = OP_MEM_LOAD; p[0].a = 16'd0; p[0].c = 16'(HB_X); p[0].cnt = 16'd1; p[0].vcount = 2'd1;
      p[1].op = OP_MEM_LOAD; p[1].a = 16'd10; p[1].c = 16'(HB_W1); p[1].cnt = 16'd64; p[1].vcount = 2'd1;
      p[2].op = OP_VMM; p[2].a = 16'd10; p[2].cnt = 16'd64; p[2].b = 16'd0; p[2].sel_a = 1;
      p[2].c = 16'(i); p[2].sel_b = 0; p[2].n1 = 8'd1; p[2].n2 = 8'd8; p[2].ntm = 3'd1; p[2].fmt = FMT_BF16;
      p[2].check_valid = 1; p[2].dec = 1; p[2].vcount = 2'd2;
      p[3].op = OP_NET_SEND; p[3].a = 16'(i); p[3].b = 16'(i); p[3].dir = 0; p[3].hops = 6'(NK - 1);
      p[3].vcount = 2'd1; p[3].check_valid = 1; p[3].dec = 1;
      p[4].op = OP_MEM_LOAD; p[4].a = 16'd100; p[4].c = 16'(HB_W2); p[4].cnt = 16'd32; p[4].vcount = 2'd1;
      p[5].op = OP_VMM; p[5].a = 16'd100; p[5].cnt = 16'd32; p[5].b = 16'd0; p[5].sel_a = 0;
      p[5].c = 16'd8; p[5].sel_b = 0; p[5].n1 = 8'(NK); p[5].n2 = 8'd1; p[5].ntm = 3'd1; p[5].fmt = FMT_BF16;
      p[5].check_valid = 1; p[5].dec = 1; p[5].vcount = 2'd1;
      p[6].op = OP_NET_SEND; p[6].a = 16'd8; p[6].b = 16'd8; p[6].dir = 1; p[6].hops = 6'd1;
      p[6].vcount = 2'd1; p[6].check_valid = 1; p[6].dec = 1;
      p[7].op = OP_HALT;
      for (int a = 0; a < 8; a++) begin
        @(negedge clk);
        imem_we[i] = 1; imem_addr = 12'(a); imem_wdata = p[a];
      end
      @(negedge clk);
      imem_we[i] = 0;
    end
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (cyc < 20000) begin
      bit all;
      all = 1;
      for (int i = 0; i < NK; i++) if (!done[i]) all = 0;
      if (all) break;
      @(negedge clk);
      cyc++;
    end
    repeat (5) @(negedge clk);
    checks++; if (n_pkt != NK) begin failures++; $display("FAIL %0d result packets", n_pkt); end
    checks++; if (n_fwd != NK * (NK - 2)) begin failures++; $display("FAIL %0d intra-CU forwards", n_fwd); end
    checks++; if (n_wait_a == 0) begin failures++; $display("FAIL no core waited for activations"); end
    checks++; if (n_irq != NK) begin failures++; $display("FAIL %0d interrupts", n_irq); end
    $display("ran %0d cycles: forwards %0d wait_act %0d", cyc, n_fwd, n_wait_a);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
