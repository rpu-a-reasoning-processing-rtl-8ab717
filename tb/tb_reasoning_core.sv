// tb_reasoning_core -- self-checking testbench of one reasoning core at its
// default sizes, with a behavioural HBM-CO pseudo-channel and the two ring
// links driven and observed by the testbench. The program exercises all
// three pipelines and their synchronisation through buffer valid counters:
//   MEM_LOAD  16 BF16 weight tiles (K = 64, N = 16) into the memory buffer
//   MEM_LOAD  one activation entry into the memory buffer
//   VMM       activations from the network buffer (they arrive late over
//             the intra-CU link, so compute waits on check_valid), outputs
//             to the network buffer
//   NET_SEND  that output entry on the inter-CU link (checked by the
//             testbench against the reference)
//   MEM_LOAD  the weights again into the same entries (waits until the
//             first VMM has released them)
//   VMM       activations from the memory buffer, ReLU on the HP-VOPs,
//             outputs to the memory buffer
//   MEM_STORE that output entry to the pseudo-channel (checked by peeking)
//   HALT
// Meanwhile the testbench sends a forward-only packet with hops = 2 into the
// inter-CU input, which must leave on the inter-CU output with hops = 1.
// Also checks done/irq, and that every expected event counter moved.
module tb_reasoning_core;
  import rpu_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        imem_we, start, done, irq;
  logic [11:0] imem_addr;
  instr_t      imem_wdata;
  logic [1:0]  cfg_mb_prio [3];
  logic [1:0]  cfg_nb_prio [4];
  logic        rd_req_valid, rd_req_ready, rd_resp_valid, wr_valid, wr_ready;
  logic [31:0] rd_addr, wr_addr;
  logic [255:0] rd_resp_data, wr_data;
  link_t       out_link [2], in_link [2];
  logic        out_ready [2], in_ready [2];
  core_ev_t    ev;

  reasoning_core dut (.*);

  logic        pl_we;
  logic [31:0] pl_addr, pk_addr;
  logic [255:0] pl_data, pk_data;
  hbm_co_model u_hbm (
    .clk, .rst_n, .rd_req_valid, .rd_req_ready, .rd_addr, .rd_resp_valid, .rd_resp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .pl_we, .pl_addr, .pl_data, .pk_addr, .pk_data);

  int checks = 0, failures = 0;
  int n_tile = 0, n_wait_act = 0, n_fwd_inter = 0, n_mb_stall = 0, n_nb_stall = 0, n_irq = 0;
  always @(posedge clk) if (rst_n) begin
    n_tile      += int'(ev.tile);
    n_wait_act  += int'(ev.wait_act);
    n_fwd_inter += int'(ev.fwd_inter);
    n_mb_stall  += int'(ev.mb_stall);
    n_nb_stall  += int'(ev.nb_stall);
    n_irq       += int'(irq);
  end

  real V1 [64], V2 [64], Wm [64][16];

  function automatic logic [TILE_BITS-1:0] vec_entry(input real v [64]);
    logic [TILE_BITS-1:0] e;
    for (int k = 0; k < 64; k++) e[16*k +: 16] = real_to_bf16(v[k]);
    return e;
  endfunction

  function automatic bit check_entry(input logic [TILE_BITS-1:0] d, input real v [64], input bit relu);
    bit ok;
    ok = 1;
    for (int n = 0; n < 64; n++) begin
      real s;
      s = 0.0;
      if (n < 16) for (int k = 0; k < 64; k++) s += v[k] * Wm[k][n];
      if (relu && s < 0.0) s = 0.0;
      if (bf16_val(d[16*n +: 16]) != bf16_val(real_to_bf16(s))) begin
        ok = 0;
        $display("  output %0d: got %h expected %f", n, d[16*n +: 16], s);
      end
    end
    return ok;
  endfunction

  // ------------------------------------------------ link 1 observer
  logic [TILE_BITS-1:0] rx_data;
  int rx_beat = 0, n_pkt = 0;
  bit got_send = 0, got_fwd = 0;
  always @(posedge clk) if (rst_n && out_link[1].valid && out_ready[1]) begin
    rx_data[LINKW*rx_beat +: LINKW] = out_link[1].data;
    rx_beat++;
    if (out_link[1].last) begin
      checks++;
      if (rx_beat != 8) begin failures++; $display("FAIL packet of %0d beats", rx_beat); end
      rx_beat = 0;
      n_pkt++;
      if (out_link[1].dst == 16'd5) begin
        got_send = 1;
        checks++;
        if (out_link[1].hops != 6'd0 || out_link[1].vcount != 2'd1 || !check_entry(rx_data, V1, 0)) begin
          failures++; $display("FAIL NET_SEND packet");
        end
      end else if (out_link[1].dst == 16'd77) begin
        got_fwd = 1;
        checks++;
        if (out_link[1].hops != 6'd1 || rx_data != {8{128'hABCD_0123}}) begin
          failures++; $display("FAIL forwarded packet: hops %0d", out_link[1].hops);
        end
      end else begin
        failures++; $display("FAIL unexpected packet to entry %0d", out_link[1].dst);
      end
    end
  end

  task automatic send_packet(input int d, input int dst, input logic [1:0] vc, input logic [5:0] hops,
                             input logic [TILE_BITS-1:0] data);
    for (int b = 0; b < 8; b++) begin
      @(negedge clk);
      in_link[d] = '{valid: 1'b1, last: (b == 7), dst: 16'(dst), vcount: vc, hops: hops,
                     data: data[LINKW*b +: LINKW]};
      #1;
      while (!in_ready[d]) begin @(negedge clk); #1; end
    end
    @(negedge clk);
    in_link[d] = '0;
  endtask

  initial begin
    instr_t prog [8];
    logic [TILE_BITS-1:0] e;
    int cyc;
    imem_we = 0; start = 0; imem_addr = '0; imem_wdata = '0; pl_we = 0; pl_addr = '0; pl_data = '0;
    pk_addr = '0; in_link[0] = '0; in_link[1] = '0; out_ready[0] = 1; out_ready[1] = 1;
    for (int i = 0; i < 3; i++) cfg_mb_prio[i] = 2'(i);
    for (int i = 0; i < 4; i++) cfg_nb_prio[i] = 2'(i);
    for (int k = 0; k < 64; k++) begin
      V1[k] = real'($urandom_range(0, 8)) - 4.0;
      V2[k] = real'($urandom_range(0, 8)) - 4.0;
      for (int n = 0; n < 16; n++) Wm[k][n] = real'($urandom_range(0, 8)) - 4.0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // pseudo-channel contents: 16 weight tiles at beat 0, activation entry at beat 256
    for (int col = 0; col < 2; col++) for (int r = 0; r < 8; r++) begin
      for (int i = 0; i < 64; i++) e[16*i +: 16] = real_to_bf16(Wm[8*r + i/8][8*col + i%8]);
      for (int b = 0; b < 4; b++) begin
        @(negedge clk);
        pl_we = 1; pl_addr = 32'(4 * (8 * col + r) + b); pl_data = e[256*b +: 256];
      end
    end
    e = vec_entry(V2);
    for (int b = 0; b < 4; b++) begin
      @(negedge clk);
      pl_we = 1; pl_addr = 32'(256 + b); pl_data = e[256*b +: 256];
    end
    @(negedge clk);
    pl_we = 0;
    // program
    prog[0] = '0; prog[0].op = OP_MEM_LOAD; prog[0].a = 16'd0; prog[0].c = 16'd0; prog[0].cnt = 16'd16;
    prog[0].vcount = 2'd1; prog[0].check_valid = 1;
    prog[1] = '0; prog[1].op = OP_MEM_LOAD; prog[1].a = 16'd100; prog[1].c = 16'd256; prog[1].cnt = 16'd1;
    prog[1].vcount = 2'd1;
    prog[2] = '0; prog[2].op = OP_VMM; prog[2].a = 16'd0; prog[2].cnt = 16'd16; prog[2].b = 16'd10;
    prog[2].c = 16'd20; prog[2].n1 = 8'd1; prog[2].n2 = 8'd2; prog[2].fmt = FMT_BF16; prog[2].ntm = 3'd1;
    prog[2].check_valid = 1; prog[2].dec = 1; prog[2].sel_a = 0; prog[2].sel_b = 0; prog[2].vcount = 2'd1;
    prog[2].vop = VOP_PASS;
    prog[3] = '0; prog[3].op = OP_NET_SEND; prog[3].a = 16'd20; prog[3].b = 16'd5; prog[3].dir = 1;
    prog[3].hops = 6'd1; prog[3].vcount = 2'd1; prog[3].check_valid = 1; prog[3].dec = 1;
    prog[4] = prog[0];
    prog[5] = prog[2]; prog[5].sel_a = 1; prog[5].b = 16'd100; prog[5].sel_b = 1; prog[5].c = 16'd200;
    prog[5].vop = VOP_MAX; prog[5].scalar = 16'h0000;
    prog[6] = '0; prog[6].op = OP_MEM_STORE; prog[6].a = 16'd200; prog[6].c = 16'd512; prog[6].cnt = 16'd1;
    prog[6].check_valid = 1; prog[6].dec = 1;
    prog[7] = '0; prog[7].op = OP_HALT;
    for (int i = 0; i < 8; i++) begin
      @(negedge clk);
      imem_we = 1; imem_addr = 12'(i); imem_wdata = prog[i];
    end
    @(negedge clk);
    imem_we = 0; start = 1;
    @(negedge clk);
    start = 0;
    fork
      begin
        repeat (80) @(negedge clk);
        send_packet(0, 10, 2'd1, 6'd0, vec_entry(V1));     // late activations
      end
      begin
        repeat (20) @(negedge clk);
        send_packet(1, 77, 2'd0, 6'd2, {8{128'hABCD_0123}}); // forward only
      end
    join
    cyc = 0;
    while (!done && cyc < 5000) begin @(negedge clk); cyc++; end
    repeat (20) @(negedge clk);
    checks++;
    if (!done) begin failures++; $display("FAIL program did not finish"); end
    // stored output entry at beats 512..515
    for (int b = 0; b < 4; b++) begin
      pk_addr = 32'(512 + b);
      #1;
      e[256*b +: 256] = pk_data;
    end
    checks++;
    if (!check_entry(e, V2, 1)) begin failures++; $display("FAIL stored VMM output"); end
    checks++; if (!got_send) begin failures++; $display("FAIL no NET_SEND packet"); end
    checks++; if (!got_fwd) begin failures++; $display("FAIL forward-only packet not forwarded"); end
    checks++; if (n_pkt != 2) begin failures++; $display("FAIL %0d packets on the inter-CU link", n_pkt); end
    checks++; if (n_irq != 1) begin failures++; $display("FAIL %0d interrupts", n_irq); end
    checks++; if (n_tile != 32) begin failures++; $display("FAIL %0d tiles", n_tile); end
    checks++; if (n_wait_act == 0) begin failures++; $display("FAIL compute never waited for activations"); end
    checks++; if (n_fwd_inter != 1) begin failures++; $display("FAIL %0d inter-CU forwards", n_fwd_inter); end
    checks++; if (n_mb_stall == 0) begin failures++; $display("FAIL no memory-buffer stall"); end
    checks++; if (n_nb_stall == 0) begin failures++; $display("FAIL no network-buffer stall"); end
    $display("events: tiles %0d wait_act %0d fwd_inter %0d mb_stall %0d nb_stall %0d",
             n_tile, n_wait_act, n_fwd_inter, n_mb_stall, n_nb_stall);
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
