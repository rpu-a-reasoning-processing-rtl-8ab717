// tb_net_dma -- self-checking testbench of the network DMA: three nodes,
// each a net_dma with its own network buffer (pipeline_arbiter_buffer,
// ports 0/1 receive, 2 send, 3 testbench). Direction 0 links form a ring
// 0 -> 1 -> 2 -> 0; each node's direction-1 link loops back to itself.
// Checks: a send with hops = 2 reaches the next two nodes through
// hardware forwarding (and not the sender), installs the requested valid
// count, decrements the source entry, and arrives at the second node within
// 2 x (8 beats + a few cycles); a direction-1 send arrives on the other
// ring; three simultaneous broadcasts deliver all 6 packets; a packet for an
// entry that is still owned waits until the consumer has read it.
module tb_net_dma;
  import rpu_pkg::*;

  localparam int NN = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic   iv [NN];
  logic   ir [NN];
  instr_t ins [NN];
  logic   busy [NN];
  link_t  out_l [NN][2];
  logic   out_r [NN][2];
  link_t  in_l  [NN][2];
  logic   in_r  [NN][2];
  logic   evf   [NN][2];
  buf_req_t             treq [NN];
  logic                 tgnt [NN];
  logic                 tst [NN];
  logic [TILE_BITS-1:0] nbd  [NN];
  logic [1:0]           prio [4];

  for (genvar n = 0; n < NN; n++) begin : g_node
    buf_req_t             req [4];
    logic                 gnt [4], stall [4], rvalid [4];
    logic [TILE_BITS-1:0] rdata;
    buf_req_t             rx_req [2];
    logic                 rx_gnt [2];
    assign req[0] = rx_req[0];
    assign req[1] = rx_req[1];
    assign rx_gnt[0] = gnt[0];
    assign rx_gnt[1] = gnt[1];
    assign req[3] = treq[n];
    assign tgnt[n] = gnt[3];
    assign tst[n] = rvalid[3];
    assign nbd[n] = rdata;

    net_dma u_net (
      .clk, .rst_n, .instr_valid(iv[n]), .instr_ready(ir[n]), .instr(ins[n]), .busy(busy[n]),
      .tx_req(req[2]), .tx_gnt(gnt[2]), .tx_rvalid(rvalid[2]), .nb_rdata(rdata),
      .rx_req, .rx_gnt, .out_link(out_l[n]), .out_ready(out_r[n]),
      .in_link(in_l[n]), .in_ready(in_r[n]), .ev_forward(evf[n])
    );
    pipeline_arbiter_buffer #(.DEPTH(128), .NP(4)) u_nb (
      .clk, .rst_n, .prio, .req, .gnt, .stall, .rvalid, .rdata
    );
    assign in_l[(n + 1) % NN][0] = out_l[n][0];
    assign out_r[n][0]           = in_r[(n + 1) % NN][0];
    assign in_l[n][1]            = out_l[n][1];
    assign out_r[n][1]           = in_r[n][1];
  end

  int checks = 0, failures = 0, fwd = 0;
  always @(posedge clk) for (int n = 0; n < NN; n++) if (evf[n][0] || evf[n][1]) fwd++;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic nb_access(input int n, input bit we, input int a, input int vc,
                           input logic [TILE_BITS-1:0] wd, input bit cv, output logic [TILE_BITS-1:0] rd);
    @(negedge clk);
    treq[n] = '0; treq[n].valid = 1; treq[n].write = we; treq[n].addr = 16'(a);
    treq[n].vcount = 2'(vc); treq[n].wdata = wd; treq[n].check_valid = cv; treq[n].dec = !we;
    #1;
    while (!tgnt[n]) begin @(negedge clk); #1; end
    @(negedge clk);
    treq[n] = '0;
    rd = nbd[n];
  endtask

  task automatic send(input int n, input int a, input int b, input bit dir, input int hops, input int vc);
    @(negedge clk);
    ins[n] = '0; ins[n].op = OP_NET_SEND; ins[n].a = 16'(a); ins[n].b = 16'(b); ins[n].dir = dir;
    ins[n].hops = 6'(hops); ins[n].vcount = 2'(vc); ins[n].check_valid = 1; ins[n].dec = 1;
    iv[n] = 1;
    #1;
    while (!ir[n]) begin @(negedge clk); #1; end
    @(negedge clk);
    iv[n] = 0;
  endtask

  function automatic logic [TILE_BITS-1:0] rnd();
    logic [TILE_BITS-1:0] v;
    for (int i = 0; i < 32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    logic [TILE_BITS-1:0] d, x, e [NN];
    int t0, t1;
    for (int n = 0; n < NN; n++) begin iv[n] = 0; ins[n] = '0; treq[n] = '0; end
    prio = '{2'd0, 2'd1, 2'd2, 2'd3};
    repeat (3) @(negedge clk);
    rst_n = 1;

    // broadcast from node 0 to the two other nodes
    d = rnd();
    nb_access(0, 1, 3, 1, d, 0, x);
    t0 = $time;
    send(0, 3, 40, 0, 2, 1);
    while (g_node[2].u_nb.vcnt[40] == 0 && $time - t0 < 2000) @(negedge clk);
    t1 = ($time - t0) / 10;
    check(t1 <= 2 * (8 + 6), $sformatf("two-hop delivery took %0d cycles", t1));
    repeat (5) @(negedge clk);
    check(g_node[1].u_nb.vcnt[40] == 1 && g_node[2].u_nb.vcnt[40] == 1, "valid count installed at both receivers");
    check(g_node[0].u_nb.vcnt[40] == 0, "sender not written (hops = 2)");
    check(g_node[0].u_nb.vcnt[3] == 0, "source entry decremented by the send");
    check(fwd == 1, $sformatf("one hardware forward (%0d)", fwd));
    nb_access(1, 0, 40, 0, '0, 1, x);
    check(x == d, "node 1 received the data");
    // direction 1 (self loop) from node 2, forwarding its copy
    send(2, 40, 50, 1, 1, 2);
    repeat (30) @(negedge clk);
    check(g_node[2].u_nb.vcnt[50] == 2, "direction-1 packet installed with valid count 2");
    nb_access(2, 0, 50, 0, '0, 1, x);
    check(x == d, "direction-1 data");
    // three simultaneous broadcasts
    for (int n = 0; n < NN; n++) begin e[n] = rnd(); nb_access(n, 1, 5, 1, e[n], 0, x); end
    fork
      send(0, 5, 60, 0, 2, 1);
      send(1, 5, 61, 0, 2, 1);
      send(2, 5, 62, 0, 2, 1);
    join
    repeat (80) @(negedge clk);
    for (int n = 0; n < NN; n++)
      for (int s = 0; s < NN; s++)
        if (s != n) begin
          nb_access(n, 0, 60 + s, 0, '0, 1, x);
          check(x == e[s], $sformatf("node %0d got broadcast of node %0d", n, s));
        end
    // receiver entry still owned: packet waits
    d = rnd();
    nb_access(1, 1, 7, 1, d, 0, x);
    send(1, 7, 50, 1, 1, 1);                        // node 1 -> itself entry 50 (free)
    nb_access(1, 1, 8, 1, rnd(), 0, x);
    nb_access(1, 1, 50, 1, rnd(), 0, x);            // occupy... (entry 50 now owned)
    repeat (20) @(negedge clk);
    nb_access(1, 0, 50, 0, '0, 1, x);               // consume whatever is there
    nb_access(1, 1, 9, 1, d, 0, x);
    nb_access(1, 1, 50, 1, rnd(), 0, x);            // owned again
    send(1, 9, 50, 1, 1, 1);
    repeat (30) @(negedge clk);
    check(g_node[1].u_net.h_full[1] && !g_node[1].u_net.h_wr_done[1], "packet held while the entry is owned");
    nb_access(1, 0, 50, 0, '0, 1, x);               // consumer frees it
    repeat (5) @(negedge clk);
    nb_access(1, 0, 50, 0, '0, 1, x);
    check(x == d, "held packet written once the entry was freed");
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
