// rpu_pkg -- types, constants and floating-point helpers shared by the
// reasoning-core RTL.
//
// Number formats: weights and activations travel as BF16, products are
// accumulated in FP32. The helpers below implement the arithmetic the
// datapath needs: BF16 x BF16 -> FP32 (exact, the 8x8-bit significand product
// always fits an FP32 significand), FP32 + FP32 and FP32 x FP32 with
// round-to-nearest-even, and FP32 -> BF16 with round-to-nearest-even.
// Subnormal inputs and results are flushed to zero, overflow gives infinity;
// NaN handling is limited to propagating an operand whose exponent is all
// ones. These simplifications are this design's choice; the paper only states
// "BF16 multiplies with FP32 accumulations".
//
// Buffer and link bundles are packed structs so that the memory, network and
// compute pipelines see one definition of each. The instruction word is this
// design's own encoding: the paper describes CISC-style long-running
// instructions carrying operand addresses, sizes, data type and the
// pipeline-arbiter flags, but gives no bit layout.
package rpu_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned TILE_DIM   = 8;      // 8x8 weight tile (paper)
  localparam int unsigned TILE_ELEMS = TILE_DIM * TILE_DIM;
  localparam int unsigned TILE_BITS  = TILE_ELEMS * 16;   // 1024b compute bus
  localparam int unsigned SEG_BITS   = TILE_DIM * 16;     // 128b act segment
  localparam int unsigned MEMW       = 256;    // pseudo-channel beat, 256b/1 GHz
  localparam int unsigned BEATS_PER_ENTRY = TILE_BITS / MEMW;   // 4
  localparam int unsigned LINKW      = 128;    // 16 GB/s per core @ 1 GHz
  localparam int unsigned BEATS_PER_PKT = TILE_BITS / LINKW;    // 8
  localparam int unsigned BUF_AW     = 16;     // address field width in requests

  typedef logic [15:0] bf16_t;
  typedef logic [31:0] fp32_t;

  // ---------------------------------------------------------------- weight formats
  typedef enum logic [2:0] {
    FMT_BF16  = 3'd0,   // raw 64 x BF16 tile per 1024b entry, decoder bypassed
    FMT_MXFP4 = 3'd1,   // E2M1 elements, shared E8M0 exponent
    FMT_MXFP6 = 3'd2,   // E3M2 elements, shared E8M0 exponent
    FMT_MXFP8 = 3'd3,   // E4M3 elements, shared E8M0 exponent
    FMT_BFP4  = 3'd4,   // 4-bit two's complement integers, shared exponent
    FMT_BFP8  = 3'd5    // 8-bit two's complement integers, shared exponent
  } wfmt_e;

  function automatic int unsigned elem_bits(input wfmt_e f);
    case (f)
      FMT_MXFP4, FMT_BFP4: return 4;
      FMT_MXFP6:           return 6;
      default:             return 8;
    endcase
  endfunction

  // ---------------------------------------------------------------- buffer port
  // One request to a pipeline-arbitrated buffer. A write sets the entry's
  // valid counter to vcount; with check_valid it waits until the counter is
  // zero (entry free). A read with check_valid waits until the counter is
  // non-zero (data ready); with dec it decrements the counter.
  typedef struct packed {
    logic                 valid;
    logic                 write;
    logic                 check_valid;
    logic                 dec;
    logic [1:0]           vcount;
    logic [BUF_AW-1:0]    addr;
    logic [TILE_BITS-1:0] wdata;
  } buf_req_t;

  // ---------------------------------------------------------------- network link beat
  // A packet is one 1024b buffer entry sent as 8 beats of 128b. Every beat
  // carries the header: destination entry, valid count to install there
  // (0 = forward only, do not store) and the number of further hops.
  typedef struct packed {
    logic              valid;
    logic              last;
    logic [BUF_AW-1:0] dst;
    logic [1:0]        vcount;
    logic [5:0]        hops;
    logic [LINKW-1:0]  data;
  } link_t;

  // ---------------------------------------------------------------- instructions
  typedef enum logic [3:0] {
    OP_NOP       = 4'd0,
    OP_HALT      = 4'd1,
    OP_MEM_LOAD  = 4'd2,   // HBM -> memory buffer
    OP_MEM_STORE = 4'd3,   // memory buffer -> HBM
    OP_NET_SEND  = 4'd4,   // network buffer -> link (intra-CU or inter-CU ring)
    OP_VMM       = 4'd5    // stripe-based vector-matrix multiply
  } opcode_e;

  typedef enum logic [1:0] {
    VOP_PASS = 2'd0, VOP_MUL = 2'd1, VOP_ADD = 2'd2, VOP_MAX = 2'd3
  } vop_e;

  // Field use per opcode:
  //  MEM_LOAD/STORE: a = memory-buffer entry, {b,c} = HBM beat address,
  //                  cnt = entries, check_valid, dec (store), vcount (load)
  //  NET_SEND:       a = network-buffer source entry, b = destination entry,
  //                  dir (0 intra-CU ring, 1 inter-CU ring), hops, vcount at
  //                  the receiver, check_valid, dec
  //  VMM:            a = first weight entry (memory buffer), cnt = weight
  //                  entries to stream, b = first activation entry
  //                  (sel_a: 0 network buffer, 1 memory buffer), c = first
  //                  output entry (sel_b: 0 network buffer, 1 memory buffer),
  //                  n1 = stripes (K/64), n2 = tile columns (N/8),
  //                  fmt, ntm = active TMACs (1..4), vop/scalar = HP-VOP
  //                  applied to the outputs, vcount on the outputs
  typedef struct packed {
    opcode_e     op;
    logic [15:0] a;
    logic [15:0] b;
    logic [15:0] c;
    logic [15:0] cnt;
    logic [7:0]  n1;
    logic [7:0]  n2;
    wfmt_e       fmt;
    logic [2:0]  ntm;
    logic        check_valid;
    logic        dec;
    logic [1:0]  vcount;
    logic        sel_a;
    logic        sel_b;
    logic        dir;
    logic [5:0]  hops;
    vop_e        vop;
    logic [15:0] scalar;
    logic [6:0]  pad;
  } instr_t;

  localparam int unsigned INSTR_BITS = $bits(instr_t);   // 128

  // Per-cycle event strobes of a core, for performance counters.
  typedef struct packed {
    logic tile;          // a weight tile entered the TMACs
    logic wait_weight;   // compute ready for a tile, none available
    logic wait_act;      // compute waiting for an activation entry
    logic fwd_intra;     // a packet was forwarded on the intra-CU ring
    logic fwd_inter;     // a packet was forwarded on the inter-CU ring
    logic mb_stall;      // a memory-buffer request held back by check_valid
    logic nb_stall;      // a network-buffer request held back by check_valid
    logic nb_conflict;   // several network-buffer ports requested at once
  } core_ev_t;

  // ---------------------------------------------------------------- float helpers
  function automatic fp32_t bf16_to_fp32(input bf16_t x);
    return {x, 16'h0000};
  endfunction

  // FP32 -> BF16, round to nearest even; NaN kept quiet.
  function automatic bf16_t fp32_to_bf16(input fp32_t x);
    logic [32:0] r;
    if (x[30:23] == 8'hFF) return {x[31:16] | {9'h0, (x[22:0] != 0), 6'h0}};
    if (x[30:23] == 8'h00) return {x[31], 15'h0};
    r = {1'b0, x} + 33'h7FFF + {32'h0, x[16]};
    return r[31:16];
  endfunction

  // Exact BF16 x BF16 -> FP32 product.
  function automatic fp32_t bf16_mul(input bf16_t a, input bf16_t b);
    logic        s;
    logic [15:0] m;
    logic [22:0] f;
    int          e;
    s = a[15] ^ b[15];
    if (a[14:7] == 8'hFF || b[14:7] == 8'hFF) return {s, 8'hFF, 23'h0};
    if (a[14:7] == 8'h00 || b[14:7] == 8'h00) return {s, 31'h0};
    m = {1'b1, a[6:0]} * {1'b1, b[6:0]};
    e = int'(a[14:7]) + int'(b[14:7]) - 127;
    if (m[15]) begin
      e = e + 1;
      f = {m[14:0], 8'h00};
    end else begin
      f = {m[13:0], 9'h000};
    end
    if (e >= 255) return {s, 8'hFF, 23'h0};
    if (e <= 0)   return {s, 31'h0};
    return {s, e[7:0], f};
  endfunction

  // Round a normalised significand with three extra bits (guard, round,
  // sticky) and pack it. m27[26] is the hidden one.
  function automatic fp32_t fp_round_pack(input logic s, input int e, input logic [26:0] m27);
    logic [24:0] mr;
    logic        up;
    up = m27[2] & (m27[1] | m27[0] | m27[3]);
    mr = {1'b0, m27[26:3]} + {24'h0, up};
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 1;
    end
    if (e >= 255) return {s, 8'hFF, 23'h0};
    if (e <= 0)   return {s, 31'h0};
    return {s, e[7:0], mr[22:0]};
  endfunction

  function automatic fp32_t fp32_add(input fp32_t a, input fp32_t b);
    fp32_t       x, y;
    logic [26:0] mx, my, sh;
    logic [27:0] sum;
    logic        st;
    int          d, e, lz;
    if (a[30:23] == 8'hFF) return a;
    if (b[30:23] == 8'hFF) return b;
    if (a[30:23] == 8'h00) return (b[30:23] == 8'h00) ? {a[31] & b[31], 31'h0} : b;
    if (b[30:23] == 8'h00) return a;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    d  = int'(x[30:23]) - int'(y[30:23]);
    if (d >= 27) begin
      sh = 27'd1;                        // only sticky survives
    end else begin
      sh = my >> d;
      st = 1'b0;
      for (int i = 0; i < 27; i++) if (i < d && my[i]) st = 1'b1;
      sh[0] = sh[0] | st;
    end
    e = int'(x[30:23]);
    if (x[31] == y[31]) begin
      sum = {1'b0, mx} + {1'b0, sh};
      if (sum[27]) begin
        sum = {1'b0, sum[27:2], sum[1] | sum[0]};
        e   = e + 1;
      end
    end else begin
      sum = {1'b0, mx} - {1'b0, sh};
      if (sum == 0) return 32'h0;
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      e   = e - lz;
    end
    return fp_round_pack(x[31], e, sum[26:0]);
  endfunction

  function automatic fp32_t fp32_mul(input fp32_t a, input fp32_t b);
    logic        s;
    logic [47:0] p;
    logic [26:0] m27;
    int          e;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'hFF || b[30:23] == 8'hFF) return {s, 8'hFF, 23'h0};
    if (a[30:23] == 8'h00 || b[30:23] == 8'h00) return {s, 31'h0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) begin
      e   = e + 1;
      m27 = {p[47:22], |p[21:0]};
    end else begin
      m27 = {p[46:21], |p[20:0]};
    end
    return fp_round_pack(s, e, m27);
  endfunction

  // FP32 maximum (treats the encodings as sign-magnitude numbers).
  function automatic fp32_t fp32_max(input fp32_t a, input fp32_t b);
    logic a_gt;
    if (a[31] != b[31]) a_gt = b[31];
    else if (a[31])     a_gt = a[30:0] < b[30:0];
    else                a_gt = a[30:0] > b[30:0];
    return a_gt ? a : b;
  endfunction

endpackage
