// stream_decoder -- on-the-fly dequantiser from block-quantised weight tiles
// to 64 x BF16 tiles for the compute bus.
//
// Input: a bit stream delivered 256 bits per cycle (s_data bit 0 is the
// earliest stream bit). The stream is a sequence of tile records packed back
// to back with no alignment: an 8-bit shared exponent E followed by 64
// elements of b bits each (element i = weight (i/8, i%8) of the tile).
// Supported element types (fmt, held stable while a stream is decoded):
//   MXFP4 E2M1 (b=4), MXFP6 E3M2 (b=6), MXFP8 E4M3 (b=8), all with the
//   element scaled by 2^(E-127);
//   BFP4 / BFP8 two's complement integers (b=4 / 8) scaled by 2^(E-127).
// Every supported value is exactly representable in BF16 unless its exponent
// leaves the BF16 range: underflow flushes to (signed) zero, overflow
// saturates to the largest finite BF16. E4M3's NaN code is decoded as a
// number (480 x scale).
//
// Output: m_tile (element i in bits 16i+15:16i) with valid/ready. Records
// are unpacked from a 1024-bit shift buffer; a new input word is accepted
// whenever at least 256 free bits remain, so an MXFP4 stream (264-bit
// records) yields close to one tile per cycle from a 256b/cycle input, the
// rate of one pseudo-channel. `flush` empties the buffer (start of a new
// weight stream).
//
// From the paper: block-quantised tiles streamed from the memory buffer,
// dequantised on the fly to BF16 until 64 values (one tile) are rebuilt,
// BFP/MXFP formats of 4 to 8 bits, 256 bits per cycle in, 1024-bit tile out,
// the exponent travelling in the stream between tiles. This design's
// choices: one shared exponent per 64-element tile, the record layout, the
// rounding and saturation rules. The NxFP formats are not supported.
module stream_decoder
  import rpu_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 flush,
  input  wfmt_e                fmt,
  input  logic                 s_valid,
  output logic                 s_ready,
  input  logic [MEMW-1:0]      s_data,
  output logic                 m_valid,
  input  logic                 m_ready,
  output logic [TILE_BITS-1:0] m_tile
);
  localparam int unsigned BUFW = 1024;

  logic [BUFW-1:0]   sbuf;
  logic [10:0]       cnt;              // valid bits in sbuf
  logic [10:0]       rec_len;
  int unsigned       eb;

  always_comb begin
    eb      = elem_bits(fmt);
    rec_len = 11'(8 + 64 * eb);
  end

  assign m_valid = (cnt >= rec_len);
  assign s_ready = (cnt <= 11'(BUFW - MEMW));

  // ---------------------------------------------------------------- element decode
  // Returns the BF16 value of one element given its bits and the shared exponent.
  function automatic bf16_t decode_elem(input wfmt_e f, input logic [7:0] x, input logic [7:0] se);
    logic       s;
    logic [7:0] mag;                   // integer significand
    int         q;                     // value = mag * 2^(q + se - 127)
    int         p, e;
    logic [7:0] mn;
    s = 1'b0; mag = '0; q = 0;
    case (f)
      FMT_MXFP4: begin                 // E2M1, bias 1
        s = x[3];
        if (x[2:1] == 0) begin mag = {7'd0, x[0]};         q = 1 - 1 - 1;          end
        else             begin mag = {6'd0, 1'b1, x[0]};   q = int'(x[2:1]) - 1 - 1; end
      end
      FMT_MXFP6: begin                 // E3M2, bias 3
        s = x[5];
        if (x[4:2] == 0) begin mag = {6'd0, x[1:0]};       q = 1 - 3 - 2;          end
        else             begin mag = {5'd0, 1'b1, x[1:0]}; q = int'(x[4:2]) - 3 - 2; end
      end
      FMT_MXFP8: begin                 // E4M3, bias 7
        s = x[7];
        if (x[6:3] == 0) begin mag = {5'd0, x[2:0]};       q = 1 - 7 - 3;          end
        else             begin mag = {4'd0, 1'b1, x[2:0]}; q = int'(x[6:3]) - 7 - 3; end
      end
      FMT_BFP4: begin
        s   = x[3];
        mag = x[3] ? 8'(4'(-x[3:0])) : {4'd0, x[3:0]};
        q   = 0;
      end
      default: begin                   // BFP8 (BF16 never reaches the decoder)
        s   = x[7];
        mag = x[7] ? 8'(-x) : x;
        q   = 0;
      end
    endcase
    if (mag == 0) return {s, 15'h0};
    p = 0;
    for (int i = 0; i < 8; i++) if (mag[i]) p = i;
    e  = p + q + int'(se);
    mn = mag << (7 - p);
    if (e <= 0)   return {s, 15'h0};
    if (e >= 255) return {s, 15'h7F7F};
    return {s, e[7:0], mn[6:0]};
  endfunction

  always_comb begin
    logic [7:0] se;
    logic [7:0] x;
    se = sbuf[7:0];
    for (int i = 0; i < TILE_ELEMS; i++) begin
      x = 8'(sbuf >> (8 + i * eb));
      case (fmt)
        FMT_MXFP4, FMT_BFP4: x = {4'h0, x[3:0]};
        FMT_MXFP6:           x = {2'h0, x[5:0]};
        default:             ;
      endcase
      m_tile[16*i +: 16] = decode_elem(fmt, x, se);
    end
  end

  // ---------------------------------------------------------------- shift buffer
  logic          pop, push;
  logic [10:0]   left;
  assign pop  = m_valid && m_ready;
  assign push = s_valid && s_ready;
  assign left = pop ? cnt - rec_len : cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sbuf <= '0;
      cnt  <= '0;
    end else if (flush) begin
      sbuf <= '0;
      cnt  <= '0;
    end else begin
      logic [BUFW-1:0] nb;
      nb = pop ? (sbuf >> rec_len) : sbuf;
      if (push) nb = nb | ({{(BUFW-MEMW){1'b0}}, s_data} << left);
      sbuf <= nb;
      cnt  <= left + (push ? 11'(MEMW) : 11'd0);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) cnt <= 11'(BUFW))
    else $error("stream_decoder: shift buffer overflow");
endmodule
