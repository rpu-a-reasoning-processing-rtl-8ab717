// tmac -- vector-tile MAC unit (TMAC): an 8x8 array of BF16 x BF16 -> FP32
// multiply-accumulate cells with its activation register file, a column tree
// sum and the accumulator scratchpad.
//
// Dataflow (weight streaming, output stationary). Every accepted tile is one
// 8x8 block of the weight matrix, W[k0+r][n0+c] at element 8r+c of `tile`.
// The activation register file holds one stripe shard, 8 segments of 8 BF16
// values (64 values of the input vector). With `tile_row` = j, segment j is
// read and its element r is broadcast along MAC row r, so cell (r,c) adds
// act[j][r] * W[r][c] into its FP32 accumulator. One tile per cycle, 64 MACs
// per cycle.
//
// A column of tiles in a stripe is 8 tiles (tile_row 0..7). The tile flagged
// `tile_last` closes the column: the 8x8 accumulator face is copied to a
// drain face and the accumulators restart from zero. The face is then
// reduced column by column, one column per cycle, through a three-stage
// adder tree (8 -> 4 -> 2 -> 1, one register per stage), and the sum is
// added into the accumulator scratchpad at col_base + c (or written, when
// `first_stripe`, i.e. on the first stripe of a VMM). Draining a face takes
// 8 cycles, the same as computing the next column, so the tree is never
// asked to take a second face before the first has left.
//
// The scratchpad (ACC_DEPTH FP32 words, 32 KB by default) is read 8 words at
// a time through acc_rd_addr (word address, low 3 bits ignored) with the data
// in acc_rd_data one cycle later.
//
// From the paper: 8x8 array, BF16 x FP32 accumulate, activation broadcast
// along the array, output-stationary accumulation per column of tiles,
// 3-stage column tree sum, partial sums kept locally and re-read for the
// next stripe, 32 KB ACT/ACC buffer. This design's choices: one-cycle MACs,
// a single shared tree drained one face column per cycle, the scratchpad
// organisation and the read port width.
module tmac
  import rpu_pkg::*;
#(
  parameter int unsigned ACC_DEPTH = 8192
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // activation register file load: 8 segments x 8 BF16 (one stripe shard)
  input  logic                          act_load,
  input  logic [TILE_BITS-1:0]          act_data,
  // weight tile from the compute bus
  input  logic                          tile_valid,
  input  logic [TILE_BITS-1:0]          tile,
  input  logic [2:0]                    tile_row,
  input  logic                          tile_last,
  input  logic [$clog2(ACC_DEPTH)-1:0]  col_base,
  input  logic                          first_stripe,
  // accumulator scratchpad read (8 words)
  input  logic [$clog2(ACC_DEPTH)-1:0]  acc_rd_addr,
  output fp32_t                         acc_rd_data [TILE_DIM],
  output logic                          busy
);
  localparam int unsigned AW = $clog2(ACC_DEPTH);

  bf16_t act_rf [TILE_DIM][TILE_DIM];     // [segment][element]
  fp32_t acc    [TILE_DIM][TILE_DIM];     // [row][col]
  fp32_t face   [TILE_DIM][TILE_DIM];
  fp32_t acc_sp [ACC_DEPTH];

  // ---------------------------------------------------------------- MAC array
  fp32_t mac_out [TILE_DIM][TILE_DIM];
  always_comb begin
    for (int r = 0; r < TILE_DIM; r++)
      for (int c = 0; c < TILE_DIM; c++)
        mac_out[r][c] = fp32_add(acc[r][c],
                                 bf16_mul(act_rf[tile_row][r], tile[16*(8*r+c) +: 16]));
  end

  // drain control
  logic          drain_act;
  logic [2:0]    drain_col;
  logic [AW-1:0] drain_base;
  logic          drain_first;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < TILE_DIM; r++)
        for (int c = 0; c < TILE_DIM; c++) begin
          acc[r][c]    <= '0;
          face[r][c]   <= '0;
          act_rf[r][c] <= '0;
        end
      drain_act   <= 1'b0;
      drain_col   <= '0;
      drain_base  <= '0;
      drain_first <= 1'b0;
    end else begin
      if (act_load)
        for (int s = 0; s < TILE_DIM; s++)
          for (int e = 0; e < TILE_DIM; e++)
            act_rf[s][e] <= act_data[SEG_BITS*s + 16*e +: 16];
      if (tile_valid) begin
        for (int r = 0; r < TILE_DIM; r++)
          for (int c = 0; c < TILE_DIM; c++)
            acc[r][c] <= tile_last ? '0 : mac_out[r][c];
        if (tile_last) begin
          face        <= mac_out;
          drain_act   <= 1'b1;
          drain_col   <= '0;
          drain_base  <= col_base;
          drain_first <= first_stripe;
        end
      end
      if (drain_act && !(tile_valid && tile_last)) begin
        drain_col <= drain_col + 3'd1;
        if (drain_col == 3'd7) drain_act <= 1'b0;
      end
    end
  end

  // ---------------------------------------------------------------- tree sum
  fp32_t         s1 [4];
  fp32_t         s2 [2];
  fp32_t         s3;
  logic [2:0]    v;                       // stage valids
  logic [AW-1:0] a1, a2, a3;
  logic [2:0]    f;                       // first-stripe flags per stage

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v  <= '0;
      f  <= '0;
      a1 <= '0; a2 <= '0; a3 <= '0;
      s1 <= '{default: '0};
      s2 <= '{default: '0};
      s3 <= '0;
    end else begin
      v[0] <= drain_act;
      if (drain_act) begin
        for (int i = 0; i < 4; i++)
          s1[i] <= fp32_add(face[2*i][drain_col], face[2*i+1][drain_col]);
        a1   <= drain_base + AW'(drain_col);
        f[0] <= drain_first;
      end
      v[1] <= v[0];
      if (v[0]) begin
        s2[0] <= fp32_add(s1[0], s1[1]);
        s2[1] <= fp32_add(s1[2], s1[3]);
        a2    <= a1;
        f[1]  <= f[0];
      end
      v[2] <= v[1];
      if (v[1]) begin
        s3   <= fp32_add(s2[0], s2[1]);
        a3   <= a2;
        f[2] <= f[1];
      end
    end
  end

  // accumulator scratchpad: read-modify-write of the tree result
  always_ff @(posedge clk) begin
    if (v[2]) acc_sp[a3] <= f[2] ? s3 : fp32_add(acc_sp[a3], s3);
  end

  logic [AW-1:0] rd_base;
  assign rd_base = {acc_rd_addr[AW-1:3], 3'b000};
  always_ff @(posedge clk) begin
    for (int i = 0; i < TILE_DIM; i++) acc_rd_data[i] <= acc_sp[rd_base + AW'(i)];
  end

  assign busy = drain_act | (|v);

  // A new face may only arrive once the previous one has left the drain face.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (tile_valid && tile_last) |-> (!drain_act || drain_col == 3'd7))
    else $error("tmac: accumulator face closed while the previous face is still draining");
endmodule
