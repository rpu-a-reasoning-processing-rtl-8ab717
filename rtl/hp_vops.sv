// hp_vops -- high-precision (FP32) vector operation unit, 8 lanes.
//
// Applies one element-wise operation to 8 FP32 values per cycle with a
// scalar operand given as BF16 (widened to FP32):
//   VOP_PASS  y = x
//   VOP_MUL   y = x * s        (scaling)
//   VOP_ADD   y = x + s        (bias)
//   VOP_MAX   y = max(x, s)    (s = 0 gives ReLU)
// The result is registered: out_valid/y follow in_valid/x by one cycle.
// In the core it sits on the VMM output path, between the accumulator
// scratchpads and the conversion of the results to BF16.
//
// From the paper: an FP32 vector unit beside the tile multipliers, 8 ops per
// cycle, for the non-matrix functions of LLM layers. The paper names SiLU,
// GeLU, normalisation and rotary embeddings but does not describe how they
// are computed; this unit provides only the element-wise multiply, add and
// max from which scaling, bias and ReLU are built.
module hp_vops
  import rpu_pkg::*;
#(
  parameter int unsigned LANES = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  vop_e   op,
  input  bf16_t  scalar,
  input  fp32_t  x [LANES],
  output logic   out_valid,
  output fp32_t  y [LANES]
);
  fp32_t s32;
  assign s32 = bf16_to_fp32(scalar);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < LANES; i++) y[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int i = 0; i < LANES; i++)
          case (op)
            VOP_MUL: y[i] <= fp32_mul(x[i], s32);
            VOP_ADD: y[i] <= fp32_add(x[i], s32);
            VOP_MAX: y[i] <= fp32_max(x[i], s32);
            default: y[i] <= x[i];
          endcase
    end
  end
endmodule
