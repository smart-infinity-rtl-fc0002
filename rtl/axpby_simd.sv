// axpby_simd -- SIMD AXPBY unit: y[k] = alpha * a[k] + beta * b[k] for LANES FP32 lanes.
//
// The updater expresses every moving average of an optimizer as an AXPBY with
// host-chosen coefficients (for Adam: m' = b1*m + (1-b1)*g, v' = b2*v + (1-b2)*g^2).
// Each lane multiplies A by alpha and B by beta and adds the two products, as drawn
// in the AXPBY block of the microarchitecture (alpha/beta multipliers feeding an
// adder, 16 lanes). Both products and the sum are rounded separately (no fused
// multiply-add); that rounding order is this design's choice.
// The unit is purely combinational; the updater PE places the pipeline registers.
module axpby_simd
  import fp32_pkg::*;
#(
  parameter int unsigned LANES = 16
) (
  input  fp32_t             alpha,
  input  fp32_t             beta,
  input  fp32_t [LANES-1:0] a,
  input  fp32_t [LANES-1:0] b,
  output fp32_t [LANES-1:0] y
);

  always_comb begin
    for (int k = 0; k < LANES; k++) begin
      y[k] = fp_add(fp_mul(alpha, a[k]), fp_mul(beta, b[k]));
    end
  end

endmodule
