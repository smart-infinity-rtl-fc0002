// update_unit -- final parameter update of the optimizer, LANES FP32 lanes, 2 stages.
//
// After the AXPBY units have folded the gradient into the optimizer states, this unit
// turns the new states into the new parameter:
//   Adam    : p' = p - step * m' / (sqrt(v') * denom_scale + eps)
//   SGD     : p' = p - step * m'
//   AdaGrad : p' = p - step * g  / (sqrt(v') * denom_scale + eps)
// Stage 1 forms the denominator (square root, scale, + eps); stage 2 divides and
// applies the step as an AXPBY p*1 + q*(-step). The paper names this block ("Update")
// and its inputs; the formulas are the standard optimizers' and the two-stage split
// is this design's choice. Outputs appear 2 cycles after in_valid, one vector per
// cycle, with no stall (the PE never back-pressures its pipeline).
// The LANES parameter deliberately shadows the package constant of the same name so the
// unit can be built narrower in isolation; inside the PE both are equal.
module update_unit
  import fp32_pkg::*;
  import si_pkg::*;
#(
  parameter int unsigned LANES = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  opt_e              opt,
  input  opt_coef_t         coef,
  input  logic              in_valid,
  input  fp32_t [LANES-1:0] m_new,
  input  fp32_t [LANES-1:0] v_new,
  input  fp32_t [LANES-1:0] grad,
  input  fp32_t [LANES-1:0] param,
  output logic              out_valid,
  output fp32_t [LANES-1:0] param_new
);

  fp32_t [LANES-1:0] num_q, den_q, par_q;
  logic              vld_q;
  fp32_t             neg_step;

  assign neg_step = {~coef.step[31], coef.step[30:0]};

  // stage 1: numerator select and denominator
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q <= 1'b0;
      num_q <= '0;
      den_q <= '0;
      par_q <= '0;
    end else begin
      vld_q <= in_valid;
      for (int k = 0; k < LANES; k++) begin
        num_q[k] <= (opt == OPT_ADAGRAD) ? grad[k] : m_new[k];
        den_q[k] <= (opt == OPT_SGD_MOM) ? FP_ONE
                  : fp_add(fp_mul(fp_sqrt(v_new[k]), coef.denom_scale), coef.eps);
        par_q[k] <= param[k];
      end
    end
  end

  // stage 2: quotient and parameter step
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      param_new <= '0;
    end else begin
      out_valid <= vld_q;
      for (int k = 0; k < LANES; k++) begin
        param_new[k] <= fp_add(fp_mul(FP_ONE, par_q[k]),
                               fp_mul(neg_step, (opt == OPT_SGD_MOM) ? num_q[k]
                                                : fp_div(num_q[k], den_q[k])));
      end
    end
  end

endmodule
