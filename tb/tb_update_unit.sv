// tb_update_unit -- drives the update unit with one random vector per cycle for each
// optimizer and compares every lane of p' with the reference formula
// (p - step*m'/(sqrt(v')*scale + eps), p - step*m', p - step*g/(sqrt(v')*scale + eps)).
// It also checks the 2-cycle latency and that a result leaves every cycle.
module tb_update_unit;
  import fp32_pkg::*;
  import si_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned L = 16;
  localparam int unsigned N = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  opt_e      opt;
  opt_coef_t coef;
  logic      in_valid;
  fp32_t [L-1:0] m_new, v_new, grad, param, param_new;
  logic      out_valid;
  int checks = 0, failures = 0;

  update_unit #(.LANES(L)) dut (.*);

  fp32_t [L-1:0] sm[N], sv[N], sg[N], sp[N];
  int issue_cyc[N];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(opt_e o);
    int got = 0;
    opt = o;
    for (int t = 0; t < N; t++)
      for (int k = 0; k < L; k++) begin
        sm[t][k] = rand_fp(110, 122, 1'b1);
        sv[t][k] = rand_fp(95, 115, 1'b0);
        sg[t][k] = rand_fp(110, 122, 1'b1);
        sp[t][k] = rand_fp(115, 125, 1'b1);
      end
    fork
      begin
        for (int t = 0; t < N; t++) begin
          @(negedge clk);
          in_valid = 1'b1;
          m_new = sm[t]; v_new = sv[t]; grad = sg[t]; param = sp[t];
          issue_cyc[t] = cyc;
        end
        @(negedge clk) in_valid = 1'b0;
      end
      begin
        while (got < N) begin
          @(posedge clk);
          #1;
          if (out_valid) begin
            checks++;
            if (cyc - issue_cyc[got] != 2) begin
              failures++;
              $display("FAIL latency %0d", cyc - issue_cyc[got]);
            end
            for (int k = 0; k < L; k++) begin
              logic [31:0] den, q, e;
              den = radd(rmul(rsqrt(sv[got][k]), coef.denom_scale), coef.eps);
              unique case (o)
                OPT_ADAM:    q = rdiv(sm[got][k], den);
                OPT_SGD_MOM: q = sm[got][k];
                default:     q = rdiv(sg[got][k], den);
              endcase
              e = raxpby(FP_ONE, sp[got][k], rneg(coef.step), q);
              checks++;
              if (param_new[k] !== e) begin
                failures++;
                if (failures < 10) $display("FAIL opt %0d vec %0d lane %0d: %h exp %h",
                                            o, got, k, param_new[k], e);
              end
            end
            got++;
          end
        end
      end
    join
  endtask

  initial begin
    in_valid = 0; opt = OPT_ADAM;
    m_new = '0; v_new = '0; grad = '0; param = '0;
    coef.alpha_m = r2f(0.9);   coef.beta_m = r2f(0.1);
    coef.alpha_v = r2f(0.999); coef.beta_v = r2f(0.001);
    coef.step = r2f(1.0e-3 / (1.0 - 0.9 ** 3));
    coef.denom_scale = r2f(1.0 / $sqrt(1.0 - 0.999 ** 3));
    coef.eps = r2f(1.0e-8);
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(OPT_ADAM);
    coef.step = r2f(0.01);
    run(OPT_SGD_MOM);
    coef.denom_scale = FP_ONE; coef.eps = r2f(1.0e-10);
    run(OPT_ADAGRAD);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
