// tb_axpby_simd -- checks the 16-lane AXPBY unit lane by lane against reference
// arithmetic: random normal operands, moving-average coefficients, exact cancellation,
// zeros and infinities. Every lane result must match the correctly rounded
// round(round(alpha*a) + round(beta*b)) bit for bit.
module tb_axpby_simd;
  import fp32_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned LANES = 16;

  fp32_t             alpha, beta;
  fp32_t [LANES-1:0] a, b, y;
  int checks = 0, failures = 0;

  axpby_simd #(.LANES(LANES)) dut (.alpha(alpha), .beta(beta), .a(a), .b(b), .y(y));

  task automatic check_all(string what);
    #1;
    for (int k = 0; k < LANES; k++) begin
      logic [31:0] exp_y;
      exp_y = raxpby(alpha, a[k], beta, b[k]);
      checks++;
      if (y[k] !== exp_y) begin
        failures++;
        if (failures < 10)
          $display("FAIL %s lane %0d: a=%h b=%h al=%h be=%h y=%h exp=%h",
                   what, k, a[k], b[k], alpha, beta, y[k], exp_y);
      end
    end
  endtask

  initial begin
    // watchdog is implicit: this bench has no clock and a fixed number of steps
    for (int t = 0; t < 400; t++) begin
      alpha = rand_fp(110, 140, 1'b1);
      beta  = rand_fp(110, 140, 1'b1);
      for (int k = 0; k < LANES; k++) begin
        a[k] = rand_fp(100, 150, 1'b1);
        b[k] = rand_fp(100, 150, 1'b1);
      end
      check_all("random");
    end
    // moving averages with the Adam coefficients
    alpha = r2f(0.9);  beta = r2f(0.1);
    for (int t = 0; t < 100; t++) begin
      for (int k = 0; k < LANES; k++) begin
        a[k] = rand_fp(110, 122, 1'b1);
        b[k] = rand_fp(110, 122, 1'b1);
      end
      check_all("adam-m");
    end
    alpha = r2f(0.999); beta = r2f(0.001);
    for (int t = 0; t < 100; t++) begin
      for (int k = 0; k < LANES; k++) begin
        a[k] = rand_fp(95, 115, 1'b0);
        b[k] = rand_fp(95, 115, 1'b0);
      end
      check_all("adam-v");
    end
    // exact cancellation gives +0, near-cancellation exercises normalisation
    alpha = FP_ONE; beta = FP_ONE;
    for (int k = 0; k < LANES; k++) begin
      a[k] = rand_fp(120, 130, 1'b1);
      b[k] = (k < 8) ? {~a[k][31], a[k][30:0]} : {~a[k][31], a[k][30:1], ~a[k][0]};
    end
    check_all("cancel");
    for (int k = 0; k < 8; k++) begin
      checks++;
      if (y[k] !== 32'h0) begin failures++; $display("FAIL cancel lane %0d y=%h", k, y[k]); end
    end
    // zeros and infinities
    alpha = 32'h7f80_0000; beta = FP_ZERO;
    for (int k = 0; k < LANES; k++) begin a[k] = rand_fp(120, 130, 1'b0); b[k] = rand_fp(120, 130, 1'b1); end
    check_all("inf");
    alpha = FP_ZERO; beta = FP_ONE;
    check_all("zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
