// tb_integral_module: drives the integral module with a range sequence that
// converges to r_d + b (a constant bias), with errors large enough to
// saturate sat(), and compares sigma and r_hat_d every step with a
// double-precision model of sigma += sat((r - r_d)/c2), r_hat_d = r_d - c1
// sigma. Also checks the bypass (enable low) and clear, and, for four
// constant biases, that the range error of the loop r(k+1) = r_hat_d(k) + b
// follows the published convergence argument step by step and ends at zero.
module tb_integral_module;
  import tb_ref_pkg::*;
  import smpc_pkg::*;
  logic clk = 0, rst = 1;
  logic enable, clear, update, sat_hit;
  fx_t r, r_d, r_hat_d, sigma;
  int checks = 0, failures = 0, n_sat = 0;
  real sig_m, c1, c2;
  real bias [4] = '{-1.0, -0.1, 0.05, 0.8};

  integral_module dut (.clk(clk), .rst(rst), .enable(enable), .clear(clear),
                       .update(update), .r(r), .r_d(r_d), .r_hat_d(r_hat_d),
                       .sigma(sigma), .sat_hit(sat_hit));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input real rv, input bit en);
    real e, rh;
    @(negedge clk); r = r2fx(rv); enable = en; update = 1;
    @(negedge clk); update = 0;
    e = sat1((fx2r(r) - fx2r(r_d)) / c2);
    if (en) sig_m += e;
    rh = en ? fx2r(r_d) - c1 * sig_m : fx2r(r_d);
    checks++;
    if (rabs(fx2r(sigma) - sig_m) > 1e-3 || rabs(fx2r(r_hat_d) - rh) > 1e-3) begin
      failures++;
      $display("FAIL r=%f sigma %f/%f r_hat %f/%f", rv, fx2r(sigma), sig_m, fx2r(r_hat_d), rh);
    end
    begin
      real a;
      a = rabs((fx2r(r) - fx2r(r_d)) / c2);
      if (rabs(a - 1.0) > 1e-3) begin
        checks++;
        if (sat_hit !== (en && a > 1.0)) begin
          failures++;
          $display("FAIL sat_hit %0b at r=%f", sat_hit, rv);
        end
      end
    end
    if (sat_hit) n_sat++;
  endtask

  initial begin
    c1 = 0.2; c2 = 0.2 / 1.1;
    enable = 1; clear = 0; update = 0;
    r = '0; r_d = r2fx(2.0);
    sig_m = 0.0;
    repeat (3) @(negedge clk);
    rst = 0;
    // Lemma-style loop: r(k+1) = r_hat_d(k) + b with bias b = 0.3.
    begin
      real rv;
      rv = 5.0;
      for (int k = 0; k < 60; k++) begin
        step(rv, 1'b1);
        rv = fx2r(r_hat_d) + 0.3;
      end
      checks++;
      if (rabs(rv - 2.0) > 0.01) begin
        failures++;
        $display("FAIL closed loop did not converge: r = %f", rv);
      end
    end
    // Bypass: sigma holds, r_hat_d = r_d.
    step(3.0, 1'b0);
    step(1.0, 1'b0);
    // Clear.
    @(negedge clk); clear = 1; @(negedge clk); clear = 0; sig_m = 0.0;
    checks++;
    if (sigma != 0 || r_hat_d != r_d) begin failures++; $display("FAIL clear"); end
    for (int k = 0; k < 50; k++) step(urand_r(0.5, 3.5), 1'b1);
    // Range-error dynamics of the loop r(k+1) = r_hat_d(k) + b for several
    // biases: delta = r - r_d must follow delta(k+1) = delta(k) - c1 sat(delta(k)/c2),
    // i.e. fall by c1 per step while |delta| >= c2 and then shrink by the
    // factor (1 - c1/c2) = -0.1 per step, ending at zero steady-state error.
    foreach (bias[i]) begin
      real rv, d0, d1;
      @(negedge clk); clear = 1; @(negedge clk); clear = 0; sig_m = 0.0;
      rv = 2.0 + bias[i];
      for (int k = 0; k < 40; k++) begin
        d0 = rv - 2.0;
        step(rv, 1'b1);
        rv = fx2r(r_hat_d) + bias[i];
        d1 = rv - 2.0;
        checks++;
        if (rabs(d1 - (d0 - c1 * sat1(d0 / c2))) > 1e-3) begin
          failures++;
          $display("FAIL delta step b=%f: %f -> %f", bias[i], d0, d1);
        end
      end
      checks++;
      if (rabs(rv - 2.0) > 1e-3) begin
        failures++;
        $display("FAIL steady-state error %f for bias %f", rv - 2.0, bias[i]);
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL saturation never hit"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
