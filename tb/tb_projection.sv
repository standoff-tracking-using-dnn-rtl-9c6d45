// tb_projection: checks the alternating projection against a double-precision
// model of the same procedure (3 passes over 4 half-spaces, each pass ended by
// clipping to [0, 12], backup point when still infeasible). Cases: a feasible
// input (unchanged, no step), zero half-space rows (box clipping only), random
// half-spaces around a known feasible point, and contradictory constraints
// (backup point). Each call must finish within 1234 cycles (6.17 us at
// 200 MHz).
module tb_projection;
  import tb_ref_pkg::*;
  import smpc_pkg::*;
  logic clk = 0, rst = 1, start = 0;
  fx_t u_hat [4], g [4][4], b [4], ubk [4], u [4];
  logic busy, done, clipped, backup_used;
  logic [7:0] n_steps;
  int checks = 0, failures = 0, n_proj = 0, n_clip = 0, n_bk = 0, n_skip = 0;

  projection dut (.clk(clk), .rst(rst), .start(start), .u_hat(u_hat), .g(g), .b(b),
    .u_backup(ubk), .busy(busy), .done(done), .u(u), .n_steps(n_steps),
    .clipped(clipped), .backup_used(backup_used));

  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input real uh[4], input real gr[4][4], input real br[4], input real bk[4],
                     input int exp_steps);
    real uq[4], gq[4][4], bq[4], bkq[4], um[4], um2[4], um3[4];
    bit  bkm, bkm2, bkm3;
    int  st, st2, st3, cyc;
    for (int k = 0; k < 4; k++) begin
      u_hat[k] = r2fx(uh[k]); uq[k] = fx2r(u_hat[k]);
      ubk[k] = r2fx(bk[k]); bkq[k] = fx2r(ubk[k]);
    end
    for (int j = 0; j < 4; j++) begin
      b[j] = r2fx(br[j]); bq[j] = fx2r(b[j]);
      for (int k = 0; k < 4; k++) begin g[j][k] = r2fx(gr[j][k]); gq[j][k] = fx2r(g[j][k]); end
    end
    project(uq, gq, bq, bkq, 12.0, 3, 64.0 / 65536.0, um, bkm, st);
    project(uq, gq, bq, bkq, 12.0, 3, 16.0 / 65536.0, um2, bkm2, st2);
    project(uq, gq, bq, bkq, 12.0, 3, 256.0 / 65536.0, um3, bkm3, st3);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc > 1234) begin failures++; $display("FAIL latency %0d", cyc); end
    if (n_steps != 0) n_proj++;
    if (clipped) n_clip++;
    if (backup_used) n_bk++;
    if (bkm != bkm2 || bkm != bkm3) begin
      n_skip++;       // too close to the feasibility tolerance to judge
      return;
    end
    checks++;
    if (backup_used !== bkm) begin failures++; $display("FAIL backup %0b exp %0b", backup_used, bkm); end
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (rabs(fx2r(u[k]) - um[k]) > 5e-3) begin
        failures++; $display("FAIL u[%0d] got %f exp %f", k, fx2r(u[k]), um[k]);
      end
    end
    if (exp_steps >= 0) begin
      checks++;
      if (int'(n_steps) != exp_steps) begin
        failures++; $display("FAIL steps %0d exp %0d", n_steps, exp_steps);
      end
    end
  endtask

  initial begin
    real uh[4], gr[4][4], br[4], bk[4], uf[4], d;
    for (int k = 0; k < 4; k++) begin
      u_hat[k] = '0; ubk[k] = '0; b[k] = '0;
      for (int j = 0; j < 4; j++) g[k][j] = '0;
    end
    repeat (3) @(negedge clk);
    rst = 0;
    // 1. Feasible: |u1 - u3| <= 1, |u2 - u4| <= 1 style rows, u inside.
    gr = '{'{-1.0, 0.0, 1.0, 0.0}, '{1.0, 0.0, -1.0, 0.0}, '{0.0, -1.0, 0.0, 1.0}, '{0.0, 1.0, 0.0, -1.0}};
    br = '{1.0, 1.0, 1.0, 1.0};
    uh = '{3.0, 3.2, 3.1, 2.9}; bk = '{3.0, 3.0, 3.0, 3.0};
    run(uh, gr, br, bk, 0);
    // 2. One violated row: u3 - u1 <= 1 broken.
    uh = '{2.0, 3.0, 4.0, 3.0};
    run(uh, gr, br, bk, 1);
    // 3. Zero rows (next-step angles do not depend on u): box only.
    gr = '{default: '{default: 0.0}};
    br = '{0.1, 0.1, 0.1, 0.1};
    uh = '{-1.0, 13.5, 5.0, 12.0};
    run(uh, gr, br, bk, 0);
    // 4. Contradictory: u1 <= -1 and u1 >= 0.
    gr = '{'{1.0, 0.0, 0.0, 0.0}, '{0.0, 0.0, 0.0, 0.0}, '{0.0, 0.0, 0.0, 0.0}, '{0.0, 0.0, 0.0, 0.0}};
    br = '{-1.0, 0.0, 0.0, 0.0};
    uh = '{2.0, 2.0, 2.0, 2.0};
    run(uh, gr, br, bk, -1);
    checks++;
    if (!backup_used || u[0] != r2fx(3.0)) begin failures++; $display("FAIL backup case"); end
    // 5. Random half-spaces around a feasible point.
    for (int n = 0; n < 300; n++) begin
      for (int k = 0; k < 4; k++) begin uf[k] = urand_r(1.0, 11.0); bk[k] = uf[k]; end
      for (int j = 0; j < 4; j++) begin
        d = 0.0;
        for (int k = 0; k < 4; k++) begin gr[j][k] = urand_r(-0.5, 0.5); d += gr[j][k] * uf[k]; end
        br[j] = d + urand_r(0.0, 1.0);
      end
      for (int k = 0; k < 4; k++) uh[k] = uf[k] + urand_r(-4.0, 4.0);
      run(uh, gr, br, bk, -1);
    end
    $display("projections %0d, clips %0d, backups %0d, skipped %0d", n_proj, n_clip, n_bk, n_skip);
    checks++;
    if (n_proj == 0 || n_clip == 0 || n_bk == 0) begin failures++; $display("FAIL a mechanism never occurred"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
