// tb_lgv_planner: runs the planner at its default horizon (N_P = 20) for the
// published stationary-target starts, moving targets and random states, in the
// counter-clockwise and the clockwise field, and compares every planned point
// (position and velocity) with a double-precision model of the LGV planning
// algorithm (tau = 0.1 s, beta = 3, v_z = 1). Also checks that every reference
// speed is bounded by sqrt(v_d^2 + v_z^2) + |v_o| and that a call takes fewer
// than 3200 cycles.
module tb_lgv_planner;
  import tb_ref_pkg::*;
  import smpc_pkg::*;
  localparam int NP = 20;
  logic clk = 0, rst = 1, start = 0;
  fx_t xi [3], po [3], vo [3];
  fx_t r_d, v_d, z_d;
  logic busy0, done0, busy1, done1;
  logic [$clog2(NP+1)-1:0] idx;
  ref_point_t t0, t1, x00, x01;
  int checks = 0, failures = 0;

  lgv_planner dut_ccw (.clk(clk), .rst(rst), .start(start), .xi(xi), .po(po), .vo(vo),
    .r_d(r_d), .v_d(v_d), .z_d(z_d), .busy(busy0), .done(done0),
    .traj_idx(idx), .traj_out(t0), .x_ref0(x00));
  lgv_planner #(.CLOCKWISE(1'b1)) dut_cw (.clk(clk), .rst(rst), .start(start), .xi(xi),
    .po(po), .vo(vo), .r_d(r_d), .v_d(v_d), .z_d(z_d), .busy(busy1), .done(done1),
    .traj_idx(idx), .traj_out(t1), .x_ref0(x01));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(input ref_point_t p, input real m[6], input int i, input bit cw,
                         input real vbound);
    real got[6], err;
    got = '{fx2r(p.pos_x), fx2r(p.pos_y), fx2r(p.pos_z), fx2r(p.vx), fx2r(p.vy), fx2r(p.vz)};
    err = 0.0;
    for (int k = 0; k < 6; k++) if (rabs(got[k] - m[k]) > err) err = rabs(got[k] - m[k]);
    checks++;
    if (err > 2e-3) begin
      failures++;
      $display("FAIL %s point %0d: got %f %f %f %f %f %f exp %f %f %f %f %f %f", cw ? "cw" : "ccw", i,
               got[0], got[1], got[2], got[3], got[4], got[5], m[0], m[1], m[2], m[3], m[4], m[5]);
    end
    checks++;
    if ($sqrt(got[3] * got[3] + got[4] * got[4] + got[5] * got[5]) > vbound + 1e-3) begin
      failures++;
      $display("FAIL speed bound at point %0d", i);
    end
  endtask

  task automatic run(input real pxi[3], input real ppo[3], input real pvo[3],
                     input real rd, input real vd, input real zd);
    real m0[64][6], m1[64][6], xq[3], oq[3], vq[3], vb;
    int cyc;
    for (int k = 0; k < 3; k++) begin
      xi[k] = r2fx(pxi[k]); po[k] = r2fx(ppo[k]); vo[k] = r2fx(pvo[k]);
      xq[k] = fx2r(xi[k]); oq[k] = fx2r(po[k]); vq[k] = fx2r(vo[k]);
    end
    r_d = r2fx(rd); v_d = r2fx(vd); z_d = r2fx(zd);
    plan_lgv(xq, oq, vq, fx2r(r_d), fx2r(v_d), fx2r(z_d), 1.0, 0.1, 1'b0, NP, m0);
    plan_lgv(xq, oq, vq, fx2r(r_d), fx2r(v_d), fx2r(z_d), 1.0, 0.1, 1'b1, NP, m1);
    vb = $sqrt(vd * vd + 1.0) + $sqrt(vq[0] * vq[0] + vq[1] * vq[1] + vq[2] * vq[2]);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!(done0 && done1)) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc >= 3200) begin failures++; $display("FAIL latency %0d", cyc); end
    for (int i = 0; i <= NP; i++) begin
      idx = ($clog2(NP+1))'(i);
      #1;
      compare(t0, m0[i], i, 1'b0, vb);
      compare(t1, m1[i], i, 1'b1, vb);
    end
    checks++;
    if (x00 != dut_ccw.traj[0] || x01 != dut_cw.traj[0]) begin
      failures++; $display("FAIL x_ref0 port");
    end
  endtask

  initial begin
    real a[3], b[3], c[3];
    idx = '0;
    for (int k = 0; k < 3; k++) begin xi[k] = '0; po[k] = '0; vo[k] = '0; end
    r_d = '0; v_d = '0; z_d = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    // Stationary target at the origin, published start positions.
    b = '{0.0, 0.0, 0.0}; c = '{0.0, 0.0, 0.0};
    a = '{5.0, 5.0, 0.0};   run(a, b, c, 2.0, 1.0, 5.0);
    a = '{-5.0, 5.0, 0.0};  run(a, b, c, 2.0, 1.0, 5.0);
    a = '{-5.0, -5.0, 0.0}; run(a, b, c, 2.0, 1.0, 5.0);
    a = '{5.0, -5.0, 0.0};  run(a, b, c, 2.0, 1.0, 5.0);
    // Inside the circle and on it.
    a = '{0.5, 0.2, 4.0};   run(a, b, c, 2.0, 1.0, 5.0);
    a = '{2.0, 0.0, 5.0};   run(a, b, c, 2.0, 1.0, 5.0);
    // Moving targets and random states.
    for (int n = 0; n < 20; n++) begin
      for (int k = 0; k < 3; k++) begin
        b[k] = urand_r(-20.0, 20.0);
        a[k] = b[k] + urand_r(-8.0, 8.0);
        c[k] = urand_r(-0.3, 0.3);
      end
      run(a, b, c, urand_r(1.5, 2.5), urand_r(0.5, 1.5), urand_r(3.0, 7.0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
