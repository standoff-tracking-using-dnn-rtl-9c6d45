// tb_standoff_mpc_core: end-to-end test of the controller core at its default
// sizes (horizon 20, 18-100-100-4 network, 4 half-spaces, 3 projection
// passes).
//
// The testbench loads random network parameters through the load port, then
// issues a sequence of calls with the ap_start/ap_ready handshake (ap_start
// held until ap_ready). For every call it computes the expected rotor inputs
// in double precision, independently of the RTL: range, integral-module update,
// the first planned reference point, the network forward pass and the
// alternating projection. The UAV states are the published stationary-target
// starts and random states around a moving target.
//
// It checks out[0..3], r(k), r_hat_d(k), planned point 0 and the last planned
// point, that a call ends within 25200 cycles (0.126 ms at 200 MHz), and that
// each mechanism happened at least once: integral accumulation, sat() of the
// integral module, integral bypass, half-space correction, box clipping,
// backup point, parameter load, trajectory read-out, ap_start ignored while
// busy.
module tb_standoff_mpc_core;
  import tb_ref_pkg::*;
  import smpc_pkg::*;
  localparam int NP = 20, NIN = 18, NHID = 100, NOUT = 4;
  localparam int DEPTH = (NIN + 1) * NHID + (NHID + 1) * NHID + (NHID + 1) * NOUT;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0, rst = 1;
  logic ap_start, ap_done, ap_idle, ap_ready;
  fx_t tp [6], rd, ud, zd, xk [12], out [4];
  logic im_enable, im_clear;
  fx_t hs_g [4][4], hs_b [4], u_backup [4];
  logic pw_en;
  logic [AW-1:0] pw_addr;
  fx_t pw_data;
  logic [$clog2(NP+1)-1:0] traj_idx;
  ref_point_t traj_out;
  fx_t r_k, rd_hat;
  logic im_sat, proj_clipped, proj_backup;
  logic [7:0] proj_steps;

  standoff_mpc_core dut (
    .ap_clk(clk), .ap_rst(rst), .ap_start(ap_start), .ap_done(ap_done), .ap_idle(ap_idle),
    .ap_ready(ap_ready), .tp(tp), .rd(rd), .ud(ud), .zd(zd), .xk(xk), .out(out),
    .im_enable(im_enable), .im_clear(im_clear), .hs_g(hs_g), .hs_b(hs_b), .u_backup(u_backup),
    .pw_en(pw_en), .pw_addr(pw_addr), .pw_data(pw_data), .traj_idx(traj_idx),
    .traj_out(traj_out), .r_k(r_k), .rd_hat(rd_hat), .im_sat(im_sat),
    .proj_steps(proj_steps), .proj_clipped(proj_clipped), .proj_backup(proj_backup));

  always #2.5 clk = ~clk;   // 200 MHz

  int checks = 0, failures = 0;
  int m_im_acc = 0, m_im_sat = 0, m_im_off = 0, m_proj = 0, m_clip = 0, m_backup = 0;
  int m_load = 0, m_traj = 0, m_busy_start = 0, n_skip = 0;
  real w [DEPTH];
  real sigma_m;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void forward(input real s[NIN], output real y[NOUT]);
    real a[NHID], z[NHID];
    int base;
    base = 0;
    for (int n = 0; n < NHID; n++) begin
      real acc;
      acc = w[base];
      for (int j = 0; j < NIN; j++) acc += w[base + 1 + j] * s[j];
      a[n] = lrelu(acc);
      base += NIN + 1;
    end
    for (int n = 0; n < NHID; n++) begin
      real acc;
      acc = w[base];
      for (int j = 0; j < NHID; j++) acc += w[base + 1 + j] * a[j];
      z[n] = lrelu(acc);
      base += NHID + 1;
    end
    for (int n = 0; n < NOUT; n++) begin
      real acc;
      acc = w[base];
      for (int j = 0; j < NHID; j++) acc += w[base + 1 + j] * z[j];
      y[n] = lrelu(acc);
      base += NHID + 1;
    end
  endfunction

  task automatic check_close(input string what, input real got, input real expv, input real tol);
    checks++;
    if (rabs(got - expv) > tol) begin
      failures++;
      $display("FAIL %s: got %f exp %f", what, got, expv);
    end
  endtask

  // One controller call with UAV state xs, target state ts.
  task automatic call(input real xs[12], input real ts[6], input bit im_on);
    real xq[12], tq[6], xi[3], po[3], vo[3], r, e, rh, traj[64][6], s[NIN], y[NOUT];
    real gq[4][4], bq[4], bkq[4], um[4], um2[4], um3[4];
    bit  bk1, bk2, bk3;
    int  st, cyc;
    for (int k = 0; k < 12; k++) begin xk[k] = r2fx(xs[k]); xq[k] = fx2r(xk[k]); end
    for (int k = 0; k < 6; k++)  begin tp[k] = r2fx(ts[k]); tq[k] = fx2r(tp[k]); end
    for (int j = 0; j < 4; j++) begin
      bq[j] = fx2r(hs_b[j]); bkq[j] = fx2r(u_backup[j]);
      for (int k = 0; k < 4; k++) gq[j][k] = fx2r(hs_g[j][k]);
    end
    im_enable = im_on;
    // Reference model.
    for (int k = 0; k < 3; k++) begin xi[k] = xq[k]; po[k] = tq[k]; vo[k] = tq[3 + k]; end
    r = $sqrt((xi[0] - po[0]) ** 2 + (xi[1] - po[1]) ** 2);
    e = sat1((r - fx2r(rd)) / (0.2 / 1.1));
    if (im_on) begin
      sigma_m += e;
      rh = fx2r(rd) - 0.2 * sigma_m;
      m_im_acc++;
    end else begin
      rh = fx2r(rd);
      m_im_off++;
    end
    plan_lgv(xi, po, vo, rh, fx2r(ud), fx2r(zd), 1.0, 0.1, 1'b0, NP, traj);
    for (int k = 0; k < 12; k++) s[k] = xq[k];
    for (int k = 0; k < 6; k++) s[12 + k] = traj[0][k];
    forward(s, y);
    project(y, gq, bq, bkq, 12.0, 3, 64.0 / 65536.0, um, bk1, st);
    project(y, gq, bq, bkq, 12.0, 3, 16.0 / 65536.0, um2, bk2, st);
    project(y, gq, bq, bkq, 12.0, 3, 256.0 / 65536.0, um3, bk3, st);
    // Handshake: hold ap_start until ap_ready.
    @(negedge clk);
    checks++;
    if (!ap_idle) begin failures++; $display("FAIL core not idle before call"); end
    ap_start = 1;
    cyc = 0;
    do begin
      @(negedge clk); cyc++;
      if (cyc == 100) begin
        // Changing inputs while busy must not change this call.
        for (int k = 0; k < 12; k++) xk[k] = xk[k] + 32'sd32768;
        for (int k = 0; k < 6; k++)  tp[k] = tp[k] - 32'sd32768;
        m_busy_start++;
      end
    end while (!ap_ready);
    checks++;
    if (!ap_done) begin failures++; $display("FAIL ap_done not with ap_ready"); end
    ap_start = 0;
    checks++;
    if (cyc > 25200) begin failures++; $display("FAIL latency %0d cycles", cyc); end
    check_close("r(k)", fx2r(r_k), r, 1e-4);
    check_close("r_hat_d", fx2r(rd_hat), rh, 1e-3);
    // Planned points 0 and N_P through the read-out port.
    traj_idx = '0; #1;
    check_close("p_ref(0).x", fx2r(traj_out.pos_x), traj[0][0], 2e-3);
    check_close("v_ref(0).y", fx2r(traj_out.vy), traj[0][4], 2e-3);
    traj_idx = ($clog2(NP+1))'(NP); #1;
    check_close("p_ref(N_P).y", fx2r(traj_out.pos_y), traj[NP][1], 5e-3);
    check_close("v_ref(N_P).z", fx2r(traj_out.vz), traj[NP][5], 5e-3);
    m_traj++;
    if (im_sat) m_im_sat++;
    if (proj_steps != 0) m_proj++;
    if (proj_clipped)    m_clip++;
    if (proj_backup)     m_backup++;
    if (bk1 != bk2 || bk1 != bk3) begin
      n_skip++;
    end else begin
      checks++;
      if (proj_backup !== bk1) begin failures++; $display("FAIL backup %0b exp %0b", proj_backup, bk1); end
      for (int k = 0; k < 4; k++) check_close($sformatf("out%0d", k + 1), fx2r(out[k]), um[k], 1e-2);
    end
    $display("call: r=%f r_hat_d=%f u_hat=%f %f %f %f out=%f %f %f %f steps=%0d clip=%0b bk=%0b cycles=%0d",
             fx2r(r_k), fx2r(rd_hat), y[0], y[1], y[2], y[3],
             fx2r(out[0]), fx2r(out[1]), fx2r(out[2]), fx2r(out[3]),
             proj_steps, proj_clipped, proj_backup, cyc);
  endtask

  initial begin
    real xs[12], ts[6];
    ap_start = 0; im_enable = 1; im_clear = 0; pw_en = 0; pw_addr = '0; pw_data = '0;
    traj_idx = '0;
    for (int k = 0; k < 6; k++) tp[k] = '0;
    for (int k = 0; k < 12; k++) xk[k] = '0;
    rd = r2fx(2.0); ud = r2fx(1.0); zd = r2fx(5.0);
    // Half-spaces on the rotor differences (a stand-in for the linearised
    // pitch/roll rows) and a hover-like backup point.
    hs_g = '{'{-0.3, 0.0, 0.3, 0.0}, '{0.3, 0.0, -0.3, 0.0}, '{0.0, -0.3, 0.0, 0.3}, '{0.0, 0.3, 0.0, -0.3}};
    for (int j = 0; j < 4; j++) begin
      hs_b[j] = r2fx(0.25);
      u_backup[j] = r2fx(6.0);
      for (int k = 0; k < 4; k++) hs_g[j][k] = r2fx(fx2r(hs_g[j][k]));
    end
    sigma_m = 0.0;
    repeat (4) @(negedge clk);
    rst = 0;
    // Parameter load.
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      pw_en = 1; pw_addr = AW'(i);
      // Output-layer biases offset so that some rotor outputs land in the box.
      pw_data = r2fx((i >= DEPTH - NOUT * (NHID + 1) && ((i - (DEPTH - NOUT * (NHID + 1))) % (NHID + 1) == 0))
                     ? urand_r(-2.0, 14.0) : urand_r(-0.12, 0.12));
      w[i] = fx2r(pw_data);
    end
    @(negedge clk); pw_en = 0;
    m_load++;
    @(negedge clk); im_clear = 1; @(negedge clk); im_clear = 0;

    // Stationary target at the origin, published start positions.
    ts = '{0.0, 0.0, 0.0, 0.0, 0.0, 0.0};
    xs = '{5.0, -5.0, 0.0, 0.0, 0.0, -0.5236, 0.0, 0.0, 0.0, 0.0, 0.0, 0.0};
    call(xs, ts, 1'b1);
    xs = '{5.0, 5.0, 0.0, 0.0, 0.0, 0.0, 0.0, 0.0, 0.0, 0.0, 0.0, 0.0};
    call(xs, ts, 1'b1);
    xs = '{-5.0, 5.0, 0.0, 0.0, 0.0, -0.2618, 0.0, 0.0, 0.0, 0.0, 0.0, 0.0};
    call(xs, ts, 1'b1);
    xs = '{-5.0, -5.0, 0.0, 0.0, 0.0, 0.2618, 0.0, 0.0, 0.0, 0.0, 0.0, 0.0};
    call(xs, ts, 1'b1);
    // Near the circle: small errors, integral in its linear range.
    for (int n = 0; n < 4; n++) begin
      real ang;
      ang = urand_r(0.0, 6.28);
      xs = '{(2.0 + urand_r(-0.1, 0.1)) * $cos(ang), (2.0 + urand_r(-0.1, 0.1)) * $sin(ang),
             urand_r(4.8, 5.2), urand_r(-0.1, 0.1), urand_r(-0.1, 0.1), urand_r(-0.1, 0.1),
             urand_r(-1.0, 1.0), urand_r(-1.0, 1.0), urand_r(-0.2, 0.2),
             urand_r(-0.1, 0.1), urand_r(-0.1, 0.1), urand_r(-0.1, 0.1)};
      call(xs, ts, 1'b1);
    end
    // Moving target, integral bypassed then enabled again.
    for (int n = 0; n < 6; n++) begin
      ts = '{urand_r(-10, 10), urand_r(-10, 10), urand_r(-1, 1),
             urand_r(-0.3, 0.3), urand_r(-0.3, 0.3), urand_r(-0.1, 0.1)};
      xs = '{ts[0] + urand_r(-6, 6), ts[1] + urand_r(-6, 6), ts[2] + urand_r(0, 6),
             urand_r(-0.3, 0.3), urand_r(-0.3, 0.3), urand_r(-0.5, 0.5),
             urand_r(-1.5, 1.5), urand_r(-1.5, 1.5), urand_r(-0.5, 0.5),
             urand_r(-0.2, 0.2), urand_r(-0.2, 0.2), urand_r(-0.2, 0.2)};
      call(xs, ts, n >= 3 ? 1'b1 : 1'b0);
    end
    // Tight constraints so that the projection cannot satisfy them: backup.
    hs_g[0] = '{r2fx(1.0), 0, 0, 0};
    hs_b[0] = r2fx(-1.0);
    call(xs, ts, 1'b1);

    $display("mechanisms: im_acc=%0d im_sat=%0d im_off=%0d proj=%0d clip=%0d backup=%0d load=%0d traj=%0d busy_start=%0d skipped=%0d",
             m_im_acc, m_im_sat, m_im_off, m_proj, m_clip, m_backup, m_load, m_traj, m_busy_start, n_skip);
    if (m_im_acc == 0) begin failures++; $display("FAIL integral accumulation never happened"); end
    if (m_im_sat == 0) begin failures++; $display("FAIL integral saturation never happened"); end
    if (m_im_off == 0) begin failures++; $display("FAIL integral bypass never happened"); end
    if (m_proj == 0)   begin failures++; $display("FAIL half-space projection never happened"); end
    if (m_clip == 0)   begin failures++; $display("FAIL box clipping never happened"); end
    if (m_backup == 0) begin failures++; $display("FAIL backup point never used"); end
    if (m_load == 0 || m_traj == 0 || m_busy_start == 0) begin failures++; $display("FAIL load/readout"); end
    checks += 9;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
