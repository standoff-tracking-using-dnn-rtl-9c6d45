// tb_ref_pkg: floating-point reference models for the testbenches.
//
// Each function computes, in double precision and independently of the RTL's
// fixed-point scheduling, what a block should produce: the LGV planner, the
// integral module update, the network forward pass and the alternating
// projection. Conversions between Q16.16 and real are also here.
package tb_ref_pkg;

  function automatic real fx2r(input logic signed [31:0] v);
    return $itor(v) / 65536.0;
  endfunction

  function automatic logic signed [31:0] r2fx(input real v);
    real s;
    s = v * 65536.0;
    if (s > 2147483647.0)  return 32'sh7FFF_FFFF;
    if (s < -2147483648.0) return -32'sh7FFF_FFFF - 1;
    return $rtoi(s >= 0.0 ? s + 0.5 : s - 0.5);
  endfunction

  function automatic real rabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // Random real in [lo, hi).
  function automatic real urand_r(input real lo, input real hi);
    return lo + (hi - lo) * ($itor($urandom) / 4294967296.0);
  endfunction

  // LGV trajectory planning (beta = 3). traj[i] = {x,y,z,vx,vy,vz} of
  // x_ref(i|k), i = 0..np.
  function automatic void plan_lgv(input real xi[3], input real po[3], input real vo[3],
                                   input real rd, input real vd, input real zd,
                                   input real vz, input real tau, input bit cw,
                                   input int np, output real traj[64][6]);
    real pr[3], pt[3];
    real x, y, z, r, r3, rd3, s, g, vlx, vly, vr[3];
    for (int k = 0; k < 3; k++) begin pr[k] = xi[k]; pt[k] = po[k]; end
    for (int i = 0; i < 64; i++) for (int k = 0; k < 6; k++) traj[i][k] = 0.0;
    rd3 = rd * rd * rd;
    for (int i = 0; i <= np; i++) begin
      x = pr[0] - pt[0]; y = pr[1] - pt[1]; z = pr[2] - pt[2];
      r  = $sqrt(x * x + y * y);
      r3 = r * r * r;
      s  = $sqrt(r3 * rd3);
      g  = -vd / (r * (r3 + rd3));
      if (!cw) begin
        vlx = g * (x * (r3 - rd3) + 2.0 * y * s);
        vly = g * (y * (r3 - rd3) - 2.0 * x * s);
      end else begin
        vlx = g * (x * (r3 - rd3) - 2.0 * y * s);
        vly = g * (y * (r3 - rd3) + 2.0 * x * s);
      end
      vr[0] = vlx + vo[0];
      vr[1] = vly + vo[1];
      vr[2] = vz * $tanh(zd - z) + vo[2];
      for (int k = 0; k < 3; k++) begin
        pr[k] = pr[k] + tau * vr[k];
        pt[k] = pt[k] + tau * vo[k];
        traj[i][k]     = pr[k];
        traj[i][3 + k] = vr[k];
      end
    end
  endfunction

  function automatic real lrelu(input real v);
    return (v < 0.0) ? 0.01 * v : v;
  endfunction

  function automatic real sat1(input real v);
    if (v > 1.0)  return 1.0;
    if (v < -1.0) return -1.0;
    return v;
  endfunction

  // Alternating projection: ITER passes over the half-spaces, each pass ended
  // by clipping to [0, ubar]; backup point if still infeasible (tol).
  function automatic void project(input real uh[4], input real g[4][4], input real b[4],
                                  input real ubk[4], input real ubar, input int iter,
                                  input real tol, output real u[4], output bit used_bk,
                                  output int steps);
    real d, n2, t;
    bit  feas;
    for (int k = 0; k < 4; k++) u[k] = uh[k];
    steps = 0;
    for (int p = 0; p < iter; p++) begin
      for (int j = 0; j < 4; j++) begin
        d = 0.0; n2 = 0.0;
        for (int k = 0; k < 4; k++) begin d += g[j][k] * u[k]; n2 += g[j][k] * g[j][k]; end
        if (d > b[j] && n2 > 0.0) begin
          t = (b[j] - d) / n2;
          for (int k = 0; k < 4; k++) u[k] += t * g[j][k];
          steps++;
        end
      end
      for (int k = 0; k < 4; k++) begin
        if (u[k] < 0.0)  u[k] = 0.0;
        if (u[k] > ubar) u[k] = ubar;
      end
    end
    feas = 1'b1;
    for (int j = 0; j < 4; j++) begin
      d = 0.0;
      for (int k = 0; k < 4; k++) d += g[j][k] * u[k];
      if (d > b[j] + tol) feas = 1'b0;
    end
    used_bk = !feas;
    if (!feas) for (int k = 0; k < 4; k++) u[k] = ubk[k];
  endfunction

endpackage
