// lgv_planner: reference trajectory planner built on the Lyapunov guidance
// vector (LGV) field with exponent beta = 3.
//
// Starting from p_ref(-1|k) = xi(k) (UAV position) and p_o(-1|k) = p_o(k)
// (target position), each of the N_P + 1 steps i = -1 .. N_P-1 does
//     [x y z] = p_ref(i) - p_o(i),  r = sqrt(x^2 + y^2)
//     S       = sqrt(r^3 r_d^3)
//     v_L     = -v_d / (r (r^3 + r_d^3)) * [x (r^3 - r_d^3) + 2 s y S,
//                                           y (r^3 - r_d^3) - 2 s x S]
//     v_ref   = [v_L ; v_z tanh(z_d - z)] + v_o
//     p_ref(i+1) = p_ref(i) + tau v_ref,   p_o(i+1) = p_o(i) + tau v_o
// with s = +1 for the counter-clockwise field (default) and -1 for the
// clockwise one. Point i+1 is written to the trajectory buffer at index i+1,
// so index 0 holds x_ref(0|k), the point handed to the network.
//
// The steps run one after another on one shared square-root unit, one divider
// (the two components of v_L are divided separately so the small quotient
// keeps its resolution) and one tanh unit, which runs in parallel with the
// first square root. r_d is the command of the integral module.
//
// Interface: inputs are sampled on the start pulse (start while busy is low);
// done pulses when all N_P + 1 points are stored. traj_idx reads any point of
// the buffer combinationally; x_ref0 is point 0. Latency: about 140 cycles per
// point, 2920 cycles for N_P = 20. The algorithm and the constants
// (N_P = 20, tau = 0.1 s, beta = 3) follow the published planner; the
// sequencing and the number format are this design's choices. The busy
// outputs of the arithmetic units and the divider's overflow flag are left
// unread: each unit is started only from a state that waits for its done, and
// an overflowing quotient is already saturated.
module lgv_planner
  import smpc_pkg::*;
#(
  parameter int unsigned N_P       = 20,
  parameter fx_t         TAU       = FX_TAU,
  parameter fx_t         VZ        = FX_VZ,
  parameter bit          CLOCKWISE = 1'b0
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       start,
  input  fx_t        xi   [3],   // UAV position xi(k)
  input  fx_t        po   [3],   // target position p_o(k)
  input  fx_t        vo   [3],   // target velocity v_o(k)
  input  fx_t        r_d,        // range command (r_hat_d from the IM)
  input  fx_t        v_d,        // desired speed
  input  fx_t        z_d,        // desired relative height
  output logic       busy,
  output logic       done,
  input  logic [$clog2(N_P+1)-1:0] traj_idx,
  output ref_point_t traj_out,
  output ref_point_t x_ref0
);
  localparam int unsigned IW = $clog2(N_P+1);

  typedef enum logic [3:0] {
    S_IDLE, S_REL, S_R_WAIT, S_S_WAIT, S_DX_WAIT, S_DY_WAIT, S_T_WAIT, S_UPD
  } state_t;
  state_t state;

  ref_point_t traj [N_P+1];
  assign traj_out = traj[traj_idx];
  assign x_ref0   = traj[0];

  // Latched command and target state.
  fx_t      vo_q [3];
  fx_t      vd_q, zd_q;
  fx_wide_t rd3;
  // Running positions.
  fx_t      pr [3];
  fx_t      pt [3];
  logic [IW-1:0] it;
  // Per-step intermediates.
  fx_wide_t rx, ry;
  fx_t      r_q;
  fx_wide_t r3;
  fx_t      vlx;
  fx_t      th;
  logic     th_ok;

  // Arithmetic units.
  logic        sq_start, sq_busy, sq_done;
  logic [47:0] sq_rad;
  logic [31:0] sq_root;
  fx_sqrt u_sqrt (.clk(clk), .rst(rst), .start(sq_start), .radicand(sq_rad),
                  .busy(sq_busy), .done(sq_done), .root(sq_root));

  logic     dv_start, dv_busy, dv_done, dv_ovf;
  fx_wide_t dv_num, dv_den;
  fx_t      dv_q;
  fx_div u_div (.clk(clk), .rst(rst), .start(dv_start), .num(dv_num), .den(dv_den),
                .busy(dv_busy), .done(dv_done), .q(dv_q), .ovf(dv_ovf));

  logic th_start, th_busy, th_done;
  fx_t  th_x, th_y;
  fx_tanh u_tanh (.clk(clk), .rst(rst), .start(th_start), .x(th_x),
                  .busy(th_busy), .done(th_done), .y(th_y));

  function automatic logic [47:0] to_rad(input fx_wide_t v);
    if (v < 0)                              return '0;
    else if (v > 64'sh0000_FFFF_FFFF_FFFF)  return 48'hFFFF_FFFF_FFFF;
    else                                    return v[47:0];
  endfunction

  // Combinational terms of the current step.
  fx_wide_t dxw, dyw, dzw, r2w;
  fx_wide_t r_w, r3_w, s_w, diff, twoS, numx, numy, den;
  assign dxw  = fx_wide_t'(pr[0]) - fx_wide_t'(pt[0]);
  assign dyw  = fx_wide_t'(pr[1]) - fx_wide_t'(pt[1]);
  assign dzw  = fx_wide_t'(pr[2]) - fx_wide_t'(pt[2]);
  assign r2w  = fxw_mul(dxw, dxw) + fxw_mul(dyw, dyw);
  assign r_w  = fx_wide_t'(fx_t'(sq_root[31] ? FX_MAX : fx_t'(sq_root)));
  assign r3_w = fxw_mul(fxw_mul(r_w, r_w), r_w);
  assign s_w  = fx_wide_t'({32'd0, sq_root});
  assign diff = r3 - rd3;
  assign twoS = s_w <<< 1;
  assign numx = -fxw_mul(fx_wide_t'(vd_q),
                 fxw_mul(rx, diff) + (CLOCKWISE ? -fxw_mul(ry, twoS) : fxw_mul(ry, twoS)));
  assign numy = -fxw_mul(fx_wide_t'(vd_q),
                 fxw_mul(ry, diff) - (CLOCKWISE ? -fxw_mul(rx, twoS) : fxw_mul(rx, twoS)));
  assign den  = fxw_mul(fx_wide_t'(r_q), r3 + rd3);

  fx_wide_t rd_w;
  assign rd_w = fx_wide_t'(r_d);

  // Operand registers of the divider (held while it runs).
  fx_wide_t numy_q;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      done     <= 1'b0;
      sq_start <= 1'b0;
      dv_start <= 1'b0;
      th_start <= 1'b0;
      sq_rad   <= '0;
      dv_num   <= '0;
      dv_den   <= '0;
      th_x     <= '0;
      it       <= '0;
      vd_q     <= '0;
      zd_q     <= '0;
      rd3      <= '0;
      rx <= '0; ry <= '0;
      r_q      <= '0;
      r3       <= '0;
      vlx      <= '0;
      th       <= '0;
      th_ok    <= 1'b0;
      numy_q   <= '0;
      for (int k = 0; k < 3; k++) begin
        vo_q[k] <= '0; pr[k] <= '0; pt[k] <= '0;
      end
      for (int k = 0; k <= int'(N_P); k++) traj[k] <= '0;
    end else begin
      done     <= 1'b0;
      sq_start <= 1'b0;
      dv_start <= 1'b0;
      th_start <= 1'b0;
      if (th_done) begin
        th    <= th_y;
        th_ok <= 1'b1;
      end
      case (state)
        S_IDLE: if (start) begin
          for (int k = 0; k < 3; k++) begin
            pr[k]   <= xi[k];
            pt[k]   <= po[k];
            vo_q[k] <= vo[k];
          end
          vd_q  <= v_d;
          zd_q  <= z_d;
          rd3   <= fxw_mul(fxw_mul(rd_w, rd_w), rd_w);
          it    <= '0;
          state <= S_REL;
        end
        S_REL: begin
          rx       <= dxw;
          ry       <= dyw;
          sq_rad   <= to_rad(r2w);
          sq_start <= 1'b1;
          th_x     <= fx_sat(fx_wide_t'(zd_q) - dzw);
          th_start <= 1'b1;
          th_ok    <= 1'b0;
          state    <= S_R_WAIT;
        end
        S_R_WAIT: if (sq_done) begin
          r_q      <= fx_t'(r_w);
          r3       <= r3_w;
          sq_rad   <= to_rad(fxw_mul(r3_w, rd3));
          sq_start <= 1'b1;
          state    <= S_S_WAIT;
        end
        S_S_WAIT: if (sq_done) begin
          dv_num   <= numx;
          dv_den   <= den;
          numy_q   <= numy;
          dv_start <= 1'b1;
          state    <= S_DX_WAIT;
        end
        S_DX_WAIT: if (dv_done) begin
          vlx      <= dv_q;
          dv_num   <= numy_q;
          dv_start <= 1'b1;
          state    <= S_DY_WAIT;
        end
        S_DY_WAIT: if (dv_done) begin
          state <= S_T_WAIT;
        end
        S_T_WAIT: if (th_ok) begin
          state <= S_UPD;
        end
        S_UPD: begin : upd
          fx_t vr [3];
          vr[0] = fx_sat(fx_wide_t'(vlx)  + fx_wide_t'(vo_q[0]));
          vr[1] = fx_sat(fx_wide_t'(dv_q) + fx_wide_t'(vo_q[1]));
          vr[2] = fx_sat(fx_wide_t'(fx_mul(VZ, th)) + fx_wide_t'(vo_q[2]));
          for (int k = 0; k < 3; k++) begin
            pr[k] <= fx_sat(fx_wide_t'(pr[k]) + fx_wide_t'(fx_mul(TAU, vr[k])));
            pt[k] <= fx_sat(fx_wide_t'(pt[k]) + fx_wide_t'(fx_mul(TAU, vo_q[k])));
          end
          traj[it] <= '{pos_x: fx_sat(fx_wide_t'(pr[0]) + fx_wide_t'(fx_mul(TAU, vr[0]))),
                        pos_y: fx_sat(fx_wide_t'(pr[1]) + fx_wide_t'(fx_mul(TAU, vr[1]))),
                        pos_z: fx_sat(fx_wide_t'(pr[2]) + fx_wide_t'(fx_mul(TAU, vr[2]))),
                        vx: vr[0], vy: vr[1], vz: vr[2]};
          if (it == IW'(N_P)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            it    <= it + 1'b1;
            state <= S_REL;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
