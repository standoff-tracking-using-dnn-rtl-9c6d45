// standoff_mpc_core: standoff-tracking controller core. Once per sampling
// period it turns the UAV state x(k), the target state [p_o(k); v_o(k)] and the
// commands (r_d, v_d, z_d) into the four rotor inputs u(k).
//
// One call runs five stages in sequence:
//   1. relative_range   r(k), horizontal UAV-target range
//   2. integral_module  r_hat_d(k) = r_d - c1 sigma(k) (bypassed by im_enable=0)
//   3. lgv_planner      reference trajectory x_ref(0..N_P | k) from the LGV
//                       field with r_hat_d as the range command
//   4. dnn_engine       u_hat(k) = f_NN(col(x(k), p_ref(0|k), v_ref(0|k)))
//   5. projection       u(k), u_hat projected onto the feasible polytope
// The half-space rows G = C B_k and bounds b = c - C A_k x(k) of the
// projection depend on the quadrotor model's linearisation, whose constants
// are not part of this design; they are inputs, together with a feasible
// backup point.
//
// Control follows the block-level start/done handshake of the published core:
// ap_start starts a call when ap_idle is high, all inputs are sampled on that
// cycle, ap_done and ap_ready are high together for one cycle once out is
// valid, so a master that holds ap_start until ap_ready starts one call only;
// out holds until the next call ends. The names of the data ports follow the
// published core (TP1..TP6 = tp[0..5], rd, ud = v_d, xk1..xk12 = xk[0..11],
// out1..out4 = out[0..3]); ap_done, zd and the ports for the projection, the
// parameter load, the trajectory read-out and the status are additions of this
// design. Latency at the defaults: 15998 cycles from ap_start to ap_done
// (80 us at 200 MHz; 105 more when the backup point is used), against the
// published 0.126 ms for the whole core. The integrator state sigma of the
// integral module is kept internal and is not read here.
module standoff_mpc_core
  import smpc_pkg::*;
#(
  parameter int unsigned N_P   = 20,
  parameter int unsigned N_H   = 100,
  parameter int unsigned N_HID = 2,
  parameter int unsigned NH    = 4,
  parameter int unsigned ITER  = 3,
  parameter int unsigned N_IN  = N_STATE + 6,
  parameter int unsigned DEPTH = dnn_layer_words(N_IN, N_H)
                               + (N_HID - 1) * dnn_layer_words(N_H, N_H)
                               + dnn_layer_words(N_H, N_INPUT),
  parameter int unsigned AW    = $clog2(DEPTH),
  parameter int unsigned TW    = $clog2(N_P + 1)
) (
  input  logic          ap_clk,
  input  logic          ap_rst,
  input  logic          ap_start,
  output logic          ap_done,
  output logic          ap_idle,
  output logic          ap_ready,
  // Target state [p_o; v_o] (TP1..TP6) and commands.
  input  fx_t           tp   [6],
  input  fx_t           rd,
  input  fx_t           ud,
  input  fx_t           zd,
  // UAV state col(xi, eta, xi_dot, eta_dot) (xk1..xk12).
  input  fx_t           xk   [N_STATE],
  // Rotor inputs u(k) (out1..out4).
  output fx_t           out  [N_INPUT],
  // Integral module control.
  input  logic          im_enable,
  input  logic          im_clear,
  // Feasible set of the projection.
  input  fx_t           hs_g     [NH][N_INPUT],
  input  fx_t           hs_b     [NH],
  input  fx_t           u_backup [N_INPUT],
  // Network parameter load (while idle).
  input  logic          pw_en,
  input  logic [AW-1:0] pw_addr,
  input  fx_t           pw_data,
  // Planned trajectory read-out and status of the last call.
  input  logic [TW-1:0] traj_idx,
  output ref_point_t    traj_out,
  output fx_t           r_k,
  output fx_t           rd_hat,
  output logic          im_sat,
  output logic [7:0]    proj_steps,
  output logic          proj_clipped,
  output logic          proj_backup
);
  typedef enum logic [3:0] {
    C_IDLE, C_RANGE, C_RANGE_W, C_IM, C_PLAN, C_PLAN_W,
    C_DNN, C_DNN_W, C_PROJ, C_PROJ_W, C_DONE
  } cstate_t;
  cstate_t state;

  // Inputs sampled at ap_start.
  fx_t tp_q [6];
  fx_t xk_q [N_STATE];
  fx_t rd_q, ud_q, zd_q;
  fx_t g_q  [NH][N_INPUT];
  fx_t b_q  [NH];
  fx_t bk_q [N_INPUT];

  fx_t xi [3], po [3], vo [3];
  always_comb begin
    for (int k = 0; k < 3; k++) begin
      xi[k] = xk_q[k];
      po[k] = tp_q[k];
      vo[k] = tp_q[3 + k];
    end
  end

  // Stage handshakes.
  logic rr_start, rr_busy, rr_done;
  logic im_update;
  logic pl_start, pl_busy, pl_done;
  logic nn_start, nn_busy, nn_done;
  logic pj_start, pj_busy, pj_done;

  relative_range u_range (
    .clk(ap_clk), .rst(ap_rst), .start(rr_start),
    .xq(xi[0]), .yq(xi[1]), .xo(po[0]), .yo(po[1]),
    .busy(rr_busy), .done(rr_done), .r(r_k)
  );

  fx_t sigma;
  integral_module u_im (
    .clk(ap_clk), .rst(ap_rst), .enable(im_enable), .clear(im_clear),
    .update(im_update), .r(r_k), .r_d(rd_q),
    .r_hat_d(rd_hat), .sigma(sigma), .sat_hit(im_sat)
  );

  ref_point_t x_ref0;
  lgv_planner #(.N_P(N_P)) u_plan (
    .clk(ap_clk), .rst(ap_rst), .start(pl_start),
    .xi(xi), .po(po), .vo(vo), .r_d(rd_hat), .v_d(ud_q), .z_d(zd_q),
    .busy(pl_busy), .done(pl_done),
    .traj_idx(traj_idx), .traj_out(traj_out), .x_ref0(x_ref0)
  );

  fx_t s_vec [N_IN];
  always_comb begin
    for (int k = 0; k < int'(N_IN); k++) s_vec[k] = '0;
    for (int k = 0; k < int'(N_STATE); k++) s_vec[k] = xk_q[k];
    s_vec[N_STATE + 0] = x_ref0.pos_x;
    s_vec[N_STATE + 1] = x_ref0.pos_y;
    s_vec[N_STATE + 2] = x_ref0.pos_z;
    s_vec[N_STATE + 3] = x_ref0.vx;
    s_vec[N_STATE + 4] = x_ref0.vy;
    s_vec[N_STATE + 5] = x_ref0.vz;
  end

  fx_t u_hat [N_INPUT];
  dnn_engine #(.N_IN(N_IN), .N_H(N_H), .N_HID(N_HID), .N_OUT(N_INPUT),
               .DEPTH(DEPTH), .AW(AW)) u_dnn (
    .clk(ap_clk), .rst(ap_rst), .start(nn_start), .s(s_vec),
    .busy(nn_busy), .done(nn_done), .u_hat(u_hat),
    .pw_en(pw_en && (state == C_IDLE)), .pw_addr(pw_addr), .pw_data(pw_data)
  );

  fx_t u_proj [N_INPUT];
  projection #(.N_U(N_INPUT), .NH(NH), .ITER(ITER)) u_proj_i (
    .clk(ap_clk), .rst(ap_rst), .start(pj_start),
    .u_hat(u_hat), .g(g_q), .b(b_q), .u_backup(bk_q),
    .busy(pj_busy), .done(pj_done), .u(u_proj),
    .n_steps(proj_steps), .clipped(proj_clipped), .backup_used(proj_backup)
  );

  assign ap_idle  = (state == C_IDLE);
  assign ap_done  = (state == C_DONE);
  assign ap_ready = (state == C_DONE);

  always_ff @(posedge ap_clk) begin
    if (ap_rst) begin
      state     <= C_IDLE;
      rr_start  <= 1'b0;
      im_update <= 1'b0;
      pl_start  <= 1'b0;
      nn_start  <= 1'b0;
      pj_start  <= 1'b0;
      rd_q <= '0; ud_q <= '0; zd_q <= '0;
      for (int k = 0; k < 6; k++) tp_q[k] <= '0;
      for (int k = 0; k < int'(N_STATE); k++) xk_q[k] <= '0;
      for (int k = 0; k < int'(N_INPUT); k++) begin
        out[k] <= '0; bk_q[k] <= '0;
      end
      for (int h = 0; h < int'(NH); h++) begin
        b_q[h] <= '0;
        for (int k = 0; k < int'(N_INPUT); k++) g_q[h][k] <= '0;
      end
    end else begin
      rr_start  <= 1'b0;
      im_update <= 1'b0;
      pl_start  <= 1'b0;
      nn_start  <= 1'b0;
      pj_start  <= 1'b0;
      case (state)
        C_IDLE: if (ap_start) begin
          for (int k = 0; k < 6; k++) tp_q[k] <= tp[k];
          for (int k = 0; k < int'(N_STATE); k++) xk_q[k] <= xk[k];
          for (int k = 0; k < int'(N_INPUT); k++) bk_q[k] <= u_backup[k];
          for (int h = 0; h < int'(NH); h++) begin
            b_q[h] <= hs_b[h];
            for (int k = 0; k < int'(N_INPUT); k++) g_q[h][k] <= hs_g[h][k];
          end
          rd_q  <= rd;
          ud_q  <= ud;
          zd_q  <= zd;
          state <= C_RANGE;
        end
        C_RANGE:   begin rr_start <= 1'b1; state <= C_RANGE_W; end
        C_RANGE_W: if (rr_done) begin im_update <= 1'b1; state <= C_IM; end
        C_IM:      state <= C_PLAN;                // r_hat_d settles
        C_PLAN:    begin pl_start <= 1'b1; state <= C_PLAN_W; end
        C_PLAN_W:  if (pl_done) state <= C_DNN;
        C_DNN:     begin nn_start <= 1'b1; state <= C_DNN_W; end
        C_DNN_W:   if (nn_done) state <= C_PROJ;
        C_PROJ:    begin pj_start <= 1'b1; state <= C_PROJ_W; end
        C_PROJ_W:  if (pj_done) begin
          for (int k = 0; k < int'(N_INPUT); k++) out[k] <= u_proj[k];
          state <= C_DONE;
        end
        C_DONE:    state <= C_IDLE;
        default: state <= C_IDLE;
      endcase
    end
  end

  // A new call is only accepted while idle; a stage start never hits a busy
  // stage.
  assert property (@(posedge ap_clk) disable iff (ap_rst) (ap_start && ap_idle) |=> !ap_idle);
  assert property (@(posedge ap_clk) disable iff (ap_rst) pl_start |-> !pl_busy);
  assert property (@(posedge ap_clk) disable iff (ap_rst) nn_start |-> !nn_busy);
  assert property (@(posedge ap_clk) disable iff (ap_rst) pj_start |-> !pj_busy);
  assert property (@(posedge ap_clk) disable iff (ap_rst) rr_start |-> !rr_busy);
endmodule
