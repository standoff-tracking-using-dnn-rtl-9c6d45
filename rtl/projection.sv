// projection: makes the network output feasible by alternating projections
// onto the polytope R(x(k)) = { u | G u <= b, 0 <= u <= u_bar }.
//
// Row j of G is C_j B_k and b_j = c - C_j A_k x(k): the pitch/roll limits
// |phi|, |theta| <= c of the next state, linearised at x(k). Both come in as
// inputs. One pass visits the half-spaces in order; for a violated one
// (g_j.u > b_j) the closed-form projection
//     u <- u + (b_j - g_j.u) / ||g_j||^2 * g_j
// is applied (one division), a half-space whose row is all zero is skipped
// because u cannot change it. The pass ends with clipping every element to the
// box [0, u_bar]. After ITER passes (3, as published) the result is checked
// against every half-space with tolerance TOL; if it is still infeasible the
// backup point u_backup, a feasible point supplied from outside, is output.
//
// Interface: u_hat, G, b and u_backup are sampled on the start pulse (start
// while busy is low); done pulses with u valid, held until the next start.
// n_steps counts the half-space corrections of the call, clipped reports that
// the box clipped an element, backup_used that the backup point was taken.
// Latency: ITER * (NH * (2 or 36) + 1) + 2 cycles, at most 443 cycles for
// NH = 4, within the published 6.17 us (1234 cycles at 200 MHz). The order of
// the projections, the tolerance and the zero-row rule are this design's
// choices. The divider's busy and overflow flags are left unread: the state
// machine waits for done, and an overflowing step is already saturated.
module projection
  import smpc_pkg::*;
#(
  parameter int unsigned N_U  = 4,
  parameter int unsigned NH   = 4,
  parameter int unsigned ITER = 3,
  parameter fx_t         UBAR = FX_UBAR,
  parameter fx_t         TOL  = 32'sd64
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       start,
  input  fx_t        u_hat    [N_U],
  input  fx_t        g        [NH][N_U],
  input  fx_t        b        [NH],
  input  fx_t        u_backup [N_U],
  output logic       busy,
  output logic       done,
  output fx_t        u        [N_U],
  output logic [7:0] n_steps,
  output logic       clipped,
  output logic       backup_used
);
  localparam int unsigned HW = (NH > 1) ? $clog2(NH) : 1;

  typedef enum logic [2:0] {S_IDLE, S_CHK, S_DIV, S_WAIT, S_BOX, S_FEAS} state_t;
  state_t state;

  fx_t g_q [NH][N_U];
  fx_t b_q [NH];
  fx_t bk_q [N_U];
  logic [HW-1:0] j;
  logic [3:0]    pass;

  // g_j . u and ||g_j||^2 of the current half-space.
  fx_wide_t dot_gu, dot_gg;
  always_comb begin
    dot_gu = '0;
    dot_gg = '0;
    for (int k = 0; k < int'(N_U); k++) begin
      dot_gu += fxw_mul(fx_wide_t'(g_q[j][k]), fx_wide_t'(u[k]));
      dot_gg += fxw_mul(fx_wide_t'(g_q[j][k]), fx_wide_t'(g_q[j][k]));
    end
  end

  // Feasibility of every half-space for the final check.
  logic feasible;
  always_comb begin
    feasible = 1'b1;
    for (int h = 0; h < int'(NH); h++) begin : chk
      fx_wide_t d;
      d = '0;
      for (int k = 0; k < int'(N_U); k++)
        d += fxw_mul(fx_wide_t'(g_q[h][k]), fx_wide_t'(u[k]));
      if (d > fx_wide_t'(b_q[h]) + fx_wide_t'(TOL)) feasible = 1'b0;
    end
  end

  logic     dv_start, dv_busy, dv_done, dv_ovf;
  fx_wide_t dv_num, dv_den;
  fx_t      dv_q;
  fx_div u_div (.clk(clk), .rst(rst), .start(dv_start), .num(dv_num), .den(dv_den),
                .busy(dv_busy), .done(dv_done), .q(dv_q), .ovf(dv_ovf));

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state       <= S_IDLE;
      done        <= 1'b0;
      j           <= '0;
      pass        <= '0;
      dv_start    <= 1'b0;
      dv_num      <= '0;
      dv_den      <= '0;
      n_steps     <= '0;
      clipped     <= 1'b0;
      backup_used <= 1'b0;
      for (int k = 0; k < int'(N_U); k++) begin
        u[k] <= '0; bk_q[k] <= '0;
      end
      for (int h = 0; h < int'(NH); h++) begin
        b_q[h] <= '0;
        for (int k = 0; k < int'(N_U); k++) g_q[h][k] <= '0;
      end
    end else begin
      done     <= 1'b0;
      dv_start <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          for (int k = 0; k < int'(N_U); k++) begin
            u[k]    <= u_hat[k];
            bk_q[k] <= u_backup[k];
          end
          for (int h = 0; h < int'(NH); h++) begin
            b_q[h] <= b[h];
            for (int k = 0; k < int'(N_U); k++) g_q[h][k] <= g[h][k];
          end
          j           <= '0;
          pass        <= '0;
          n_steps     <= '0;
          clipped     <= 1'b0;
          backup_used <= 1'b0;
          state       <= S_CHK;
        end
        S_CHK: begin
          if (dot_gu > fx_wide_t'(b_q[j]) && dot_gg != '0) begin
            dv_num <= fx_wide_t'(b_q[j]) - dot_gu;
            dv_den <= dot_gg;
            state  <= S_DIV;
          end else if (32'(j) == NH - 1) begin
            state <= S_BOX;
          end else begin
            j <= j + 1'b1;
          end
        end
        S_DIV: begin
          dv_start <= 1'b1;
          state    <= S_WAIT;
        end
        S_WAIT: if (dv_done) begin
          for (int k = 0; k < int'(N_U); k++)
            u[k] <= fx_sat(fx_wide_t'(u[k]) + fx_wide_t'(fx_mul(dv_q, g_q[j][k])));
          n_steps <= n_steps + 8'd1;
          if (32'(j) == NH - 1) state <= S_BOX;
          else begin
            j     <= j + 1'b1;
            state <= S_CHK;
          end
        end
        S_BOX: begin
          for (int k = 0; k < int'(N_U); k++) begin
            u[k] <= fx_clamp(u[k], '0, UBAR);
            if (u[k] < 0 || u[k] > UBAR) clipped <= 1'b1;
          end
          j <= '0;
          if (32'(pass) == ITER - 1) state <= S_FEAS;
          else begin
            pass  <= pass + 4'd1;
            state <= S_CHK;
          end
        end
        S_FEAS: begin
          if (!feasible) begin
            for (int k = 0; k < int'(N_U); k++) u[k] <= bk_q[k];
            backup_used <= 1'b1;
          end
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
