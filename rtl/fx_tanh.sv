// fx_tanh: hyperbolic tangent of a Q16.16 value, used by the trajectory
// planner for the bounded climb command v_z * tanh(z_d - z).
//
// tanh|x| = (1 - e) / (1 + e) with e = exp(-2|x|) = 2^(-y), y = 2|x| log2(e).
// y is split into an integer part n and a 16-bit fraction f; 2^(-f) is built
// in Q2.30 as the product of the constants 2^(-2^(-i)) selected by the set
// bits of f (one multiply per clock, 16 clocks), then shifted right by n. The
// quotient comes from an fx_div instance and the sign of x is restored at the
// end. For |x| >= 8 the result is +-1, which is tanh to within one LSB.
//
// Interface: pulse start while busy is low; done pulses with y valid, held
// until the next start. Latency: 54 cycles (2 for |x| >= 8). How tanh is
// evaluated is this design's choice; the planner only names the function.
// Lint notes unused bits of the wide products (only the Q2.30 window and the
// fraction bits are kept) and the divider's busy and overflow flags: the
// state machine waits for done, and |1 - e| < 1 + e cannot overflow.
module fx_tanh
  import smpc_pkg::*;
(
  input  logic clk,
  input  logic rst,
  input  logic start,
  input  fx_t  x,
  output logic busy,
  output logic done,
  output fx_t  y
);
  typedef enum logic [2:0] {S_IDLE, S_EXP, S_SHIFT, S_DIV, S_WAIT, S_FIN} state_t;
  state_t      state;
  logic        neg;
  logic [15:0] frac;
  logic [15:0] ipart;
  logic [31:0] e30;      // Q2.30
  logic [4:0]  idx;      // 1..16
  logic        sat1;

  fx_t      ax;
  fx_wide_t ylog;
  assign ax   = x[FX_W-1] ? -x : x;
  assign ylog = (fx_wide_t'(ax) * fx_wide_t'(FX_LOG2E) * 64'sd2) >>> FX_FRAC;

  logic     div_start, div_busy, div_done, div_ovf;
  fx_t      div_q;
  fx_wide_t div_num, div_den;
  fx_t      e16;
  assign e16     = fx_t'({16'd0, e30[31:14]});
  assign div_num = fx_wide_t'(FX_ONE) - fx_wide_t'(e16);
  assign div_den = fx_wide_t'(FX_ONE) + fx_wide_t'(e16);

  fx_div u_div (
    .clk(clk), .rst(rst), .start(div_start), .num(div_num), .den(div_den),
    .busy(div_busy), .done(div_done), .q(div_q), .ovf(div_ovf)
  );

  logic [63:0] prod;
  assign prod = 64'(e30) * 64'(exp2_frac_const(32'(idx)));

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      neg       <= 1'b0;
      frac      <= '0;
      ipart     <= '0;
      e30       <= '0;
      idx       <= '0;
      sat1      <= 1'b0;
      div_start <= 1'b0;
      done      <= 1'b0;
      y         <= '0;
    end else begin
      done      <= 1'b0;
      div_start <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          neg   <= x[FX_W-1];
          sat1  <= (ax >= 32'sd524288);           // |x| >= 8
          frac  <= ylog[15:0];
          ipart <= ylog[31:16];
          e30   <= 32'h4000_0000;
          idx   <= 5'd1;
          state <= (ax >= 32'sd524288) ? S_FIN : S_EXP;
        end
        S_EXP: begin
          if (frac[16 - 32'(idx)]) e30 <= prod[61:30];
          if (idx == 5'd16) state <= S_SHIFT;
          idx <= idx + 5'd1;
        end
        S_SHIFT: begin
          e30   <= (ipart > 16'd31) ? 32'd0 : (e30 >> ipart);
          state <= S_DIV;
        end
        S_DIV: begin
          div_start <= 1'b1;
          state     <= S_WAIT;
        end
        S_WAIT: if (div_done) state <= S_FIN;
        S_FIN: begin
          if (sat1) y <= neg ? -FX_ONE : FX_ONE;
          else      y <= neg ? -div_q : div_q;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
