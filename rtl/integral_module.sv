// integral_module: refines the range command against the steady-state error
// of the network controller,
//     sigma(k)   = sigma(k-1) + sat((r(k) - r_d) / c2)
//     r_hat_d(k) = r_d - c1 * sigma(k).
//
// On each update pulse the saturated, scaled range error is added to the
// accumulator sigma and the new command r_hat_d is registered. sat() clamps to
// [-1, 1]. With enable low the accumulator is not updated and r_hat_d equals
// r_d (the controller without the integral module); clear zeroes sigma.
// sigma itself saturates at the Q16.16 range, which only matters in wind-up.
// Constants: c1 = 0.2 and 1/c2 = 5.5 (c1 = 1.1 c2) as published.
//
// Interface: r, r_d in Q16.16; update is a one-cycle strobe, r_hat_d and sigma
// are valid the next cycle. sat_hit reports that the error was clipped.
module integral_module
  import smpc_pkg::*;
#(
  parameter fx_t C1     = FX_C1,
  parameter fx_t INV_C2 = FX_INV_C2
) (
  input  logic clk,
  input  logic rst,
  input  logic enable,
  input  logic clear,
  input  logic update,
  input  fx_t  r,
  input  fx_t  r_d,
  output fx_t  r_hat_d,
  output fx_t  sigma,
  output logic sat_hit
);
  fx_wide_t e_scaled;
  fx_t      e_sat;
  fx_t      sigma_next;
  assign e_scaled   = ((fx_wide_t'(r) - fx_wide_t'(r_d)) * fx_wide_t'(INV_C2)) >>> FX_FRAC;
  assign e_sat      = fx_t'(e_scaled > 64'sd65536 ? 64'sd65536 :
                            e_scaled < -64'sd65536 ? -64'sd65536 : e_scaled);
  assign sigma_next = fx_sat(fx_wide_t'(sigma) + fx_wide_t'(e_sat));

  always_ff @(posedge clk) begin
    if (rst) begin
      sigma   <= '0;
      r_hat_d <= '0;
      sat_hit <= 1'b0;
    end else if (clear) begin
      sigma   <= '0;
      r_hat_d <= r_d;
      sat_hit <= 1'b0;
    end else if (update) begin
      if (enable) begin
        sigma   <= sigma_next;
        r_hat_d <= fx_sat(fx_wide_t'(r_d) - ((fx_wide_t'(C1) * fx_wide_t'(sigma_next)) >>> FX_FRAC));
        sat_hit <= (e_scaled > 64'sd65536) || (e_scaled < -64'sd65536);
      end else begin
        r_hat_d <= r_d;
        sat_hit <= 1'b0;
      end
    end
  end
endmodule
