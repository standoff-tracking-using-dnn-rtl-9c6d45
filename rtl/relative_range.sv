// relative_range: horizontal range between the UAV and the target,
// r(k) = sqrt((x_q - x_o)^2 + (y_q - y_o)^2).
//
// The squared range is formed at full width (Q32.16, 48 bits, saturated) from
// the x/y components of the UAV position xi(k) and the target position p_o(k)
// on the start cycle, and passed to one fx_sqrt. The range feeds the integral
// module. In the published block diagram this block sits outside the FPGA
// region, but the IP core only receives the UAV state and the target state,
// so the range is computed inside the core here.
//
// Interface: pulse start while busy is low; done pulses with r valid (Q16.16,
// held until the next start). Latency: 34 cycles.
module relative_range
  import smpc_pkg::*;
(
  input  logic clk,
  input  logic rst,
  input  logic start,
  input  fx_t  xq,
  input  fx_t  yq,
  input  fx_t  xo,
  input  fx_t  yo,
  output logic busy,
  output logic done,
  output fx_t  r
);
  fx_wide_t dx, dy, r2;
  logic [47:0] rad;
  logic [31:0] root;
  assign dx  = fx_wide_t'(xq) - fx_wide_t'(xo);
  assign dy  = fx_wide_t'(yq) - fx_wide_t'(yo);
  assign r2  = fxw_mul(dx, dx) + fxw_mul(dy, dy);
  assign rad = (r2 > 64'sh0000_FFFF_FFFF_FFFF) ? 48'hFFFF_FFFF_FFFF : r2[47:0];

  logic [47:0] rad_q;
  logic        go;
  always_ff @(posedge clk) begin
    if (rst) begin
      rad_q <= '0;
      go    <= 1'b0;
    end else begin
      go <= start && !busy;
      if (start && !busy) rad_q <= rad;
    end
  end

  logic sq_busy;
  fx_sqrt u_sqrt (
    .clk(clk), .rst(rst), .start(go), .radicand(rad_q),
    .busy(sq_busy), .done(done), .root(root)
  );
  assign busy = go | sq_busy;
  assign r    = (root[31]) ? FX_MAX : fx_t'(root);
endmodule
