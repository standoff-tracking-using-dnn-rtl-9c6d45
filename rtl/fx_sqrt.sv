// fx_sqrt: sequential square root of a non-negative fixed-point value.
//
// The radicand is an unsigned Q32.16 value (48 bits, so squared ranges and
// products such as r^3 r_d^3 do not overflow) and the root is an unsigned
// Q16.16 value. Root = isqrt(radicand * 2^16), found by the digit-by-digit
// (non-restoring, radix 2) integer square root, one root bit per clock.
//
// Interface: pulse start for one cycle while busy is low; done pulses once the
// 32 root bits are found and root stays valid until the next start. Latency:
// 33 cycles from start to done. The algorithm is this design's choice; the
// guidance law only requires the square root itself. The two top bits of the
// partial remainder only hold the sign of the trial subtraction and are never
// read as data (lint reports them unused).
module fx_sqrt
  import smpc_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  logic [47:0] radicand,
  output logic        busy,
  output logic        done,
  output logic [31:0] root
);
  logic [63:0] op;      // remaining radicand bits, consumed two at a time
  logic [34:0] rem;     // partial remainder
  logic [31:0] res;
  logic [5:0]  cnt;
  logic        run;

  logic [34:0] trial;
  logic [34:0] rem_sh;
  assign rem_sh = {rem[32:0], op[63:62]};
  assign trial  = {1'b0, res, 2'b01};

  assign busy = run;

  always_ff @(posedge clk) begin
    if (rst) begin
      op   <= '0;
      rem  <= '0;
      res  <= '0;
      cnt  <= '0;
      run  <= 1'b0;
      done <= 1'b0;
      root <= '0;
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (start) begin
          op  <= {radicand, 16'd0};
          rem <= '0;
          res <= '0;
          cnt <= 6'd32;
          run <= 1'b1;
        end
      end else begin
        op <= {op[61:0], 2'b00};
        if (rem_sh >= trial) begin
          rem <= rem_sh - trial;
          res <= {res[30:0], 1'b1};
        end else begin
          rem <= rem_sh;
          res <= {res[30:0], 1'b0};
        end
        cnt <= cnt - 6'd1;
        if (cnt == 6'd1) begin
          run  <= 1'b0;
          done <= 1'b1;
          root <= (rem_sh >= trial) ? {res[30:0], 1'b1} : {res[30:0], 1'b0};
        end
      end
    end
  end
endmodule
