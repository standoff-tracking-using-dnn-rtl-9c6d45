// fx_div: sequential signed fixed-point divider, q = num / den.
//
// The dividend and divisor are wide Q48.16 values and the quotient is Q16.16,
// so a quotient as small as 1/2^16 keeps full resolution even when the two
// operands are large (the guidance law divides numerators of a few thousand by
// denominators of a few thousand). The magnitudes are divided by restoring
// long division, one quotient bit per clock, and the sign is applied at the
// end. A quotient whose magnitude does not fit in 31 bits, and division by
// zero, saturate to the largest value of the right sign and raise ovf.
//
// Interface: pulse start for one cycle while busy is low; done pulses one
// cycle later than the last quotient bit, with q and ovf valid from then on
// until the next start. Latency: 33 cycles from start to done (2 for an
// overflow). The radix-2 restoring scheme is this design's choice.
module fx_div
  import smpc_pkg::*;
(
  input  logic     clk,
  input  logic     rst,
  input  logic     start,
  input  fx_wide_t num,
  input  fx_wide_t den,
  output logic     busy,
  output logic     done,
  output fx_t      q,
  output logic     ovf
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FIN} state_t;
  state_t       state;
  logic [95:0]  rem, dsr;
  logic [30:0]  quo;
  logic [4:0]   bitn;
  logic         neg;

  logic [63:0]  na, nd;
  assign na = num[63] ? 64'(-num) : 64'(num);
  assign nd = den[63] ? 64'(-den) : 64'(den);

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      done  <= 1'b0;
      q     <= '0;
      ovf   <= 1'b0;
      rem   <= '0;
      dsr   <= '0;
      quo   <= '0;
      bitn  <= '0;
      neg   <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          neg <= num[63] ^ den[63];
          rem <= {16'd0, na, 16'd0};
          dsr <= {1'b0, nd, 31'd0};
          quo <= '0;
          bitn <= 5'd30;
          if (nd == 64'd0 || ({16'd0, na, 16'd0} >= {1'b0, nd, 31'd0})) begin
            ovf   <= 1'b1;
            state <= S_FIN;
          end else begin
            ovf   <= 1'b0;
            state <= S_RUN;
          end
        end
        S_RUN: begin
          // compare with divisor << bitn
          if (rem >= (dsr >> (31 - bitn))) begin
            rem <= rem - (dsr >> (31 - bitn));
            quo[bitn] <= 1'b1;
          end
          if (bitn == 5'd0) state <= S_FIN;
          else              bitn  <= bitn - 5'd1;
        end
        S_FIN: begin
          if (ovf) q <= neg ? -FX_MAX : FX_MAX;
          else     q <= neg ? -fx_t'({1'b0, quo}) : fx_t'({1'b0, quo});
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
