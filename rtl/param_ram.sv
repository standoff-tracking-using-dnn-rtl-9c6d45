// param_ram: on-chip memory for the trained network parameters theta_*.
//
// A simple dual-port RAM: one synchronous write port through which the host
// loads the weights and biases once, and one synchronous read port used by
// the network engine (read data one cycle after the address). Words are
// Q16.16. The layout (per layer, per neuron: bias then fan-in weights) is set
// by dnn_engine. The published core keeps the trained parameters on chip
// (block RAM); loading them through a write port is this design's choice,
// since the trained values themselves are not available.
module param_ram
  import smpc_pkg::*;
#(
  parameter int unsigned DEPTH = 12404,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  fx_t           wdata,
  input  logic [AW-1:0] raddr,
  output fx_t           rdata
);
  fx_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
    rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : '0;
  end
endmodule
