// dnn_engine: evaluates the fully connected network u_hat = f_NN(s, theta_*).
//
// The network has N_IN inputs, N_HID hidden layers of N_H neurons and N_OUT
// outputs; every fully connected layer, the output layer included, is
// followed by a leaky ReLU of slope 0.01. Defaults: 18 inputs (the 12 UAV
// states, then the reference position and velocity x_ref(0|k)), 2 hidden
// layers of 100 neurons, 4 outputs (rotor inputs).
//
// One multiply-accumulate unit computes the layers neuron by neuron. For each
// neuron it reads the bias and then the fan-in weights from the parameter RAM,
// one word per clock, multiplies each weight with the matching activation from
// a ping-pong activation buffer, accumulates at Q32.32 and, after the last
// product, rounds to Q16.16, applies the leaky ReLU and writes the result to
// the other buffer. Parameter memory layout: layer after layer, and inside a
// layer neuron after neuron, one bias followed by its fan-in weights.
//
// Interface: s is sampled on the start pulse (start while busy is low); done
// pulses when u_hat is valid, held until the next start. Parameters are loaded
// through pw_en/pw_addr/pw_data while the engine is idle. Latency:
// sum over layers of fan_out * (fan_in + 4) + 1 cycles, 13017 cycles at the
// defaults. The layer sizes and activation are published; the single MAC, the
// memory layout and the number format are this design's choices.
module dnn_engine
  import smpc_pkg::*;
#(
  parameter int unsigned N_IN  = 18,
  parameter int unsigned N_H   = 100,
  parameter int unsigned N_HID = 2,
  parameter int unsigned N_OUT = 4,
  parameter int unsigned DEPTH = dnn_layer_words(N_IN, N_H)
                               + (N_HID - 1) * dnn_layer_words(N_H, N_H)
                               + dnn_layer_words(N_H, N_OUT),
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  fx_t           s     [N_IN],
  output logic          busy,
  output logic          done,
  output fx_t           u_hat [N_OUT],
  input  logic          pw_en,
  input  logic [AW-1:0] pw_addr,
  input  fx_t           pw_data
);
  localparam int unsigned MAXW   = (N_IN > N_H) ? N_IN : N_H;
  localparam int unsigned NLAYER = N_HID + 1;
  localparam int unsigned JW     = $clog2(MAXW + 2);
  localparam int unsigned LW     = $clog2(NLAYER + 1);
  localparam int unsigned OW     = (N_OUT > 1) ? $clog2(N_OUT) : 1;

  typedef enum logic [2:0] {S_IDLE, S_NEURON, S_MAC, S_DRAIN, S_WB} state_t;
  state_t state;

  function automatic int unsigned fan_in_of(input int unsigned l);
    return (l == 0) ? N_IN : N_H;
  endfunction
  function automatic int unsigned fan_out_of(input int unsigned l);
    return (l == NLAYER - 1) ? N_OUT : N_H;
  endfunction

  fx_t act [2][MAXW];
  logic           cur;        // buffer holding the layer's inputs
  logic [LW-1:0]  layer;
  logic [JW-1:0]  nidx;       // neuron within layer
  logic [JW-1:0]  j;          // 0 = bias, 1..fan_in = weights
  logic [AW-1:0]  base;       // address of the current neuron's bias
  logic           p_valid;
  logic [JW-1:0]  p_j;
  fx_wide_t       acc;

  logic [AW-1:0] raddr;
  fx_t           rdata;
  param_ram #(.DEPTH(DEPTH), .AW(AW)) u_ram (
    .clk(clk), .we(pw_en && (state == S_IDLE)), .waddr(pw_addr), .wdata(pw_data),
    .raddr(raddr), .rdata(rdata)
  );

  logic [JW-1:0] fin, fout;
  assign fin  = JW'(fan_in_of(32'(layer)));
  assign fout = JW'(fan_out_of(32'(layer)));
  assign raddr = base + AW'(j);

  assign busy = (state != S_IDLE);

  fx_t neuron_out;
  assign neuron_out = fx_lrelu(fx_sat(acc >>> FX_FRAC));

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= S_IDLE;
      done    <= 1'b0;
      cur     <= 1'b0;
      layer   <= '0;
      nidx    <= '0;
      j       <= '0;
      base    <= '0;
      p_valid <= 1'b0;
      p_j     <= '0;
      acc     <= '0;
      for (int b = 0; b < 2; b++)
        for (int k = 0; k < int'(MAXW); k++) act[b][k] <= '0;
      for (int k = 0; k < int'(N_OUT); k++) u_hat[k] <= '0;
    end else begin
      done <= 1'b0;
      // Accumulate the word read in the previous cycle.
      p_valid <= 1'b0;
      if (p_valid) begin
        if (p_j == '0) acc <= fx_wide_t'(rdata) <<< FX_FRAC;
        else           acc <= acc + fx_wide_t'(rdata) * fx_wide_t'(act[cur][p_j - 1'b1]);
      end
      case (state)
        S_IDLE: if (start) begin
          for (int k = 0; k < int'(N_IN); k++) act[0][k] <= s[k];
          cur   <= 1'b0;
          layer <= '0;
          nidx  <= '0;
          base  <= '0;
          state <= S_NEURON;
        end
        S_NEURON: begin
          j     <= '0;
          state <= S_MAC;
        end
        S_MAC: begin
          p_valid <= 1'b1;
          p_j     <= j;
          if (j == fin) state <= S_DRAIN;
          else          j     <= j + 1'b1;
        end
        S_DRAIN: state <= S_WB;
        S_WB: begin
          if (32'(layer) == NLAYER - 1) u_hat[OW'(nidx)] <= neuron_out;
          else                          act[~cur][nidx] <= neuron_out;
          base <= base + AW'(fin) + AW'(1);
          if (nidx == fout - 1'b1) begin
            nidx <= '0;
            if (32'(layer) == NLAYER - 1) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              layer <= layer + 1'b1;
              cur   <= ~cur;
              state <= S_NEURON;
            end
          end else begin
            nidx  <= nidx + 1'b1;
            state <= S_NEURON;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
