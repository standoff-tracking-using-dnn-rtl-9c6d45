// tb_dnn_engine: loads random weights and biases into the network engine at
// its default size (18-100-100-4) and at a small size (5-7-7-7-3, three hidden
// layers), evaluates random inputs and compares every output with a
// double-precision forward pass over the same (quantised) parameters, with a
// leaky ReLU of slope 0.01 after every layer. Checks the cycle count against
// sum over layers of fan_out * (fan_in + 4) + 1, that negative outputs occur
// (the output activation is exercised) and that a write while busy is ignored.
module tb_dnn_engine;
  import tb_ref_pkg::*;
  import smpc_pkg::*;
  logic clk = 0, rst = 1;
  int checks = 0, failures = 0, n_neg = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- default size ----------------
  localparam int A_IN = 18, A_H = 100, A_HID = 2, A_OUT = 4;
  localparam int A_DEPTH = (A_IN + 1) * A_H + (A_HID - 1) * (A_H + 1) * A_H + (A_H + 1) * A_OUT;
  localparam int A_AW = $clog2(A_DEPTH);
  logic a_start, a_busy, a_done, a_we;
  logic [A_AW-1:0] a_addr;
  fx_t a_data, a_s [A_IN], a_u [A_OUT];
  dnn_engine dut_a (.clk(clk), .rst(rst), .start(a_start), .s(a_s), .busy(a_busy),
    .done(a_done), .u_hat(a_u), .pw_en(a_we), .pw_addr(a_addr), .pw_data(a_data));

  // ---------------- small size ----------------
  localparam int B_IN = 5, B_H = 7, B_HID = 3, B_OUT = 3;
  localparam int B_DEPTH = (B_IN + 1) * B_H + (B_HID - 1) * (B_H + 1) * B_H + (B_H + 1) * B_OUT;
  localparam int B_AW = $clog2(B_DEPTH);
  logic b_start, b_busy, b_done, b_we;
  logic [B_AW-1:0] b_addr;
  fx_t b_data, b_s [B_IN], b_u [B_OUT];
  dnn_engine #(.N_IN(B_IN), .N_H(B_H), .N_HID(B_HID), .N_OUT(B_OUT)) dut_b (
    .clk(clk), .rst(rst), .start(b_start), .s(b_s), .busy(b_busy),
    .done(b_done), .u_hat(b_u), .pw_en(b_we), .pw_addr(b_addr), .pw_data(b_data));

  real wa [A_DEPTH];
  real wb [B_DEPTH];

  // Forward pass over a flat parameter list (bias then weights per neuron).
  function automatic void forward(input real w[], input int nin, input int nh, input int nhid,
                                  input int nout, input real s[], output real y[]);
    real a[], z[];
    int base, fi, fo;
    a = new[nin];
    foreach (s[k]) a[k] = s[k];
    base = 0;
    for (int l = 0; l <= nhid; l++) begin
      fi = (l == 0) ? nin : nh;
      fo = (l == nhid) ? nout : nh;
      z = new[fo];
      for (int n = 0; n < fo; n++) begin
        real acc;
        acc = w[base];
        for (int j = 0; j < fi; j++) acc += w[base + 1 + j] * a[j];
        z[n] = lrelu(acc);
        base += fi + 1;
      end
      a = z;
    end
    y = a;
  endfunction

  task automatic load_a();
    for (int i = 0; i < A_DEPTH; i++) begin
      @(negedge clk); a_we = 1; a_addr = A_AW'(i);
      a_data = r2fx(urand_r(-0.15, 0.15));
      wa[i] = fx2r(a_data);
    end
    @(negedge clk); a_we = 0;
  endtask

  task automatic load_b();
    for (int i = 0; i < B_DEPTH; i++) begin
      @(negedge clk); b_we = 1; b_addr = B_AW'(i);
      b_data = r2fx(urand_r(-0.8, 0.8));
      wb[i] = fx2r(b_data);
    end
    @(negedge clk); b_we = 0;
  endtask

  task automatic run_a(input bit poke_busy);
    real s[], y[];
    int cyc, exp_cyc;
    s = new[A_IN];
    for (int k = 0; k < A_IN; k++) begin a_s[k] = r2fx(urand_r(-3.0, 3.0)); s[k] = fx2r(a_s[k]); end
    forward(wa, A_IN, A_H, A_HID, A_OUT, s, y);
    @(negedge clk); a_start = 1;
    @(negedge clk); a_start = 0;
    cyc = 1;
    while (!a_done) begin
      if (poke_busy && cyc == 50) begin a_we = 1; a_addr = '0; a_data = 32'sh0100_0000; end
      else a_we = 0;
      @(negedge clk); cyc++;
    end
    a_we = 0;
    exp_cyc = A_H * (A_IN + 4) + (A_HID - 1) * A_H * (A_H + 4) + A_OUT * (A_H + 4) + 1;
    checks++;
    if (cyc != exp_cyc) begin failures++; $display("FAIL default latency %0d exp %0d", cyc, exp_cyc); end
    for (int k = 0; k < A_OUT; k++) begin
      checks++;
      if (rabs(fx2r(a_u[k]) - y[k]) > 2e-3) begin
        failures++; $display("FAIL default out %0d: got %f exp %f", k, fx2r(a_u[k]), y[k]);
      end
      if (y[k] < 0.0) n_neg++;
    end
  endtask

  task automatic run_b();
    real s[], y[];
    int cyc, exp_cyc;
    s = new[B_IN];
    for (int k = 0; k < B_IN; k++) begin b_s[k] = r2fx(urand_r(-3.0, 3.0)); s[k] = fx2r(b_s[k]); end
    forward(wb, B_IN, B_H, B_HID, B_OUT, s, y);
    @(negedge clk); b_start = 1;
    @(negedge clk); b_start = 0;
    cyc = 1;
    while (!b_done) begin @(negedge clk); cyc++; end
    exp_cyc = B_H * (B_IN + 4) + (B_HID - 1) * B_H * (B_H + 4) + B_OUT * (B_H + 4) + 1;
    checks++;
    if (cyc != exp_cyc) begin failures++; $display("FAIL small latency %0d exp %0d", cyc, exp_cyc); end
    for (int k = 0; k < B_OUT; k++) begin
      checks++;
      if (rabs(fx2r(b_u[k]) - y[k]) > 2e-3) begin
        failures++; $display("FAIL small out %0d: got %f exp %f", k, fx2r(b_u[k]), y[k]);
      end
      if (y[k] < 0.0) n_neg++;
    end
  endtask

  initial begin
    a_start = 0; a_we = 0; a_addr = '0; a_data = '0;
    b_start = 0; b_we = 0; b_addr = '0; b_data = '0;
    for (int k = 0; k < A_IN; k++) a_s[k] = '0;
    for (int k = 0; k < B_IN; k++) b_s[k] = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    load_a();
    load_b();
    for (int n = 0; n < 6; n++) run_a(n == 2);
    for (int n = 0; n < 60; n++) run_b();
    checks++;
    if (n_neg == 0) begin failures++; $display("FAIL no negative output seen"); end
    $display("negative outputs seen: %0d", n_neg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
