// tb_relative_range: checks the UAV-target horizontal range against the
// double-precision value for random positions within +-100 m (within 2 LSB),
// and the 34-cycle latency.
module tb_relative_range;
  import tb_ref_pkg::*;
  import smpc_pkg::*;
  logic clk = 0, rst = 1, start = 0;
  fx_t xq, yq, xo, yo, r;
  logic busy, done;
  int checks = 0, failures = 0;

  relative_range dut (.clk(clk), .rst(rst), .start(start), .xq(xq), .yq(yq),
                      .xo(xo), .yo(yo), .busy(busy), .done(done), .r(r));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input real a, input real b, input real c, input real d);
    int cyc;
    real expv, dx, dy;
    @(negedge clk);
    xq = r2fx(a); yq = r2fx(b); xo = r2fx(c); yo = r2fx(d); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    dx = fx2r(xq) - fx2r(xo); dy = fx2r(yq) - fx2r(yo);
    expv = $sqrt(dx * dx + dy * dy);
    checks++;
    if (rabs(fx2r(r) - expv) > 2.0 / 65536.0) begin
      failures++;
      $display("FAIL range: got %f exp %f", fx2r(r), expv);
    end
    checks++;
    if (cyc != 34) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    xq = '0; yq = '0; xo = '0; yo = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    run(5.0, -5.0, 0.0, 0.0);
    run(2.0, 0.0, 0.0, 0.0);
    run(0.0, 0.0, 0.0, 0.0);
    for (int i = 0; i < 200; i++)
      run(urand_r(-100, 100), urand_r(-100, 100), urand_r(-100, 100), urand_r(-100, 100));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
