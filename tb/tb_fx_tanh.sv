// tb_fx_tanh: checks fx_tanh against the double-precision tanh over
// [-10, 10] (within 4 LSB of Q16.16), and its latency (54 cycles, or 2 for
// |x| >= 8).
module tb_fx_tanh;
  import tb_ref_pkg::*;
  import smpc_pkg::*;
  logic clk = 0, rst = 1, start = 0;
  fx_t x, y;
  logic busy, done;
  int checks = 0, failures = 0;

  fx_tanh dut (.clk(clk), .rst(rst), .start(start), .x(x), .busy(busy), .done(done), .y(y));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input real xv);
    int cyc;
    real got, expv, xq;
    @(negedge clk); x = r2fx(xv); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    xq   = fx2r(x);
    expv = $tanh(xq);
    got  = fx2r(y);
    checks++;
    if (rabs(got - expv) > 4.0 / 65536.0) begin
      failures++;
      $display("FAIL tanh(%f): got %f exp %f", xq, got, expv);
    end
    checks++;
    if (cyc != ((rabs(xq) >= 8.0) ? 2 : 54)) begin
      failures++;
      $display("FAIL latency %0d for %f", cyc, xq);
    end
  endtask

  initial begin
    x = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    run(0.0); run(0.5); run(-0.5); run(1.0); run(3.0); run(-7.9); run(9.0); run(-12.0);
    for (int i = 0; i < 300; i++) run(urand_r(-10.0, 10.0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
