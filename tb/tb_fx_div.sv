// tb_fx_div: checks fx_div against double-precision division for signed
// random operands (Q48.16 / Q48.16 -> Q16.16 within 1 LSB, truncation towards
// zero), saturation on overflow and on division by zero, and the 33-cycle
// latency of a normal division.
module tb_fx_div;
  import tb_ref_pkg::*;
  import smpc_pkg::*;
  logic clk = 0, rst = 1, start = 0;
  fx_wide_t num, den;
  logic busy, done, ovf;
  fx_t q;
  int checks = 0, failures = 0;

  fx_div dut (.clk(clk), .rst(rst), .start(start), .num(num), .den(den),
              .busy(busy), .done(done), .q(q), .ovf(ovf));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input fx_wide_t n, input fx_wide_t d);
    int cyc;
    real expv, got;
    bit exp_ovf;
    @(negedge clk); num = n; den = d; start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    got = $itor(q) / 65536.0;
    if (d == 0) begin
      exp_ovf = 1;
      expv = 0.0;
    end else begin
      expv = $itor(n) / $itor(d);
      exp_ovf = (rabs(expv) >= 32768.0);
    end
    checks++;
    if (ovf !== exp_ovf) begin
      failures++;
      $display("FAIL ovf %0d/%0d: got %0b", n, d, ovf);
    end else if (exp_ovf) begin
      checks++;
      if (q != 32'sh7FFF_FFFF && q != -32'sh7FFF_FFFF) begin
        failures++; $display("FAIL saturation value %0d", q);
      end
    end else begin
      checks++;
      if (rabs(got - expv) > 1.01 / 65536.0) begin
        failures++;
        $display("FAIL %0d/%0d: got %f exp %f", n, d, got, expv);
      end
      checks++;
      if (cyc != 33) begin failures++; $display("FAIL latency %0d", cyc); end
    end
  endtask

  initial begin
    num = '0; den = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    run(64'sd65536, 64'sd131072);         // 0.5
    run(-64'sd65536, 64'sd196608);        // -1/3
    run(64'sd655360, -64'sd65536);        // -10
    run(64'sd65536, 64'sd0);              // divide by zero
    run(64'sh0000_7FFF_0000_0000, 64'sd65536); // overflow
    run(64'sd1000 * 64'sd65536, 64'sd2457 * 64'sd65536);
    for (int i = 0; i < 300; i++) begin
      fx_wide_t n, d;
      n = fx_wide_t'($signed($urandom)) <<< ($urandom % 12);
      d = fx_wide_t'($signed($urandom)) >>> ($urandom % 20);
      run(n, d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
