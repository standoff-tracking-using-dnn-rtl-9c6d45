// tb_fx_sqrt: checks fx_sqrt against the double-precision square root for
// fixed and random radicands (Q32.16 in, Q16.16 out, within 1 LSB) and checks
// the 33-cycle start-to-done latency.
module tb_fx_sqrt;
  import tb_ref_pkg::*;
  logic clk = 0, rst = 1, start = 0;
  logic [47:0] rad;
  logic busy, done;
  logic [31:0] root;
  int checks = 0, failures = 0;

  fx_sqrt dut (.clk(clk), .rst(rst), .start(start), .radicand(rad),
               .busy(busy), .done(done), .root(root));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [47:0] v);
    int cyc;
    real expv, got;
    @(negedge clk); rad = v; start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    expv = $sqrt($itor(v) / 65536.0);
    got  = $itor(root) / 65536.0;
    checks++;
    if (rabs(got - expv) > 1.5 / 65536.0) begin
      failures++;
      $display("FAIL sqrt(%0d/65536): got %f exp %f", v, got, expv);
    end
    checks++;
    if (cyc != 33) begin
      failures++;
      $display("FAIL latency %0d", cyc);
    end
  endtask

  initial begin
    rad = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    run(48'd0);
    run(48'd65536);            // 1.0
    run(48'd262144);           // 4.0
    run(48'd131072);           // 2.0
    run(48'hFFFF_FFFF_FFFF);   // largest
    run(48'd1);
    for (int i = 0; i < 200; i++) run({$urandom, $urandom} >> ($urandom % 40));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
