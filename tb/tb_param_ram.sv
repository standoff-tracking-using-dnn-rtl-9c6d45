// tb_param_ram: writes random words to random addresses of the parameter RAM
// at its full default depth, reads them back through the read port (one cycle
// latency) and compares with a scoreboard; also checks that an address past
// the end reads zero.
module tb_param_ram;
  import smpc_pkg::*;
  localparam int unsigned DEPTH = 12404;
  localparam int unsigned AW = $clog2(DEPTH);
  logic clk = 0;
  logic we;
  logic [AW-1:0] waddr, raddr;
  fx_t wdata, rdata;
  fx_t model [DEPTH];
  bit  written [DEPTH];
  int checks = 0, failures = 0;

  param_ram dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .raddr(raddr), .rdata(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int i = 0; i < int'(DEPTH); i++) written[i] = 0;
    // Sequential fill of the whole memory.
    for (int i = 0; i < int'(DEPTH); i++) begin
      @(negedge clk); we = 1; waddr = AW'(i); wdata = $urandom;
      model[i] = wdata; written[i] = 1;
    end
    // Random overwrites.
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk); we = 1; waddr = AW'($urandom % DEPTH); wdata = $urandom;
      model[waddr] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 3000; i++) begin
      int a;
      a = (i < 4) ? int'(DEPTH) - 1 - i : int'($urandom % DEPTH);
      @(negedge clk); raddr = AW'(a);
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("FAIL addr %0d: got %h exp %h", a, rdata, model[a]);
      end
    end
    @(negedge clk); raddr = AW'(DEPTH + 5);
    @(negedge clk);
    checks++;
    if (rdata !== '0) begin failures++; $display("FAIL out-of-range read"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
