// tb_io_config: shifts random settings in, MSB first, and checks that the
// outputs keep their old value until update and then show the new one, and
// that bits with ena low are ignored.
`timescale 1ps/100fs
module tb_io_config;
  logic clk = 1'b0, rst = 1'b1, ena = 1'b0, datain = 1'b0, update = 1'b0;
  logic [3:0] setting1;
  logic [2:0] setting2;
  int checks = 0, failures = 0;

  io_config dut (.clk, .rst, .ena, .datain, .update, .setting1, .setting2);
  always #5000 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  logic [6:0] v, prev;
  initial begin
    repeat (2) @(negedge clk);
    rst = 1'b0;
    @(negedge clk);
    check(setting1 == 0 && setting2 == 0, "reset values");
    prev = '0;
    repeat (40) begin
      v = 7'($urandom);
      for (int i = 6; i >= 0; i--) begin
        ena = 1'b1; datain = v[i];
        @(negedge clk);
        // a cycle with ena low and garbage data must not shift
        ena = 1'b0; datain = 1'($urandom);
        @(negedge clk);
      end
      check({setting1, setting2} == prev, "held until update");
      update = 1'b1; @(negedge clk); update = 1'b0;
      check(setting1 == v[6:3] && setting2 == v[2:0], "value after update");
      prev = v;
    end
    rst = 1'b1; @(negedge clk); rst = 1'b0;
    check(setting1 == 0 && setting2 == 0, "reset clears");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
