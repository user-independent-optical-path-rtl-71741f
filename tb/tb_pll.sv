// tb_pll: checks the PLL model's clock periods, the phase relation between
// the word clock and the bit clock, and the lock behaviour.
`timescale 1ps/100fs
module tb_pll;
  logic ref_clk = 1'b0, rst = 1'b1;
  logic fclk, pclk, locked;
  int checks = 0, failures = 0;

  pll dut (.ref_clk, .rst, .fclk, .pclk, .locked);

  always #5000 ref_clk = ~ref_clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  realtime tf0, tf1, tp0, tp1;
  initial begin
    repeat (3) @(posedge ref_clk);
    check(!locked, "not locked in reset");
    @(negedge ref_clk) rst = 1'b0;
    repeat (15) @(posedge ref_clk);
    #1;
    check(!locked, "not locked before 16 edges");
    @(posedge ref_clk); #1;
    check(locked, "locked after 16 edges");
    @(posedge fclk); tf0 = $realtime; @(posedge fclk); tf1 = $realtime;
    check(tf1 - tf0 == 625.0, "fclk period 625 ps");
    @(posedge pclk); tp0 = $realtime; @(posedge pclk); tp1 = $realtime;
    check(tp1 - tp0 == 10000.0, "pclk period 10 ns");
    repeat (4) begin
      @(posedge pclk);
      check(fclk == 1'b0, "pclk rises while fclk low");
      #100 check(fclk == 1'b0, "fclk still low shortly after pclk edge");
    end
    rst = 1'b1; #1;
    check(!locked, "lock lost on reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
