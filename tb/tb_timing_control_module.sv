// tb_timing_control_module: one user's laser trigger with the serializer
// output looped straight back into the delay chain. For many coarse/fine
// settings it checks the position of the trigger's rising edge within the
// laser period, expected 20312.5 ps (two word clocks of pipeline plus half a
// bit) + coarse * 625 ps + fine * 50 ps after the restart edge, the pulse
// width of 3 bits (1875 ps) and the repetition period.
`timescale 1ps/100fs
module tb_timing_control_module;
  logic ref_clk = 1'b0, prst = 1'b0;
  logic fclk, pclk, locked;
  logic rst = 1'b1, restart = 1'b0, enable = 1'b0;
  logic [15:0] period_words = 16'd10;
  logic [19:0] coarse_bits = '0;
  logic [4:0]  fine_steps = '0;
  logic ser_o, laser_o;
  int checks = 0, failures = 0;

  pll u_pll (.ref_clk, .rst(prst), .fclk, .pclk, .locked);
  timing_control_module dut (.pclk, .fclk, .rst, .restart, .enable, .period_words,
    .coarse_bits, .fine_steps, .ser_o, .ser_loop_i(ser_o), .laser_o);

  realtime t_restart, tr, tf, tr2;

  task automatic measure(int per, int c, int f);
    real pp, phase, expv;
    period_words = 16'(per); coarse_bits = 20'(c); fine_steps = 5'(f); enable = 1'b1;
    @(negedge pclk) restart = 1'b1;
    @(posedge pclk) t_restart = $realtime;
    @(negedge pclk) restart = 1'b0;
    repeat (12) @(posedge pclk);   // fine delay loaded by now
    @(posedge laser_o) tr = $realtime;
    @(negedge laser_o) tf = $realtime;
    @(posedge laser_o) tr2 = $realtime;
    pp = real'(per) * 10000.0;
    phase = (tr - t_restart) - pp * $floor((tr - t_restart) / pp);
    expv = 20312.5 + c * 625.0 + f * 50.0;
    expv = expv - pp * $floor(expv / pp);
    checks += 3;
    if (phase != expv) begin
      failures++; $display("FAIL per=%0d c=%0d f=%0d phase %f exp %f", per, c, f, phase, expv);
    end
    if (tf - tr != 1875.0) begin failures++; $display("FAIL width %f", tf - tr); end
    if (tr2 - tr != pp) begin failures++; $display("FAIL period %f", tr2 - tr); end
  endtask

  initial begin
    repeat (3) @(posedge pclk);
    @(negedge pclk) rst = 1'b0;
    measure(10, 0, 0);
    measure(10, 1, 0);
    measure(10, 0, 1);
    measure(10, 0, 22);
    measure(10, 100, 13);
    measure(40, 333, 7);     // 2.5 MHz laser rate
    for (int k = 0; k < 25; k++) begin
      automatic int per = $urandom_range(4, 20);
      measure(per, $urandom_range(0, per * 16 - 4), $urandom_range(0, 22));
    end
    // disabled: no trigger over two periods
    enable = 1'b0;
    repeat (3) @(posedge pclk);
    fork
      begin @(posedge laser_o); failures++; $display("FAIL pulse while disabled"); end
      repeat (30) @(posedge pclk);
    join_any
    disable fork;
    checks++;
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
