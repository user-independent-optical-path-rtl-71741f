// tb_delay_control: requests random fine delays and decodes the serial
// configuration stream in the testbench. Each load must send 7 bits with
// cfg_ena high (setting 1 = min(f,15) in the upper 4 bits, setting 2 = the
// rest in the lower 3), then one cfg_update; requests above 22 are clamped.
`timescale 1ps/100fs
module tb_delay_control;
  logic clk = 1'b0, rst = 1'b1;
  logic [4:0] fine_steps = '0;
  logic cfg_ena, cfg_data, cfg_update, busy;
  int checks = 0, failures = 0;

  delay_control dut (.clk, .rst, .fine_steps, .cfg_ena, .cfg_data, .cfg_update, .busy);
  always #5000 clk = ~clk;

  logic [6:0] got;
  int nbits, ncyc;
  task automatic load(int f);
    int ef, e1, e2;
    ef = (f > 22) ? 22 : f;
    e1 = (ef > 15) ? 15 : ef;
    e2 = ef - e1;
    @(negedge clk) fine_steps = 5'(f);
    got = '0; nbits = 0; ncyc = 0;
    @(negedge clk);
    while (!cfg_update && ncyc < 30) begin
      if (cfg_ena) begin got = {got[5:0], cfg_data}; nbits++; end
      checks++;
      if (!busy) begin failures++; $display("FAIL busy low during load"); end
      ncyc++;
      @(negedge clk);
    end
    checks += 3;
    if (nbits != 7) begin failures++; $display("FAIL %0d bits", nbits); end
    if (got != {4'(e1), 3'(e2)}) begin
      failures++; $display("FAIL f=%0d got %b exp %0d+%0d", f, got, e1, e2);
    end
    if (ncyc != 7) begin failures++; $display("FAIL load took %0d cycles", ncyc); end
    @(negedge clk); @(negedge clk);
    checks++;
    if (busy || cfg_ena || cfg_update) begin failures++; $display("FAIL not idle after load"); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    repeat (5) @(negedge clk);
    checks++;
    if (busy || cfg_ena) begin failures++; $display("FAIL load at request 0"); end
    load(1); load(15); load(16); load(22); load(31); load(0); load(7);
    repeat (30) load($urandom_range(0, 31));
    // unchanged request: no new load
    repeat (10) begin
      @(negedge clk);
      checks++;
      if (busy || cfg_ena || cfg_update) begin failures++; $display("FAIL spurious load"); end
    end
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
