// tb_delay_chain: loads settings through the configuration port and
// measures the delay of pulses from din to dout, expected (s1 + s2) * 50 ps.
`timescale 1ps/100fs
module tb_delay_chain;
  logic clk = 1'b0, rst = 1'b1, din = 1'b0;
  logic cfg_ena = 1'b0, cfg_data = 1'b0, cfg_update = 1'b0;
  logic dout;
  int checks = 0, failures = 0;

  delay_chain dut (.clk, .rst, .din, .cfg_ena, .cfg_data, .cfg_update, .dout);
  always #5000 clk = ~clk;

  task automatic cfg(int s1, int s2);
    logic [6:0] v = {4'(s1), 3'(s2)};
    for (int i = 6; i >= 0; i--) begin
      @(negedge clk) cfg_ena = 1'b1; cfg_data = v[i];
    end
    @(negedge clk) cfg_ena = 1'b0; cfg_update = 1'b1;
    @(negedge clk) cfg_update = 1'b0;
  endtask

  int s1, s2;
  realtime tr, tf, t0;
  initial begin
    repeat (2) @(negedge clk);
    rst = 1'b0;
    for (int k = 0; k < 60; k++) begin
      s1 = (k < 16) ? k : $urandom_range(0, 15);
      s2 = (k < 16) ? k % 8 : $urandom_range(0, 7);
      cfg(s1, s2);
      #2000;
      din = 1'b1; t0 = $realtime;
      @(posedge dout) tr = $realtime;
      #1875 din = 1'b0;
      @(negedge dout) tf = $realtime;
      checks += 2;
      if (tr - t0 != real'((s1 + s2) * 50)) begin
        failures++; $display("FAIL rise delay %0t for %0d+%0d", tr - t0, s1, s2);
      end
      if (tf - tr != real'(1875 + (s1 + s2) * 50)) begin
        failures++; $display("FAIL fall %0t", tf - tr);
      end
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
