// tb_dynamic_delay: for every setting of a 15-step and a 7-step delay
// element, measures the delay of rising and falling edges and expects
// setting * 50 ps (settings above the length give the full length).
`timescale 1ps/100fs
module tb_dynamic_delay;
  logic din = 1'b0;
  logic [3:0] sel1 = '0;
  logic [2:0] sel2 = '0;
  logic d1, d2;
  int checks = 0, failures = 0;

  dynamic_delay #(.TAPS(15), .SEL_W(4), .STEP_PS(50)) dut1 (.din, .sel(sel1), .dout(d1));
  dynamic_delay #(.TAPS(7),  .SEL_W(3), .STEP_PS(50)) dut2 (.din, .sel(sel2), .dout(d2));

  // The output must still hold the old value 25 ps before the expected
  // delay and the new one 25 ps after it.
  task automatic edge_test(logic v, int s1, int s2);
    int lo1, lo2;
    #5000;
    din = v;
    lo1 = s1 * 50; lo2 = s2 * 50;
    for (int t = 0; t <= 1200; t += 25) begin
      if (t % 50 == 25) begin
        checks += 2;
        if (d1 !== ((t > lo1) ? v : !v)) begin
          failures++; $display("FAIL d1 sel=%0d t=%0d", s1, t);
        end
        if (d2 !== ((t > lo2) ? v : !v)) begin
          failures++; $display("FAIL d2 sel=%0d t=%0d", s2, t);
        end
      end
      #25;
    end
  endtask

  initial begin
    #3000;
    for (int s = 0; s < 16; s++) begin
      sel1 = 4'(s); sel2 = 3'(s);
      edge_test(1'b1, s, s % 8);
      edge_test(1'b0, s, s % 8);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
