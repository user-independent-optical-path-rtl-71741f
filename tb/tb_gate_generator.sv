// tb_gate_generator: four users sharing 10 MHz gates, as in the paper's field
// test: gates must come every 10 word clocks, the PM strobe
// (gate_phase - pm_phase) clocks before each gate, and the slots must run
// 0,1,2,3,0,.. (gate five serves user one again). Also checks restart and a
// change of the number of users.
`timescale 1ps/100fs
module tb_gate_generator;
  import qkd_pkg::*;
  logic clk = 1'b0, rst = 1'b1, restart = 1'b0;
  logic [PERIOD_W-1:0] gate_period = 10, gate_phase = 6, pm_phase = 2;
  logic [SLOT_W:0] num_slots = 4;
  logic gate_o, pm_fire_o;
  logic [SLOT_W-1:0] slot_o;
  int checks = 0, failures = 0;

  gate_generator dut (.clk, .rst, .restart, .gate_period, .gate_phase, .pm_phase,
                      .num_slots, .gate_o, .pm_fire_o, .slot_o);
  always #5000 clk = ~clk;

  int cyc = 0, last_gate = -1, last_pm = -1, exp_slot = 0, ngates = 0;
  bit first = 1;
  always @(negedge clk) if (!rst) begin
    cyc++;
    if (pm_fire_o) last_pm = cyc;
    if (gate_o) begin
      checks += 3;
      if (!first && cyc - last_gate != int'(gate_period)) begin
        failures++; $display("FAIL gate spacing %0d", cyc - last_gate);
      end
      if (cyc - last_pm != int'(gate_phase) - int'(pm_phase)) begin
        failures++; $display("FAIL pm lead %0d", cyc - last_pm);
      end
      if (int'(slot_o) != exp_slot) begin
        failures++; $display("FAIL slot %0d exp %0d", slot_o, exp_slot);
      end
      exp_slot = (exp_slot + 1) % int'(num_slots);
      last_gate = cyc; first = 0; ngates++;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 1'b0;
    repeat (200) @(negedge clk);
    checks++;
    if (ngates < 19) begin failures++; $display("FAIL only %0d gates", ngates); end
    // restart: slot back to 0
    restart = 1'b1; @(negedge clk); restart = 1'b0;
    exp_slot = 0; first = 1;
    repeat (100) @(negedge clk);
    // three users remain (one user left the network)
    @(posedge gate_o);
    @(negedge clk);
    num_slots = 3;
    restart = 1'b1; @(negedge clk); restart = 1'b0;
    exp_slot = 0; first = 1;
    repeat (150) @(negedge clk);
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
