// gate_generator: APD gate and phase-modulator strobes of the detection
// time-division multiplexing.
//
// A counter runs over gate_period word clocks (10 = 10 ns * 10 = 10 MHz, the
// fixed gate rate of the paper). In each period pm_fire_o pulses when the
// counter equals pm_phase and gate_o when it equals gate_phase, both for one
// clk; the PM strobe is meant to come a little before the gate, as the
// photons reach the APDs a few ns after the phase modulation starts. slot_o
// numbers the periods 0, 1, .., num_slots-1, 0, ..: with four users, gates
// 1-4 belong to users 1-4 and the fifth to user 1 again, as in the paper.
// slot_o is registered with the strobes, so it always gives the slot of the
// strobe next to it. restart (or reset) returns to count 0, slot 0.
// Gate position resolution is one word clock (10 ns); the paper gives no
// finer gate timing. Counter structure and phases are this design's.
`timescale 1ps/100fs
module gate_generator
  import qkd_pkg::*;
(
  input  logic                clk,
  input  logic                rst,
  input  logic                restart,
  input  logic [PERIOD_W-1:0] gate_period,
  input  logic [PERIOD_W-1:0] gate_phase,
  input  logic [PERIOD_W-1:0] pm_phase,
  input  logic [SLOT_W:0]     num_slots,
  output logic                gate_o,
  output logic                pm_fire_o,
  output logic [SLOT_W-1:0]   slot_o
);
  logic [PERIOD_W-1:0] cnt;
  logic [SLOT_W-1:0]   slot_q;  // slot of the current count
  logic                wrap;

  assign wrap = (cnt + 1'b1 >= gate_period);

  always_ff @(posedge clk) begin
    if (rst || restart) begin
      cnt       <= '0;
      slot_q    <= '0;
      slot_o    <= '0;
      gate_o    <= 1'b0;
      pm_fire_o <= 1'b0;
    end else begin
      gate_o    <= (cnt == gate_phase);
      pm_fire_o <= (cnt == pm_phase);
      slot_o    <= slot_q;
      if (wrap) begin
        cnt    <= '0;
        slot_q <= ((SLOT_W+1)'(slot_q) + 1'b1 >= num_slots) ? '0 : slot_q + 1'b1;
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
