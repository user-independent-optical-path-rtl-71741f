// dynamic_delay: behavioural model of one FPGA I/O dynamic delay element.
// A silicon delay line cannot be written as logic, so this model stands in
// for it and is not synthesizable.
//
// The input passes a chain of TAPS buffers of STEP_PS each (50 ps, the step
// the paper gives); sel picks the tap, so the delay is sel * 50 ps (sel above
// TAPS gives TAPS steps). Two of these in series make the paper's delay chain
// of up to 22 steps; this design gives the first 15 steps and the second 7.
// Each buffer is inertial: pulses shorter than 50 ps are swallowed, which the
// nanosecond laser triggers never are.
`timescale 1ps/100fs
module dynamic_delay #(
  parameter int unsigned TAPS    = 15,
  parameter int unsigned SEL_W   = 4,
  parameter int unsigned STEP_PS = 50
) (
  input  logic             din,
  input  logic [SEL_W-1:0] sel,
  output logic             dout
);
  wire [TAPS:0] tap;
  assign tap[0] = din;
  for (genvar i = 0; i < TAPS; i++) begin : g_buf
    assign #(STEP_PS) tap[i+1] = tap[i];
  end
  assign dout = (32'(sel) > TAPS) ? tap[TAPS] : tap[sel];
endmodule
