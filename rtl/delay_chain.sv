// delay_chain: the fine-timing stage of one timing control module (the
// paper's "Delay chain": IO configuration, two dynamic delays and Obuf).
//
// The serial stream that left the FPGA on the serializer's LVDS output comes
// back in on din, passes dynamic delay 1 (0..15 steps) and dynamic delay 2
// (0..7 steps) in series, 50 ps per step, and leaves on dout toward the laser
// amplifier. Total extra delay = (setting1 + setting2) * 50 ps, 0 to 1.1 ns,
// which covers the 625 ps serializer bit. The settings come from io_config,
// loaded by delay_control through cfg_ena/cfg_data/cfg_update on clk.
// The order of the parts follows the paper's figure; the output buffer is a
// pad and is a plain connection here. The 15 + 7 split is this design's.
`timescale 1ps/100fs
module delay_chain
  import qkd_pkg::*;
#(
  parameter int unsigned STEP_PS_P = STEP_PS
) (
  input  logic clk,
  input  logic rst,
  input  logic din,
  input  logic cfg_ena,
  input  logic cfg_data,
  input  logic cfg_update,
  output logic dout
);
  logic [3:0] setting1;
  logic [2:0] setting2;
  logic       mid;

  io_config #(.S1_W(4), .S2_W(3)) u_iocfg (
    .clk, .rst, .ena(cfg_ena), .datain(cfg_data), .update(cfg_update),
    .setting1, .setting2
  );

  dynamic_delay #(.TAPS(DLY1_MAX), .SEL_W(4), .STEP_PS(STEP_PS_P)) u_dly1 (
    .din, .sel(setting1), .dout(mid)
  );

  dynamic_delay #(.TAPS(DLY2_MAX), .SEL_W(3), .STEP_PS(STEP_PS_P)) u_dly2 (
    .din(mid), .sel(setting2), .dout
  );
endmodule
