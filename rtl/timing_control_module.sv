// timing_control_module: the laser trigger of one user (the paper's timing
// control module; the server has one per user, 64 in all, each independent).
//
// data_uploader -> serializer -> [LVDS out of the FPGA, ser_o, and back in,
// ser_loop_i] -> delay_chain -> laser_o. The serializer places one pulse of
// PULSE_BITS bits per laser period with 625 ps resolution (coarse_bits); the
// delay chain adds 0..22 steps of 50 ps (fine_steps), so the trigger can be
// placed anywhere with 50 ps resolution. Changing coarse_bits by one moves
// laser_o by 625 ps, changing fine_steps by one moves it by 50 ps, once the
// delay control has loaded the new value (9 word clocks). The loop through
// the board follows the paper, which routes the LVDS output back into the
// FPGA because the serializer cannot drive the delay chain directly.
`timescale 1ps/100fs
module timing_control_module
  import qkd_pkg::*;
#(
  parameter int unsigned SER_RATIO  = SER_RATIO_DEF,
  parameter int unsigned PULSE_BITS = 3
) (
  input  logic                pclk,
  input  logic                fclk,
  input  logic                rst,
  input  logic                restart,
  input  logic                enable,
  input  logic [PERIOD_W-1:0] period_words,
  input  logic [OFFSET_W-1:0] coarse_bits,
  input  logic [FINE_W-1:0]   fine_steps,
  output logic                ser_o,
  input  logic                ser_loop_i,
  output logic                laser_o
);
  logic [SER_RATIO-1:0] word;
  logic                 frame;
  logic                 cfg_ena, cfg_data, cfg_update, cfg_busy;

  data_uploader #(.SER_RATIO(SER_RATIO), .PULSE_BITS(PULSE_BITS)) u_upl (
    .clk(pclk), .rst, .restart, .enable, .period_words,
    .offset_bits(coarse_bits), .word_o(word), .frame_o(frame)
  );

  serializer #(.SER_RATIO(SER_RATIO)) u_ser (
    .pclk, .fclk, .rst, .word_i(word), .sout(ser_o)
  );

  delay_control u_dctl (
    .clk(pclk), .rst, .fine_steps, .cfg_ena, .cfg_data, .cfg_update,
    .busy(cfg_busy)
  );

  delay_chain u_chain (
    .clk(pclk), .rst, .din(ser_loop_i), .cfg_ena, .cfg_data, .cfg_update,
    .dout(laser_o)
  );
endmodule
