// pm_driver: random basis choice for the server's two phase modulators.
//
// The server has PM_B1 on the path of the vertically polarized users and
// PM_B2 on that of the horizontal ones. On each pm_fire strobe the driver
// takes the QRNG bit as the basis, looks up the polarization of the slot's
// user in pol_map, and sets that PM's DAC code to code0 or code1; the other PM
// keeps its code. With users 1 and 3 vertical and 2 and 4 horizontal and a
// 10 MHz strobe, each PM is thus modulated at 5 MHz, as in the paper's field
// test. basis_o holds the basis of the last strobe for the raw key record.
// Outputs change one clk after the strobe. pol_map, the QRNG and PM codes are
// inputs from the register file and the board; the code format is this
// design's choice.
`timescale 1ps/100fs
module pm_driver
  import qkd_pkg::*;
#(
  parameter int unsigned N_USERS = N_USERS_DEF
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               pm_fire,
  input  logic [SLOT_W-1:0]  slot,
  input  logic               qrng_bit,
  input  logic [N_USERS-1:0] pol_map,
  input  logic [DAC_W-1:0]   code0,
  input  logic [DAC_W-1:0]   code1,
  output logic [DAC_W-1:0]   pm_b1_code,
  output logic [DAC_W-1:0]   pm_b2_code,
  output logic               basis_o
);
  logic pol;
  assign pol = (32'(slot) < N_USERS) ? pol_map[slot] : 1'b0;

  always_ff @(posedge clk) begin
    if (rst) begin
      pm_b1_code <= '0;
      pm_b2_code <= '0;
      basis_o    <= 1'b0;
    end else if (pm_fire) begin
      basis_o <= qrng_bit;
      if (pol) pm_b2_code <= qrng_bit ? code1 : code0;
      else     pm_b1_code <= qrng_bit ? code1 : code0;
    end
  end
endmodule
