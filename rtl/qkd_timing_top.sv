// qkd_timing_top: server-side timing FPGA of a 1xN plug-and-play QKD network.
//
// The server (Bob) fires one laser per user; each user's light travels to
// the user and back, so it reaches the shared pair of APDs at a time set by
// that user's fibre length. Photons of all users are detected in turn by
// time-division multiplexing: gate k belongs to user slot k mod num_slots.
// For this to work each laser must fire at its own time, chosen so the
// returning photon falls on its gate, and that time must follow slow drifts
// of the fibre length. This top holds:
//   * pll: 1.6 GHz bit clock and 100 MHz word clock;
//   * N_USERS timing_control_modules: laser trigger of each user, coarse in
//     625 ps serializer bits, fine in 50 ps delay-chain steps;
//   * host_regs: registers written by the control program, which monitors
//     each user's key rate and error rate and rewrites its timing; it also
//     reads the eight laser temperatures through them;
//   * gate_generator, pm_driver, raw_key_recorder: APD gates, random basis
//     of PM_B1/PM_B2, and raw key records tagged with the user slot.
// The serializer outputs leave as ser_o and must be looped back on the board
// into ser_loop_i (the paper's LVDS loop); laser_o drives the laser
// amplifiers. Lasers, APDs, QRNG, DACs and optics are outside.
// Internal reset is rst, or PLL not locked, held until two word clocks after
// lock. All control signals run on the word clock; host bus signals must be
// synchronous to it (exported as pclk_o). The pll is a behavioural model:
// synthesis that ignores its delays reports its fclk as undriven, which
// stands until the vendor PLL replaces it.
`timescale 1ps/100fs
module qkd_timing_top
  import qkd_pkg::*;
#(
  parameter int unsigned N_USERS = N_USERS_DEF
) (
  input  logic               ref_clk,
  input  logic               rst,
  output logic               pclk_o,
  output logic               locked_o,
  // control program register bus
  input  logic               we,
  input  logic [ADDR_W-1:0]  addr,
  input  logic [31:0]        wdata,
  output logic [31:0]        rdata,
  input  logic [TEMP_W-1:0]  laser_temp_i [N_LASERS],
  // laser triggers
  output logic [N_USERS-1:0] ser_o,
  input  logic [N_USERS-1:0] ser_loop_i,
  output logic [N_USERS-1:0] laser_o,
  // detection
  output logic               gate_o,
  input  logic [1:0]         apd_click_i,
  input  logic               qrng_i,
  output logic [DAC_W-1:0]   pm_b1_code,
  output logic [DAC_W-1:0]   pm_b2_code,
  // raw key to the control program
  output logic               rec_valid,
  output raw_rec_t           rec,
  input  logic               rec_ready,
  output logic [15:0]        drop_count
);
  logic fclk, pclk, locked;
  logic [1:0] rst_sync;
  logic irst;

  pll u_pll (.ref_clk, .rst, .fclk, .pclk, .locked);
  assign pclk_o   = pclk;
  assign locked_o = locked;

  always_ff @(posedge pclk or posedge rst) begin
    if (rst) rst_sync <= 2'b11;
    else     rst_sync <= {rst_sync[0], !locked};
  end
  assign irst = rst_sync[1];

  global_cfg_t        cfg;
  user_cfg_t          ucfg [N_USERS];
  logic               restart;
  logic [N_USERS-1:0] pol_map;

  host_regs #(.N_USERS(N_USERS)) u_regs (
    .clk(pclk), .rst(irst), .we, .addr, .wdata, .rdata,
    .laser_temp(laser_temp_i), .restart, .cfg, .ucfg
  );

  for (genvar u = 0; u < N_USERS; u++) begin : g_user
    assign pol_map[u] = ucfg[u].pol;
    timing_control_module u_tcm (
      .pclk, .fclk, .rst(irst), .restart,
      .enable(ucfg[u].enable), .period_words(cfg.laser_period),
      .coarse_bits(ucfg[u].coarse), .fine_steps(ucfg[u].fine),
      .ser_o(ser_o[u]), .ser_loop_i(ser_loop_i[u]), .laser_o(laser_o[u])
    );
  end

  logic              pm_fire, basis;
  logic [SLOT_W-1:0] slot;

  gate_generator u_gate (
    .clk(pclk), .rst(irst), .restart, .gate_period(cfg.gate_period),
    .gate_phase(cfg.gate_phase), .pm_phase(cfg.pm_phase),
    .num_slots(cfg.num_slots), .gate_o, .pm_fire_o(pm_fire), .slot_o(slot)
  );

  pm_driver #(.N_USERS(N_USERS)) u_pm (
    .clk(pclk), .rst(irst), .pm_fire, .slot, .qrng_bit(qrng_i), .pol_map,
    .code0(cfg.pm_code0), .code1(cfg.pm_code1), .pm_b1_code, .pm_b2_code,
    .basis_o(basis)
  );

  raw_key_recorder u_rec (
    .clk(pclk), .rst(irst), .gate(gate_o), .slot, .basis,
    .apd_click(apd_click_i), .rec_valid, .rec, .rec_ready, .drop_count
  );
endmodule
