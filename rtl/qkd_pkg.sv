// qkd_pkg: constants and types shared by the server timing FPGA of the 1xN
// plug-and-play QKD network.
//
// Timing units used everywhere:
//   * word clock  (pclk) : 100 MHz, 10 ns. All control logic runs on it.
//   * bit clock   (fclk) : 1.6 GHz, 625 ps. The serializer shifts on it; one
//                          serial bit is the coarse timing step of a laser.
//   * delay step         : 50 ps, the fine step of the dynamic delay chain.
// The 1.6 GHz bit rate, the 50 ps step, the 22-step range and the 64 users
// follow the paper. The 16:1 serialisation ratio, the register widths and
// the split of the 22 steps into 15 + 7 are this design's own choices.
`timescale 1ps/100fs
package qkd_pkg;

  localparam int unsigned N_USERS_DEF    = 64;   // users of the 1x64 network
  localparam int unsigned SER_RATIO_DEF  = 16;   // bits per parallel word
  localparam int unsigned FCLK_PERIOD_PS = 625;  // 1.6 GHz bit clock
  localparam int unsigned STEP_PS        = 50;   // fine delay step
  localparam int unsigned DLY1_MAX       = 15;   // steps of dynamic delay 1
  localparam int unsigned DLY2_MAX       = 7;    // steps of dynamic delay 2
  localparam int unsigned FINE_MAX       = DLY1_MAX + DLY2_MAX;  // 22 steps

  localparam int unsigned PERIOD_W = 16;  // laser / gate period, in words
  localparam int unsigned OFFSET_W = 20;  // coarse laser position, in bits
  localparam int unsigned FINE_W   = 5;   // fine delay, in 50 ps steps
  localparam int unsigned SLOT_W   = 6;   // user slot number 0..63
  localparam int unsigned DAC_W    = 8;   // phase modulator DAC code
  localparam int unsigned SEQ_W    = 16;  // gate sequence number

  // Defaults after reset: one laser at the 10 MHz maximum rate, 10 MHz gates.
  localparam logic [PERIOD_W-1:0] LASER_PERIOD_RST = PERIOD_W'(10);
  localparam logic [PERIOD_W-1:0] GATE_PERIOD_RST  = PERIOD_W'(10);

  // Settings of one user's timing control module.
  typedef struct packed {
    logic                enable;  // laser of this user running
    logic                pol;     // 0: vertical (PM_B1), 1: horizontal (PM_B2)
    logic [OFFSET_W-1:0] coarse;  // pulse position in 625 ps bits
    logic [FINE_W-1:0]   fine;    // extra delay in 50 ps steps, 0..22
  } user_cfg_t;

  // Settings shared by all users.
  typedef struct packed {
    logic [PERIOD_W-1:0] laser_period;  // words per laser period
    logic [PERIOD_W-1:0] gate_period;   // words per APD gate period
    logic [PERIOD_W-1:0] gate_phase;    // gate position in its period
    logic [PERIOD_W-1:0] pm_phase;      // PM strobe position in the period
    logic [SLOT_W:0]     num_slots;     // users sharing the gates (TDM)
    logic [DAC_W-1:0]    pm_code0;      // PM code for basis 0
    logic [DAC_W-1:0]    pm_code1;      // PM code for basis 1
  } global_cfg_t;

  // One raw key record: what happened at one APD gate.
  typedef struct packed {
    logic [SEQ_W-1:0]  seq;    // gate number since restart
    logic [SLOT_W-1:0] slot;   // user slot of that gate
    logic              basis;  // random basis applied by the server PM
    logic [1:0]        click;  // clicks of APD 0 and APD 1
  } raw_rec_t;

  // Register map of host_regs (word addresses).
  localparam int unsigned ADDR_W      = 9;
  localparam logic [ADDR_W-1:0] A_CTRL       = 9'h000;  // bit0: restart strobe
  localparam logic [ADDR_W-1:0] A_LASER_PER  = 9'h001;
  localparam logic [ADDR_W-1:0] A_GATE_PER   = 9'h002;
  localparam logic [ADDR_W-1:0] A_GATE_PHASE = 9'h003;
  localparam logic [ADDR_W-1:0] A_PM_PHASE   = 9'h004;
  localparam logic [ADDR_W-1:0] A_NUM_SLOTS  = 9'h005;
  localparam logic [ADDR_W-1:0] A_PM_CODE0   = 9'h006;
  localparam logic [ADDR_W-1:0] A_PM_CODE1   = 9'h007;
  localparam logic [ADDR_W-1:0] A_TEMP_BASE  = 9'h010;  // 0x010..0x017, read only
  localparam int unsigned N_LASERS = 8;     // tunable lasers, 8 users each
  localparam int unsigned TEMP_W   = 16;    // laser temperature reading
  // User u, register r (0 enable, 1 coarse, 2 fine, 3 pol): 0x100 | u<<2 | r.
  localparam int unsigned R_ENABLE = 0, R_COARSE = 1, R_FINE = 2, R_POL = 3;

endpackage
