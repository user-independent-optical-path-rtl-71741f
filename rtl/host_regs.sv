// host_regs: register file shared between the server's control program and
// the timing FPGA.
//
// The control program writes the laser period, the gate period and phases,
// the number of users in the detection time-division cycle, the two PM codes
// and, per user, enable, polarization (which PM serves the user), coarse
// timing (625 ps bits) and fine timing (50 ps steps). Path length
// compensation is done by the program rewriting a user's coarse/fine values.
// Writes take effect on the next clk edge; reads are combinational. Writing
// bit 0 of CTRL gives a one-cycle restart pulse that realigns every laser
// counter and the gate counter.
// Address map (word addresses, see qkd_pkg): 0x000 CTRL, 0x001 laser
// period, 0x002 gate period, 0x003 gate phase, 0x004 PM phase, 0x005 number
// of slots, 0x006/0x007 PM codes, 0x100 | user<<2 | reg for the user
// registers (0 enable, 1 coarse, 2 fine, 3 pol), and read-only 0x010 +
// laser for the temperature readings of the eight tunable lasers, which the
// program needs to keep their wavelengths on the WDM grid.
// The paper says only which information is shared; the bus and the map are
// this design's.
`timescale 1ps/100fs
module host_regs
  import qkd_pkg::*;
#(
  parameter int unsigned N_USERS = N_USERS_DEF
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              we,
  input  logic [ADDR_W-1:0] addr,
  input  logic [31:0]       wdata,
  output logic [31:0]       rdata,
  input  logic [TEMP_W-1:0] laser_temp [N_LASERS],
  output logic              restart,
  output global_cfg_t       cfg,
  output user_cfg_t         ucfg [N_USERS]
);
  logic              is_user;
  logic [SLOT_W-1:0] uidx;
  logic [1:0]        ureg;

  assign is_user = addr[8];
  assign uidx    = addr[SLOT_W+1:2];
  assign ureg    = addr[1:0];

  always_ff @(posedge clk) begin
    if (rst) begin
      restart          <= 1'b0;
      cfg.laser_period <= LASER_PERIOD_RST;
      cfg.gate_period  <= GATE_PERIOD_RST;
      cfg.gate_phase   <= '0;
      cfg.pm_phase     <= '0;
      cfg.num_slots    <= (SLOT_W+1)'(1);
      cfg.pm_code0     <= '0;
      cfg.pm_code1     <= '0;
      for (int u = 0; u < N_USERS; u++) ucfg[u] <= '0;
    end else begin
      restart <= we && !is_user && addr == A_CTRL && wdata[0];
      if (we && !is_user) begin
        case (addr)
          A_LASER_PER:  cfg.laser_period <= wdata[PERIOD_W-1:0];
          A_GATE_PER:   cfg.gate_period  <= wdata[PERIOD_W-1:0];
          A_GATE_PHASE: cfg.gate_phase   <= wdata[PERIOD_W-1:0];
          A_PM_PHASE:   cfg.pm_phase     <= wdata[PERIOD_W-1:0];
          A_NUM_SLOTS:  cfg.num_slots    <= wdata[SLOT_W:0];
          A_PM_CODE0:   cfg.pm_code0     <= wdata[DAC_W-1:0];
          A_PM_CODE1:   cfg.pm_code1     <= wdata[DAC_W-1:0];
          default: ;
        endcase
      end
      if (we && is_user && 32'(uidx) < N_USERS) begin
        case (ureg)
          2'(R_ENABLE): ucfg[uidx].enable <= wdata[0];
          2'(R_COARSE): ucfg[uidx].coarse <= wdata[OFFSET_W-1:0];
          2'(R_FINE):   ucfg[uidx].fine   <= wdata[FINE_W-1:0];
          default:      ucfg[uidx].pol    <= wdata[0];
        endcase
      end
    end
  end

  always_comb begin
    rdata = '0;
    if (is_user) begin
      if (32'(uidx) < N_USERS) begin
        case (ureg)
          2'(R_ENABLE): rdata = 32'(ucfg[uidx].enable);
          2'(R_COARSE): rdata = 32'(ucfg[uidx].coarse);
          2'(R_FINE):   rdata = 32'(ucfg[uidx].fine);
          default:      rdata = 32'(ucfg[uidx].pol);
        endcase
      end
    end else begin
      case (addr)
        A_LASER_PER:  rdata = 32'(cfg.laser_period);
        A_GATE_PER:   rdata = 32'(cfg.gate_period);
        A_GATE_PHASE: rdata = 32'(cfg.gate_phase);
        A_PM_PHASE:   rdata = 32'(cfg.pm_phase);
        A_NUM_SLOTS:  rdata = 32'(cfg.num_slots);
        A_PM_CODE0:   rdata = 32'(cfg.pm_code0);
        A_PM_CODE1:   rdata = 32'(cfg.pm_code1);
        default:
          if (addr >= A_TEMP_BASE && addr < A_TEMP_BASE + ADDR_W'(N_LASERS))
            rdata = 32'(laser_temp[addr[2:0]]);
          else
            rdata = '0;
      endcase
    end
  end
endmodule
