// tb_host_regs: writes every global register and random user registers,
// reads them back, compares the struct outputs with a shadow copy kept by
// the testbench, and checks the one-cycle restart pulse.
`timescale 1ps/100fs
module tb_host_regs;
  import qkd_pkg::*;
  localparam int N = 64;
  logic clk = 1'b0, rst = 1'b1, we = 1'b0;
  logic [ADDR_W-1:0] addr = '0;
  logic [31:0] wdata = '0, rdata;
  logic restart;
  logic [TEMP_W-1:0] laser_temp [N_LASERS];
  global_cfg_t cfg;
  user_cfg_t ucfg [N];
  int checks = 0, failures = 0;

  host_regs #(.N_USERS(N)) dut (.clk, .rst, .we, .addr, .wdata, .rdata, .laser_temp, .restart, .cfg, .ucfg);
  always #5000 clk = ~clk;

  user_cfg_t shadow [N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic wr(logic [ADDR_W-1:0] a, logic [31:0] d);
    @(negedge clk) we = 1'b1; addr = a; wdata = d;
    @(negedge clk) we = 1'b0;
  endtask

  task automatic rd(input logic [ADDR_W-1:0] a, output logic [31:0] v);
    addr = a; #1; v = rdata;
  endtask
  logic [31:0] r0, r1, r2;

  initial begin
    repeat (2) @(negedge clk);
    rst = 1'b0;
    @(negedge clk);
    check(cfg.laser_period == 10 && cfg.gate_period == 10 && cfg.num_slots == 1, "reset values");
    rd(A_LASER_PER, r0);
    check(r0 == 10, "read reset period");
    wr(A_LASER_PER, 40);   wr(A_GATE_PER, 10);  wr(A_GATE_PHASE, 5);
    wr(A_PM_PHASE, 3);     wr(A_NUM_SLOTS, 4);  wr(A_PM_CODE0, 8'h11);
    wr(A_PM_CODE1, 8'h9c);
    check(cfg.laser_period == 40 && cfg.gate_period == 10 && cfg.gate_phase == 5 &&
          cfg.pm_phase == 3 && cfg.num_slots == 4 && cfg.pm_code0 == 8'h11 &&
          cfg.pm_code1 == 8'h9c, "global registers");
    rd(A_GATE_PHASE, r0); rd(A_PM_CODE1, r1); rd(A_NUM_SLOTS, r2);
    check(r0 == 5 && r1 == 32'h9c && r2 == 4, "global readback");
    for (int u = 0; u < N; u++) shadow[u] = '0;
    repeat (400) begin
      automatic int u = $urandom_range(0, N - 1);
      automatic int r = $urandom_range(0, 3);
      automatic logic [31:0] d = $urandom;
      wr(ADDR_W'(9'h100 | (u << 2) | r), d);
      case (r)
        0: shadow[u].enable = d[0];
        1: shadow[u].coarse = d[19:0];
        2: shadow[u].fine   = d[4:0];
        default: shadow[u].pol = d[0];
      endcase
    end
    for (int u = 0; u < N; u++) begin
      check(ucfg[u] == shadow[u], $sformatf("user %0d registers", u));
      rd(ADDR_W'(9'h100 | (u << 2) | 1), r0);
      rd(ADDR_W'(9'h100 | (u << 2) | 2), r1);
      check(r0 == 32'(shadow[u].coarse) && r1 == 32'(shadow[u].fine), "user readback");
    end
    // laser temperatures are readable at 0x010 + laser
    for (int l = 0; l < N_LASERS; l++) laser_temp[l] = TEMP_W'($urandom);
    for (int l = 0; l < N_LASERS; l++) begin
      rd(A_TEMP_BASE + ADDR_W'(l), r0);
      check(r0 == 32'(laser_temp[l]), $sformatf("temperature of laser %0d", l));
    end
    rd(A_TEMP_BASE + ADDR_W'(N_LASERS), r0);
    check(r0 == 0, "no ninth laser");
    // restart strobe: exactly one cycle high
    check(!restart, "no restart yet");
    @(negedge clk) we = 1'b1; addr = A_CTRL; wdata = 1;
    @(negedge clk) we = 1'b0;
    check(restart, "restart pulse");
    @(negedge clk);
    check(!restart, "restart one cycle");
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
