// tb_pm_driver: random slots, QRNG bits and polarization maps; after each
// strobe the PM of the slot's polarization must show code1 or code0 by the
// QRNG bit and the other PM must keep its code. Also checks that with users
// 1,3 vertical and 2,4 horizontal each PM is updated on every second strobe.
`timescale 1ps/100fs
module tb_pm_driver;
  import qkd_pkg::*;
  localparam int N = 64;
  logic clk = 1'b0, rst = 1'b1, pm_fire = 1'b0, qrng_bit = 1'b0;
  logic [SLOT_W-1:0] slot = '0;
  logic [N-1:0] pol_map = '0;
  logic [DAC_W-1:0] code0 = 8'h20, code1 = 8'hb0, b1, b2;
  logic basis_o;
  int checks = 0, failures = 0;

  pm_driver #(.N_USERS(N)) dut (.clk, .rst, .pm_fire, .slot, .qrng_bit, .pol_map,
    .code0, .code1, .pm_b1_code(b1), .pm_b2_code(b2), .basis_o);
  always #5000 clk = ~clk;

  logic [DAC_W-1:0] e1, e2;
  int n1, n2;
  task automatic fire(int s, bit q);
    @(negedge clk) pm_fire = 1'b1; slot = SLOT_W'(s); qrng_bit = q;
    if (pol_map[s]) e2 = q ? code1 : code0; else e1 = q ? code1 : code0;
    if (pol_map[s]) n2++; else n1++;
    @(negedge clk) pm_fire = 1'b0; qrng_bit = !q;
    checks++;
    if (b1 != e1 || b2 != e2 || basis_o != q) begin
      failures++; $display("FAIL slot %0d q %0b: %h %h exp %h %h", s, q, b1, b2, e1, e2);
    end
  endtask

  initial begin
    e1 = '0; e2 = '0; n1 = 0; n2 = 0;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    pol_map = {$urandom, $urandom};
    repeat (300) fire($urandom_range(0, N - 1), 1'($urandom));
    // no strobe: nothing changes
    qrng_bit = 1'b1; slot = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (b1 != e1 || b2 != e2) begin failures++; $display("FAIL change without strobe"); end
    // field-test map: users 1,3 (slots 0,2) vertical, users 2,4 horizontal
    pol_map = '0; pol_map[1] = 1'b1; pol_map[3] = 1'b1;
    n1 = 0; n2 = 0;
    for (int k = 0; k < 40; k++) fire(k % 4, 1'($urandom));
    checks++;
    if (n1 != 20 || n2 != 20) begin failures++; $display("FAIL split %0d/%0d", n1, n2); end
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
