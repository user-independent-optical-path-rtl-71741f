// pll: behavioural model of the FPGA PLL that clocks the serializer.
// It is not synthesizable logic; it stands in for the vendor PLL macro.
//
// It produces the 1.6 GHz bit clock fclk (625 ps, the serializer rate the
// paper gives) and the word clock pclk = fclk / SER_RATIO (100 MHz for the
// default ratio of 16, a choice of this design). pclk changes on falling
// edges of fclk, so logic on the rising edge of fclk can sample pclk cleanly;
// this is how the serializer finds word boundaries. locked rises after
// LOCK_EDGES rising edges of ref_clk with rst low and falls with rst.
// The oscillator is a free-running delayed toggle; a synthesis tool that
// ignores delays sees fclk as undriven, which is expected of this model.
`timescale 1ps/100fs
module pll #(
  parameter int unsigned FCLK_PERIOD_PS = 625,
  parameter int unsigned SER_RATIO      = 16,
  parameter int unsigned LOCK_EDGES     = 16
) (
  input  logic ref_clk,
  input  logic rst,
  output logic fclk,
  output logic pclk,
  output logic locked
);
  localparam realtime HALF = FCLK_PERIOD_PS / 2.0;

  int unsigned div_cnt;
  int unsigned lock_cnt;

  initial fclk = 1'b0;
  always #(HALF) fclk <= ~fclk;

  initial pclk = 1'b0;
  initial div_cnt = 0;
  always @(negedge fclk) begin
    if (div_cnt == SER_RATIO / 2 - 1) begin
      div_cnt <= 0;
      pclk    <= ~pclk;
    end else begin
      div_cnt <= div_cnt + 1;
    end
  end

  initial lock_cnt = 0;
  always @(posedge ref_clk or posedge rst) begin
    if (rst) lock_cnt <= 0;
    else if (lock_cnt < LOCK_EDGES) lock_cnt <= lock_cnt + 1;
  end
  assign locked = (lock_cnt >= LOCK_EDGES);
endmodule
