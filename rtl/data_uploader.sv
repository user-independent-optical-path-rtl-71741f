// data_uploader: builds the parallel words that the serializer turns into
// one user's laser trigger.
//
// A counter runs over the laser period (period_words word clocks; 10 words =
// 100 ns = 10 MHz, the paper's maximum laser rate; N users sharing the
// detector get N times that). Within the period, serial bit p (p = word *
// SER_RATIO + bit) is 1 when it lies in [offset_bits, offset_bits +
// PULSE_BITS), taken modulo the period, so a pulse may straddle two words or
// wrap round the end of the period. The pulse position is thus set in 625 ps
// steps (the coarse timing of the paper); the fine 50 ps steps come later in
// the delay chain. An offset beyond the period, or enable low, gives no pulse.
//
// Interface: word_o and frame_o are registered and change on clk. Bit 0 of a
// word is the one the serializer sends first. restart sets the counter to
// word 0 on the next edge; all users restarted together stay aligned.
// The pattern-generator structure is this design's; the paper gives only the
// function ("transfers parallel data to the serializer").
`timescale 1ps/100fs
module data_uploader
  import qkd_pkg::*;
#(
  parameter int unsigned SER_RATIO  = SER_RATIO_DEF,
  parameter int unsigned PULSE_BITS = 3,
  parameter int unsigned PERIOD_W_P = PERIOD_W,
  parameter int unsigned OFFSET_W_P = OFFSET_W
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  restart,
  input  logic                  enable,
  input  logic [PERIOD_W_P-1:0] period_words,
  input  logic [OFFSET_W_P-1:0] offset_bits,
  output logic [SER_RATIO-1:0]  word_o,
  output logic                  frame_o
);
  localparam int unsigned LR = $clog2(SER_RATIO);
  localparam int unsigned BW = PERIOD_W_P + LR + 1;  // bit positions

  logic [PERIOD_W_P-1:0] wcnt;
  logic [BW-1:0]         period_bits, base, off_ext;
  logic [SER_RATIO-1:0]  word_d;

  assign period_bits = BW'(period_words) << LR;
  assign base        = BW'(wcnt) << LR;
  assign off_ext     = (OFFSET_W_P > BW) ? '1 : BW'(offset_bits);

  always_comb begin
    for (int unsigned i = 0; i < SER_RATIO; i++) begin
      logic [BW-1:0] p, d;
      p = base + BW'(i);
      d = (p >= off_ext) ? p - off_ext : p + period_bits - off_ext;
      word_d[i] = enable && (off_ext < period_bits) && (d < BW'(PULSE_BITS));
    end
  end

  always_ff @(posedge clk) begin
    if (rst || restart) begin
      wcnt    <= '0;
      word_o  <= '0;
      frame_o <= 1'b0;
    end else begin
      wcnt    <= (wcnt + 1'b1 >= period_words) ? '0 : wcnt + 1'b1;
      word_o  <= word_d;
      frame_o <= (wcnt == '0);
    end
  end
endmodule
