// serializer: word-to-bit serializer of one timing control module (the
// "D-FF" and "Transmitter" of the paper's serializer; its PLL is the pll
// module).
//
// The D-FF captures word_i on each rising edge of the word clock pclk. The
// transmitter, on the bit clock fclk (SER_RATIO times faster), loads that word
// on the first rising fclk edge after pclk has risen and then shifts it out,
// bit 0 first, one bit per fclk period. pclk is expected to change on falling
// edges of fclk (as the pll model makes it), so sampling it on the rising edge
// of fclk is clean. Latency from a word on word_i at a pclk edge to its bit 0
// on sout: one pclk period plus half an fclk period.
// The load alignment is this design's choice; the paper names only the parts.
`timescale 1ps/100fs
module serializer
  import qkd_pkg::*;
#(
  parameter int unsigned SER_RATIO = SER_RATIO_DEF
) (
  input  logic                 pclk,
  input  logic                 fclk,
  input  logic                 rst,
  input  logic [SER_RATIO-1:0] word_i,
  output logic                 sout
);
  logic [SER_RATIO-1:0] dff_q;   // D-FF on the word clock
  logic [SER_RATIO-1:0] shreg;   // transmitter shift register
  logic                 pclk_q;

  always_ff @(posedge pclk) begin
    if (rst) dff_q <= '0;
    else     dff_q <= word_i;
  end

  always_ff @(posedge fclk) begin
    pclk_q <= pclk;
    if (rst)                 shreg <= '0;
    else if (pclk && !pclk_q) shreg <= dff_q;
    else                     shreg <= shreg >> 1;
  end

  assign sout = shreg[0];
endmodule
