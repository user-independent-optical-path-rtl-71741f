// io_config: configuration register of the two dynamic delay elements (the
// paper's "IO config." block, written to by the delay control).
//
// A (S1_W + S2_W)-bit shift register takes datain, most significant bit
// first, on every clk edge with ena high. A one-cycle update pulse copies it
// to the outputs: the upper S1_W bits become setting1 (steps of delay 1), the
// lower S2_W bits setting2 (steps of delay 2). Settings change only on update,
// so the delay never passes through half-loaded values. Reset clears both.
// The paper gives only that the delay control talks to this block to set the
// two delays; the serial-shift-plus-update interface is this design's choice.
`timescale 1ps/100fs
module io_config #(
  parameter int unsigned S1_W = 4,
  parameter int unsigned S2_W = 3
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            ena,
  input  logic            datain,
  input  logic            update,
  output logic [S1_W-1:0] setting1,
  output logic [S2_W-1:0] setting2
);
  logic [S1_W+S2_W-1:0] sr;

  always_ff @(posedge clk) begin
    if (rst) begin
      sr       <= '0;
      setting1 <= '0;
      setting2 <= '0;
    end else begin
      if (ena) sr <= {sr[S1_W+S2_W-2:0], datain};
      if (update) {setting1, setting2} <= sr;
    end
  end
endmodule
