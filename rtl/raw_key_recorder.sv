// raw_key_recorder: collects the server's raw key, one record per APD gate.
//
// Between one gate strobe and the next, click pulses of the two APDs are
// ORed into a window register. At each gate the window of the previous gate
// is closed and, together with that gate's slot, basis and sequence number,
// put in the output register (rec, rec_valid); the new gate's slot and basis
// are latched and its window opened. The host takes a record with
// rec_valid && rec_ready. If a new record is due while the last one has not
// been taken, the old one is overwritten and drop_count counts it (it stops
// at its maximum). The control program divides the records among the users
// by their slot, as the paper does in software.
// One-gate click window, record layout and overflow rule are this design's.
`timescale 1ps/100fs
module raw_key_recorder
  import qkd_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              gate,
  input  logic [SLOT_W-1:0] slot,
  input  logic              basis,
  input  logic [1:0]        apd_click,
  output logic              rec_valid,
  output raw_rec_t          rec,
  input  logic              rec_ready,
  output logic [15:0]       drop_count
);
  logic              open_q;   // a gate window is open
  logic [SEQ_W-1:0]  seq_q;
  logic [SLOT_W-1:0] slot_q;
  logic              basis_q;
  logic [1:0]        win_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      open_q     <= 1'b0;
      seq_q      <= '0;
      slot_q     <= '0;
      basis_q    <= 1'b0;
      win_q      <= '0;
      rec_valid  <= 1'b0;
      rec        <= '0;
      drop_count <= '0;
    end else begin
      if (rec_valid && rec_ready) rec_valid <= 1'b0;
      if (gate) begin
        if (open_q) begin
          rec       <= '{seq: seq_q, slot: slot_q, basis: basis_q,
                         click: win_q | apd_click};
          rec_valid <= 1'b1;
          if (rec_valid && !rec_ready && drop_count != '1)
            drop_count <= drop_count + 1'b1;
          seq_q <= seq_q + 1'b1;
        end
        open_q  <= 1'b1;
        slot_q  <= slot;
        basis_q <= basis;
        win_q   <= '0;
      end else begin
        win_q <= win_q | apd_click;
      end
    end
  end
endmodule
