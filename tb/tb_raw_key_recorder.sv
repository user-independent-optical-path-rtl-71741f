// tb_raw_key_recorder: random gates, slots, bases and click pulses. The
// testbench keeps its own list of what each gate window should report and
// compares every record taken by a host that is sometimes not ready; records
// overwritten while the host was not ready must be counted in drop_count.
`timescale 1ps/100fs
module tb_raw_key_recorder;
  import qkd_pkg::*;
  logic clk = 1'b0, rst = 1'b1, gate = 1'b0, basis = 1'b0, rec_ready = 1'b0;
  logic [SLOT_W-1:0] slot = '0;
  logic [1:0] apd_click = '0;
  logic rec_valid;
  raw_rec_t rec;
  logic [15:0] drop_count;
  int checks = 0, failures = 0;

  raw_key_recorder dut (.clk, .rst, .gate, .slot, .basis, .apd_click,
                        .rec_valid, .rec, .rec_ready, .drop_count);
  always #5000 clk = ~clk;

  raw_rec_t expq [$];
  raw_rec_t cur;
  bit open = 0;
  int seq = 0, drops = 0, taken = 0;
  bit pending = 0;
  logic [1:0] win;

  // one clock per loop iteration; the model mirrors the documented rules
  initial begin
    repeat (2) @(negedge clk);
    rst = 1'b0;
    win = '0;
    for (int c = 0; c < 4000; c++) begin
      bit g, rdy;
      g = ($urandom_range(0, 5) == 0);
      rdy = (c > 2000) ? ($urandom_range(0, 3) == 0) : 1'b1;
      gate = g; slot = SLOT_W'($urandom_range(0, 63)); basis = 1'($urandom);
      apd_click = ($urandom_range(0, 3) == 0) ? 2'($urandom) : 2'b00;
      rec_ready = rdy;
      // expected effect of this clock edge
      if (pending && rdy) begin
        checks++;
        if (rec != expq[0]) begin
          failures++; $display("FAIL record %p exp %p", rec, expq[0]);
        end
        expq.pop_front(); pending = 0; taken++;
      end
      if (g) begin
        if (open) begin
          if (pending) begin drops++; void'(expq.pop_front()); end
          cur.seq = SEQ_W'(seq); cur.click = win | apd_click;
          expq.push_back(cur); pending = 1; seq++;
        end
        open = 1; cur.slot = slot; cur.basis = basis; win = '0;
      end else win |= apd_click;
      @(negedge clk);
      checks++;
      if (rec_valid != pending) begin failures++; $display("FAIL valid %b exp %b", rec_valid, pending); end
    end
    checks++;
    if (int'(drop_count) != drops || drops == 0 || taken < 100) begin
      failures++; $display("FAIL drops %0d exp %0d taken %0d", drop_count, drops, taken);
    end
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
