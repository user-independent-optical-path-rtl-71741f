// tb_data_uploader: drives random laser periods and pulse positions and
// compares every output word with the pulse pattern worked out bit by bit
// in the testbench: bit p of a period is high when (p - offset) mod
// (period * 16) < 3.
`timescale 1ps/100fs
module tb_data_uploader;
  localparam int R = 16, PB = 3;
  logic clk = 1'b0, rst = 1'b1, restart = 1'b0, enable = 1'b0;
  logic [15:0] period_words;
  logic [19:0] offset_bits;
  logic [R-1:0] word_o;
  logic frame_o;
  int checks = 0, failures = 0;

  data_uploader dut (.clk, .rst, .restart, .enable, .period_words,
                     .offset_bits, .word_o, .frame_o);

  always #5000 clk = ~clk;

  function automatic logic [R-1:0] expect_word(int k, int per, int off, bit en);
    logic [R-1:0] w;
    int pb = per * R;
    for (int i = 0; i < R; i++) begin
      int p = (k % per) * R + i;
      int d = ((p - off) % pb + pb) % pb;
      w[i] = en && off < pb && d < PB;
    end
    return w;
  endfunction

  task automatic run(int per, int off, bit en, int nwords);
    period_words = 16'(per); offset_bits = 20'(off); enable = en;
    @(negedge clk) restart = 1'b1;
    @(negedge clk) restart = 1'b0;
    @(negedge clk);
    // word k of the period appears after edge k+1 counted from the restart edge
    for (int k = 0; k < nwords; k++) begin
      logic [R-1:0] e;
      e = expect_word(k, per, off, en);
      checks++;
      if (word_o !== e || frame_o !== (k % per == 0)) begin
        failures++;
        $display("FAIL per=%0d off=%0d k=%0d got %h/%b exp %h", per, off, k, word_o, frame_o, e);
      end
      @(negedge clk);
    end
  endtask

  int pulses;
  initial begin
    period_words = 10; offset_bits = 0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    run(10, 0, 1, 25);
    run(10, 14, 1, 25);     // straddles words 0 and 1
    run(10, 159, 1, 25);    // wraps round the period end
    run(40, 300, 1, 90);    // 2.5 MHz, four-user sharing
    run(10, 5, 0, 12);      // disabled
    run(10, 170, 1, 12);    // offset beyond the period: no pulse
    run(1, 3, 1, 6);        // pulse every word
    for (int t = 0; t < 20; t++) begin
      automatic int per = 1 + $urandom_range(0, 40);
      run(per, $urandom_range(0, per * R - 1), 1, 2 * per + 3);
    end
    // rate: exactly one 3-bit pulse per period of 10 words
    run(10, 37, 1, 0);
    pulses = 0;
    repeat (100) begin @(negedge clk); pulses += $countones(word_o); end
    checks++;
    if (pulses != 10 * PB) begin failures++; $display("FAIL pulse count %0d", pulses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
