// tb_serializer: sends random words and checks the serial stream bit by bit
// (bit 0 first, one bit per 625 ps) and the latency: bit 0 of the word
// captured at a word-clock edge leaves half a bit period after that edge.
`timescale 1ps/100fs
module tb_serializer;
  localparam int R = 16;
  logic ref_clk = 1'b0, prst = 1'b0;
  logic fclk, pclk, locked;
  logic rst = 1'b1;
  logic [R-1:0] word_i = '0;
  logic sout;
  int checks = 0, failures = 0;

  pll u_pll (.ref_clk, .rst(prst), .fclk, .pclk, .locked);
  serializer dut (.pclk, .fclk, .rst, .word_i, .sout);

  logic [R-1:0] sent [$];
  logic [R-1:0] cur;
  int bitidx = R;
  logic pq = 1'b0;
  bit   run_chk = 0;

  // new random word after each word-clock edge
  always @(negedge pclk) if (!rst) word_i <= R'($urandom);
  always @(posedge pclk) if (!rst) sent.push_back(word_i);

  // independent model: at the first fast edge after a word-clock edge the
  // last captured word starts; bits follow one per fast period
  always @(posedge fclk) begin
    if (pclk && !pq && sent.size() > 0) begin
      cur = sent.pop_front(); bitidx = 0; run_chk = 1;
    end else bitidx++;
    pq = pclk;
  end
  always @(negedge fclk) begin
    if (run_chk && bitidx < R) begin
      checks++;
      if (sout !== cur[bitidx]) begin
        failures++;
        if (failures < 10) $display("FAIL bit %0d got %b exp %b at %0t", bitidx, sout, cur[bitidx], $time);
      end
    end
  end

  realtime tcap, trise;
  initial begin
    repeat (4) @(posedge pclk);
    @(negedge pclk) rst = 1'b0;
    repeat (200) @(posedge pclk);
    // latency: a word with only bit 0 set
    rst = 1'b1; @(posedge pclk); @(negedge pclk);
    sent.delete(); run_chk = 0;
    rst = 1'b0;
    force word_i = 16'h0001;
    @(posedge pclk); tcap = $realtime;
    @(posedge sout); trise = $realtime;
    checks++;
    if (trise - tcap != 312.5) begin
      failures++; $display("FAIL latency %0t", trise - tcap);
    end
    release word_i;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
