// tb_qkd_timing_top: end-to-end run of the server timing FPGA at its default
// size (64 users), with a model of the optics around it.
//
// Model: every rising edge of laser_o[u] sends a photon to user u and back;
// it reaches the APDs D_u later, where D_u is the round trip of the user's
// fibre (4.9 ns per metre, distances 5.8, 9.9, 2.9 and 7.7 km as in the
// four-user field test) taken modulo the TDM frame, which is all that the
// periodic timing sees. Each gate strobe opens an APD gate GATE_OFS later;
// a photon within +-WIN of that instant clicks one of the two APDs. The
// testbench also plays the control program: it sets the users' timing from
// their distances, watches which slots click, and when a fibre drifts it
// searches coarse and fine settings until the user's clicks come back (the
// path length compensation). Checks: every record has the right slot, click
// and basis (the basis is read back from the PM code at the gate), each
// aligned user clicks on its gates, drifted users are recovered (300 ps and
// -1.4 ns drifts, a 5.2 ns jump, and a 28 ns drift tracked in 4 ns steps, the
// sizes seen in the field over 100 minutes and 100 hours), a user
// leaving raises the others' laser rate, a slow host drops records and the
// counter shows it, and with all 64 users on each laser fires once per frame
// at its own position. Each mechanism must occur at least once.
`timescale 1ps/100fs
module tb_qkd_timing_top;
  import qkd_pkg::*;
  localparam int N = N_USERS_DEF;
  localparam real GATE_OFS = 3000.0;   // APD gate after the gate strobe
  localparam real WIN      = 100.0;    // half width of the detection window
  localparam real PIPE     = 20312.5;  // restart edge to bit 0 of word 0
  localparam logic [7:0] CODE0 = 8'h40, CODE1 = 8'hc0;

  logic ref_clk = 1'b0, rst = 1'b1;
  logic pclk, locked;
  logic we = 1'b0;
  logic [ADDR_W-1:0] addr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [TEMP_W-1:0] laser_temp [N_LASERS];
  logic [N-1:0] ser_o, laser_o;
  logic gate_o;
  logic [1:0] apd_click = '0;
  logic qrng = 1'b0;
  logic [7:0] pm_b1, pm_b2;
  logic rec_valid, rec_ready = 1'b1;
  raw_rec_t rec;
  logic [15:0] drop_count;

  qkd_timing_top dut (
    .ref_clk, .rst, .pclk_o(pclk), .locked_o(locked), .we, .addr, .wdata, .rdata,
    .laser_temp_i(laser_temp), .ser_o, .ser_loop_i(ser_o), .laser_o, .gate_o, .apd_click_i(apd_click),
    .qrng_i(qrng), .pm_b1_code(pm_b1), .pm_b2_code(pm_b2), .rec_valid, .rec,
    .rec_ready, .drop_count
  );

  always #5000 ref_clk = ~ref_clk;
  always @(negedge pclk) qrng <= 1'($urandom);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- optics model ----------------
  real dist_m [4] = '{5800.0, 9900.0, 2900.0, 7700.0};
  real drift [4]  = '{0.0, 0.0, 0.0, 0.0};
  real frame_ps;                       // laser period in ps
  bit  model_on = 0;
  real arr_t [$];
  int  arr_u [$];
  real last_fire [N];
  int  fires [N];

  function automatic real d_of(int u);
    real rt = 2.0 * dist_m[u] * 4900.0 + drift[u];   // ps
    return rt - frame_ps * $floor(rt / frame_ps);
  endfunction

  for (genvar u = 0; u < N; u++) begin : g_fire
    always @(posedge laser_o[u]) begin
      last_fire[u] = $realtime;
      fires[u]++;
      if (model_on && u < 4) begin
        arr_t.push_back($realtime + d_of(u));
        arr_u.push_back(u);
      end
    end
  end

  // gate bookkeeping, indexed by gate number since reset
  int  num_slots_m = 1;
  int  gate_no = 0, slot_m = 0;
  int  g_slot [int];
  bit  g_click [int];
  bit  g_basis [int];
  bit  g_bknown [int];   // PM codes differ, so the basis can be read back
  bit  codes_set = 0;
  int  g_user [int];
  int  click_cnt [4];
  int  slot_wraps = 0, b1_gates = 0, b2_gates = 0;
  logic [N-1:0] pol_m = '0;
  real tg;
  bit  transient = 0;   // timing being reprogrammed: stray photons possible

  always @(posedge gate_o) tg = $realtime + GATE_OFS;
  // the APD answers in the clock after the gate strobe
  logic [1:0] click_next = 2'b00;
  always @(negedge pclk) begin
    apd_click <= click_next;
    click_next = 2'b00;
    if (gate_o) begin
      automatic int hit = -1;
      // drop photons that arrived before this gate's window
      while (arr_t.size() > 0 && arr_t[0] < tg - WIN - frame_ps) begin
        void'(arr_t.pop_front()); void'(arr_u.pop_front());
      end
      for (int i = 0; i < arr_t.size(); i++)
        if (arr_t[i] >= tg - WIN && arr_t[i] <= tg + WIN) hit = arr_u[i];
      g_slot[gate_no] = slot_m;
      g_click[gate_no] = (hit >= 0);
      g_user[gate_no] = transient ? -2 : hit;
      g_bknown[gate_no] = codes_set;
      if (pol_m[slot_m]) begin g_basis[gate_no] = (pm_b2 == CODE1); b2_gates++; end
      else               begin g_basis[gate_no] = (pm_b1 == CODE1); b1_gates++; end
      if (hit >= 0) begin
        click_next = $urandom_range(0, 1) ? 2'b01 : 2'b10;
        click_cnt[hit]++;
      end
      gate_no++;
      if (slot_m + 1 >= num_slots_m) begin slot_m = 0; slot_wraps++; end
      else slot_m++;
    end
  end

  // record checker
  bit check_recs = 1;
  int recs_ok = 0;
  always @(posedge pclk) begin
    if (rec_valid && rec_ready && check_recs) begin
      automatic int s = int'(rec.seq);
      if (g_slot.exists(s)) begin
        checks++;
        if (int'(rec.slot) != g_slot[s] || (rec.click != 2'b00) != g_click[s] ||
            (g_bknown[s] && rec.basis != g_basis[s]) ||
            (g_click[s] && g_user[s] != -2 && g_user[s] != g_slot[s])) begin
          failures++;
          $display("FAIL record seq %0d slot %0d click %b basis %b, expected slot %0d click %b basis %b user %0d",
                   s, rec.slot, rec.click, rec.basis, g_slot[s], g_click[s], g_basis[s], g_user[s]);
        end else recs_ok++;
      end
    end
  end

  // ---------------- control program ----------------
  task automatic wr(logic [ADDR_W-1:0] a, logic [31:0] d);
    @(negedge pclk) we = 1'b1; addr = a; wdata = d;
    @(negedge pclk) we = 1'b0;
  endtask
  task automatic wr_user(int u, int r, logic [31:0] d);
    wr(ADDR_W'(9'h100 | (u << 2) | r), d);
  endtask

  real t_restart;
  int  coarse_m [4], fine_m [4];
  int  gate_phase_m = 2, pm_phase_m = 0;
  int  n_restart = 0, n_fine_loads = 0, n_coarse_moves = 0, n_comp = 0, n_rate = 0;
  int  n_misaligned = 0;

  task automatic do_restart();
    @(negedge pclk) we = 1'b1; addr = A_CTRL; wdata = 1;
    @(posedge pclk);               // write edge
    @(negedge pclk) we = 1'b0;
    @(posedge pclk) t_restart = $realtime;   // counters restart here
    slot_m = 0; n_restart++;
    arr_t.delete(); arr_u.delete();
  endtask

  // gate instant of slot s, relative to the restart edge
  function automatic real tgate(int s);
    return real'(s * 10 + gate_phase_m + 1) * 10000.0 + GATE_OFS;
  endfunction

  // nominal timing of user u in slot s from its distance (no drift known)
  task automatic place(int u, int s);
    real rt, target;
    rt = 2.0 * dist_m[u] * 4900.0;
    target = tgate(s) - rt - PIPE;
    target = target - frame_ps * $floor(target / frame_ps);
    coarse_m[u] = int'($floor(target / 625.0));
    fine_m[u] = int'($floor((target - coarse_m[u] * 625.0) / 50.0 + 0.5));
    wr_user(u, R_COARSE, coarse_m[u]);
    wr_user(u, R_FINE, fine_m[u]);
    n_fine_loads++;
  endtask

  // clicks of user u over n frames
  task automatic clicks_over(int u, int nfr, output int c);
    int c0 = click_cnt[u];
    repeat (nfr * int'(frame_ps / 10000.0)) @(posedge pclk);
    c = click_cnt[u] - c0;
  endtask

  // path length compensation of user u: search coarse around the current
  // value, all fine steps, until the user clicks on every gate of its slot
  task automatic compensate(int u);
    int c0 = coarse_m[u], c, f, cl;
    bit found = 0;
    n_comp++;
    for (int dc = 0; dc <= 3 && !found; dc++) begin
      for (int sg = 0; sg < 2 && !found; sg++) begin
        if (dc == 0 && sg == 1) continue;
        c = sg ? c0 - dc : c0 + dc;
        if (c < 0) continue;
        wr_user(u, R_COARSE, c);
        for (f = 0; f <= FINE_MAX && !found; f++) begin
          wr_user(u, R_FINE, f);
          n_fine_loads++;
          repeat (14) @(posedge pclk);          // delay chain reload
          clicks_over(u, 2, cl);
          if (cl >= 2) begin
            found = 1;
            if (c != coarse_m[u]) n_coarse_moves++;
            coarse_m[u] = c; fine_m[u] = f;
          end
        end
      end
    end
    check(found, $sformatf("compensation of user %0d", u + 1));
  endtask

  // wide search for drifts of several ns: move the total delay away from
  // the last good setting in 50 ps steps, waiting one frame for a coarse
  // change to take effect and counting one frame per try. With pref = 0
  // both sides are tried alternately; with pref = +1/-1 that side is swept
  // first (a drift that keeps going the same way).
  task automatic track(int u, int max_k, int pref);
    real p0, p;
    int c, f, cl, sgn;
    bit found = 0;
    p0 = coarse_m[u] * 625.0 + fine_m[u] * 50.0;
    n_comp++;
    for (int i = 0; i < 2 * max_k && !found; i++) begin
      if (pref == 0) sgn = (i % 2) ? -1 : 1;
      else           sgn = (i < max_k) ? pref : -pref;
      p = p0 + sgn * ((pref == 0) ? i / 2 + 1 : i % max_k + 1) * 50.0;
      p = p - frame_ps * $floor(p / frame_ps);
      c = int'($floor(p / 625.0));
      f = int'($floor((p - c * 625.0) / 50.0 + 0.5));
      wr_user(u, R_COARSE, c);
      wr_user(u, R_FINE, f);
      n_fine_loads++;
      repeat (54) @(posedge pclk);   // fine reload and the next laser period
      clicks_over(u, 1, cl);
      if (cl >= 1) begin
        found = 1;
        if (c != coarse_m[u]) n_coarse_moves++;
        coarse_m[u] = c; fine_m[u] = f;
      end
    end
    check(found, $sformatf("wide compensation of user %0d", u + 1));
  endtask

  int cl, cl2, c3_0, f3_0;
  initial begin
    for (int u = 0; u < N; u++) fires[u] = 0;
    for (int u = 0; u < 4; u++) click_cnt[u] = 0;
    for (int l = 0; l < N_LASERS; l++) laser_temp[l] = TEMP_W'(16'h1000 + l);
    frame_ps = 400000.0;
    repeat (3) @(posedge ref_clk);
    rst = 1'b0;
    wait (locked);
    repeat (4) @(posedge pclk);

    // laser temperature monitoring through the register file
    @(negedge pclk) addr = A_TEMP_BASE + 3;
    @(negedge pclk) check(rdata == 32'h1003, "laser 4 temperature readable");
    // ---- four-user operation, as in the field test ----
    wr(A_LASER_PER, 40);          // 2.5 MHz per laser
    wr(A_GATE_PER, 10);           // 10 MHz gates
    wr(A_GATE_PHASE, gate_phase_m);
    wr(A_PM_PHASE, pm_phase_m);
    wr(A_NUM_SLOTS, 4);  num_slots_m = 4;
    wr(A_PM_CODE0, CODE0); wr(A_PM_CODE1, CODE1);
    pol_m = '0; pol_m[1] = 1'b1; pol_m[3] = 1'b1;   // users 2 and 4 horizontal
    for (int u = 0; u < 4; u++) begin
      wr_user(u, R_POL, pol_m[u]);
      place(u, u);
      wr_user(u, R_ENABLE, 1);
    end
    model_on = 1;
    do_restart();
    repeat (45) @(posedge pclk);   // every slot strobed with codes and map
    codes_set = 1;
    repeat (20) @(posedge pclk);
    for (int u = 0; u < 4; u++) begin
      clicks_over(u, 4, cl);
      check(cl >= 4, $sformatf("user %0d clicks after set-up (%0d)", u + 1, cl));
    end

    // ---- drift of user 2 by 300 ps: fine compensation ----
    drift[1] = 300.0;
    clicks_over(1, 1, cl);        // photons already in flight
    clicks_over(1, 3, cl);
    check(cl == 0, "user 2 lost after drift");
    if (cl == 0) n_misaligned++;
    compensate(1);
    clicks_over(1, 4, cl);
    check(cl >= 4, "user 2 recovered");

    // ---- drift of user 4 by -1.4 ns: needs the coarse step too ----
    drift[3] = -1400.0;
    clicks_over(3, 1, cl);
    clicks_over(3, 3, cl);
    check(cl == 0, "user 4 lost after drift");
    if (cl == 0) n_misaligned++;
    compensate(3);
    clicks_over(3, 4, cl);
    check(cl >= 4, "user 4 recovered");
    clicks_over(0, 4, cl); clicks_over(2, 4, cl2);
    check(cl >= 4 && cl2 >= 4, "users 1 and 3 undisturbed");
    c3_0 = coarse_m[2]; f3_0 = fine_m[2];

    // ---- user 3 jumps by 5.2 ns, the largest 100-minute shift ----
    drift[2] = 5200.0;
    clicks_over(2, 1, cl);
    clicks_over(2, 3, cl);
    check(cl == 0, "user 3 lost after 5.2 ns drift");
    if (cl == 0) n_misaligned++;
    track(2, 110, 0);
    clicks_over(2, 4, cl);
    check(cl >= 4, "user 3 recovered from 5.2 ns");
    check(coarse_m[2] * 625.0 + fine_m[2] * 50.0 - (c3_0 * 625.0 + f3_0 * 50.0) > -5300.0 &&
          coarse_m[2] * 625.0 + fine_m[2] * 50.0 - (c3_0 * 625.0 + f3_0 * 50.0) < -5100.0,
          "user 3 fires 5.2 ns earlier");

    // ---- user 2 drifts by 28 ns in 4 ns steps, tracked each time ----
    for (int k = 1; k <= 7; k++) begin
      drift[1] = 300.0 + 4000.0 * k;
      clicks_over(1, 1, cl);
      clicks_over(1, 2, cl);
      check(cl == 0, $sformatf("user 2 lost at drift step %0d", k));
      if (cl == 0) n_misaligned++;
      track(1, 90, -1);
      clicks_over(1, 4, cl);
      check(cl >= 4, $sformatf("user 2 tracked at %0d ns", 4 * k));
    end
    clicks_over(0, 4, cl); clicks_over(3, 4, cl2);
    check(cl >= 4 && cl2 >= 4, "users 1 and 4 undisturbed by tracking");

    // ---- slow host: records overwritten and counted ----
    begin
      int d0;
      d0 = int'(drop_count);
      @(posedge gate_o);
      @(negedge pclk) rec_ready = 1'b0;
      repeat (6) @(posedge gate_o);
      @(negedge pclk) rec_ready = 1'b1; check_recs = 0;
      @(negedge pclk) check_recs = 1;
      check(int'(drop_count) - d0 == 5, $sformatf("drops counted (%0d)", int'(drop_count) - d0));
    end

    // ---- user 4 leaves: three users at 1/3 of 10 MHz ----
    transient = 1;
    wr_user(3, R_ENABLE, 0);
    frame_ps = 300000.0;
    wr(A_LASER_PER, 30);
    wr(A_NUM_SLOTS, 3); num_slots_m = 3;
    for (int u = 0; u < 3; u++) place(u, u);
    drift[1] = 0.0; drift[2] = 0.0;   // fibres back at their nominal length
    do_restart();
    n_rate++;
    repeat (40) @(posedge pclk);
    transient = 0;
    begin
      real t1;
      @(posedge laser_o[0]) t1 = $realtime;
      @(posedge laser_o[0]);
      check($realtime - t1 == 300000.0, "laser rate 3.33 MHz");
    end
    for (int u = 0; u < 3; u++) begin
      clicks_over(u, 4, cl);
      check(cl >= 4, $sformatf("user %0d clicks at the higher rate", u + 1));
    end
    clicks_over(3, 2, cl);
    check(cl == 0, "user 4 silent after leaving");

    // ---- all 64 users: one trigger per 6.4 us frame each, 100 ns apart ----
    model_on = 0;
    wr(A_LASER_PER, 640);
    wr(A_NUM_SLOTS, 64); num_slots_m = 64;
    frame_ps = 6400000.0;
    for (int u = 0; u < N; u++) begin
      wr_user(u, R_COARSE, u * 160);
      wr_user(u, R_FINE, u % 23);
      wr_user(u, R_ENABLE, 1);
    end
    do_restart();
    repeat (700) @(posedge pclk);
    for (int u = 0; u < N; u++) fires[u] = 0;
    repeat (640) @(posedge pclk);
    for (int u = 0; u < N; u++) begin
      real ph, ex;
      ph = last_fire[u] - t_restart;
      ph = ph - frame_ps * $floor(ph / frame_ps);
      ex = PIPE + u * 100000.0 + (u % 23) * 50.0;
      ex = ex - frame_ps * $floor(ex / frame_ps);
      check(fires[u] == 1 && ph == ex, $sformatf("user %0d of 64: %0d fires, phase %f exp %f", u + 1, fires[u], ph, ex));
    end
    check(slot_wraps > 0, "slot counter wrapped");

    // ---- every mechanism seen ----
    $display("mechanisms: restarts=%0d fine_loads=%0d coarse_moves=%0d compensations=%0d misaligned=%0d rate_changes=%0d drops=%0d slot_wraps=%0d pm_b1_gates=%0d pm_b2_gates=%0d records_ok=%0d",
             n_restart, n_fine_loads, n_coarse_moves, n_comp, n_misaligned, n_rate,
             drop_count, slot_wraps, b1_gates, b2_gates, recs_ok);
    check(n_restart > 0, "restart happened");
    check(n_fine_loads > 0, "fine delay reloaded");
    check(n_coarse_moves > 0, "coarse step moved");
    check(n_comp > 0 && n_misaligned > 0, "misalignment and compensation");
    check(n_rate > 0, "laser rate changed");
    check(drop_count > 0, "record overflow");
    check(b1_gates > 0 && b2_gates > 0, "both PMs used");
    check(recs_ok > 100, "records checked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
