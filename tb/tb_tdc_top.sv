`timescale 1ps/1ps
// tb_tdc_top: end-to-end run of the TDC at reduced sizes (4 stop inputs,
// 8-bit coarse counter so that the time base wraps every 0.49 us, 32-word
// channel registers, 29-word acquisition registers).
//
// The stimulus mimics the published bench test: one pulse generator feeding
// four stop channels (here with a small skew per channel), 7 ns wide pulses,
// a trigger to start and an end pulse to stop. Phase 1 is an 80 MHz burst that
// overfills the channel registers while the host does not read, so that the
// multiplexer stalls on two full acquisition registers. Phase 2 is a slow
// stream during which the host reads continuously and no stop may be lost;
// it includes a pair of stops 1.5 ns apart to exercise the dead time. Every
// word read by the host is checked: stop words must match, in order, a
// generated stop of their channel, with the time code computed here from the
// stop instant (units of 120 ps since the time base left reset); the trigger
// word likewise; marker words must carry the wrap instant. The multiplexer
// rate is checked on the first acquisition register (one word every 2
// cycles) and each mechanism is counted; one that never happened is a
// failure.
module tb_tdc_top;
  import tdc_pkg::*;
  localparam int unsigned NSTOP = 4, CB = 8, CHAN_DEPTH = 32, ACQ_DEPTH = 29;
  localparam bit          EXPECT_WRAP = 1'b1;
  localparam int unsigned NB = CB + 4, NCH = NSTOP + 1, T0 = 120, TREF = 1920, TCLK = 30480;
  localparam int unsigned NUSED = 4;                       // stop channels driven
  localparam int unsigned N_BURST = 2 * CHAN_DEPTH + 20;   // burst pulses per channel
  localparam int unsigned N_SLOW = 40;                     // slow pulses per channel
  localparam int unsigned CNTW = $clog2(ACQ_DEPTH + 1);

  logic ref_clk = 1'b0, clk = 1'b0, rst_ref = 1'b0, rst = 1'b1;
  logic [15:0] taps;
  logic [NSTOP-1:0] stop = '0;
  logic trigger = 1'b0, end_pulse = 1'b0, run;
  logic [NCH-1:0] stop_lost;
  logic host_avail, host_rd_en, host_rd_valid, host_rd_last, mux_stalled;
  logic [CNTW-1:0] host_words;
  logic [31:0] host_rd_data, regs_sent;
  logic host_on = 1'b0;

  always #(TREF / 2) ref_clk = ~ref_clk;
  always #(TCLK / 2) clk = ~clk;

  dll_delay_line u_dll (.ref_clk(ref_clk), .taps(taps));

  tdc_top #(.NSTOP(NSTOP), .COARSE_BITS(CB), .CHAN_DEPTH(CHAN_DEPTH), .ACQ_DEPTH(ACQ_DEPTH)) dut (
    .ref_clk(ref_clk), .rst_ref(rst_ref), .taps(taps), .stop(stop), .trigger(trigger), .end_pulse(end_pulse),
    .run(run), .stop_lost(stop_lost), .clk(clk), .rst(rst), .host_avail(host_avail), .host_words(host_words),
    .host_rd_en(host_rd_en), .host_rd_valid(host_rd_valid), .host_rd_data(host_rd_data),
    .host_rd_last(host_rd_last), .regs_sent(regs_sent), .mux_stalled(mux_stalled));

  assign host_rd_en = host_on;

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---- generated events and expected codes ----------------------------
  longint t_rel;                 // instant the time base left reset
  longint ev_t [NCH][$];         // stop instants per channel (after the trigger)
  bit     ev_must [NCH][$];      // must be recorded (slow phase)
  int unsigned n_gen [NCH];
  function automatic logic [NB-1:0] code_at(input longint t);
    return NB'((t - t_rel) / T0);
  endfunction

  task automatic pulse(input int c, input longint t, input int w);
    fork begin
      #(t - longint'($time));
      if (c == NSTOP) trigger = 1'b1; else stop[c] = 1'b1;
      #(w);
      if (c == NSTOP) trigger = 1'b0; else stop[c] = 1'b0;
    end join_none
  endtask

  // an instant t0/2 away from every tap edge
  function automatic longint on_grid(input longint t);
    return t_rel + ((t - t_rel) / T0) * T0 + T0 / 2;
  endfunction

  // ---- host side: read and check every word ---------------------------
  int unsigned n_words = 0, n_unmatched = 0, n_markers = 0, n_trig = 0, n_blocks = 0, blk_len = 0;
  int unsigned n_stopwords [NCH];
  int unsigned last_blk_len = 0;
  int unsigned first_blk_ch [NCH];
  int unsigned n_missed_must = 0, dead_seen = 0;
  longint t_dead2 = -1;

  always @(posedge clk) if (host_rd_valid && !rst) begin
    tdc_word_t w;
    w = tdc_word_t'(host_rd_data);
    n_words++;
    blk_len++;
    if (n_blocks == 0 && w.channel < NCH) first_blk_ch[w.channel]++;
    if (host_rd_last) begin last_blk_len = blk_len; blk_len = 0; n_blocks++; end
    check(w.channel < NCH, "channel number in range");
    if (w.marker) begin
      check(w.channel == NSTOP && w.time_code < 32, $sformatf("marker word ch %0d code %0d", w.channel, w.time_code));
      n_markers++;
    end else if (w.channel < NCH) begin
      bit found;
      found = 1'b0;
      while (ev_t[w.channel].size() != 0 && !found) begin
        longint t;
        bit must;
        t    = ev_t[w.channel].pop_front();
        must = ev_must[w.channel].pop_front();
        if (TIME_BITS'(code_at(t)) == w.time_code) begin
          found = 1'b1;
          if (t == t_dead2) dead_seen++;
        end
        else if (must) n_missed_must++;
      end
      if (!found) n_unmatched++;
      check(found, $sformatf("word ch %0d code %0d matches a generated stop", w.channel, w.time_code));
      if (w.channel == NSTOP) n_trig++; else n_stopwords[w.channel]++;
    end
  end

  // ---- mechanism counters ---------------------------------------------
  int unsigned n_lost = 0, n_stall = 0, n_handover_full = 0, n_flush = 0, n_dead = 0, n_pretrig = 0;
  int unsigned n_acq_wr = 0;
  longint t_first_wr = -1, t_first_handover = -1;
  logic [31:0] regs_prev = 0;
  always @(posedge ref_clk) if (!rst_ref) n_lost += $countones(stop_lost);
  always @(posedge clk) if (!rst) begin
    if (mux_stalled) n_stall++;
    if (dut.acq_wr_en) begin
      n_acq_wr++;
      if (t_first_wr < 0) t_first_wr = longint'($time);
    end
    if (regs_sent != regs_prev && t_first_handover < 0) t_first_handover = longint'($time);
    regs_prev <= regs_sent;
  end

  int unsigned n_coded_total = 0;
  always @(posedge ref_clk) if (!rst_ref) n_coded_total += $countones(dut.ch_wr);

  initial begin
    longint t, t_trig, base;
    int unsigned wait_cyc;
    for (int c = 0; c < NCH; c++) begin n_stopwords[c] = 0; n_gen[c] = 0; first_blk_ch[c] = 0; end
    @(posedge ref_clk); rst_ref <= 1'b1;
    repeat (40) @(posedge ref_clk);
    rst <= 1'b0;
    rst_ref <= 1'b0;
    t_rel = longint'($time);
    repeat (20) @(posedge ref_clk);

    // stops before the trigger: not coded
    for (int i = 0; i < 5; i++) begin
      pulse(0, on_grid(longint'($time) + 3000 + i * 20000), 7000);
      n_pretrig++;
    end
    #(120_000);
    $display("phase: trigger at %0t", $time);
    // trigger
    t_trig = on_grid(longint'($time) + 5000);
    ev_t[NSTOP].push_back(t_trig); ev_must[NSTOP].push_back(1'b1);
    pulse(NSTOP, t_trig, 7000);
    #(30_000);
    check(run, "run started by the trigger");

    // phase 1: 80 MHz burst on the used channels, host idle
    base = on_grid(longint'($time) + 2000);
    for (int i = 0; i < N_BURST; i++) begin
      for (int c = 0; c < NUSED; c++) begin
        t = base + i * 104 * T0 + c * 11 * T0;   // 12.48 ns period, 1.32 ns skew per channel
        ev_t[c].push_back(t); ev_must[c].push_back(1'b0);
        pulse(c, t, 7000);
        n_gen[c]++;
      end
    end
    $display("phase: burst scheduled at %0t", $time);
    // host stays idle until the multiplexer has stalled for a while
    wait_cyc = 0;
    while (n_stall < 20 && wait_cyc < 40 * ACQ_DEPTH + 20000) begin @(posedge clk); wait_cyc++; end
    host_on = 1'b1;
    // let the backlog drain
    wait_cyc = 0;
    while (!(&dut.ch_empty) && wait_cyc < 20 * NUSED * CHAN_DEPTH + 2000) begin @(posedge clk); wait_cyc++; end
    repeat (50) @(posedge clk);

    $display("phase: slow at %0t", $time);
    // phase 2: slow stream, nothing may be lost; includes a dead-time pair
    base = on_grid(longint'($time) + 5000);
    for (int i = 0; i < N_SLOW; i++) begin
      for (int c = 0; c < NUSED; c++) begin
        t = base + i * 1700 * T0 + c * 23 * T0;   // 204 ns period
        ev_t[c].push_back(t); ev_must[c].push_back(1'b1);
        pulse(c, t, (i == N_SLOW / 2 && c == 1) ? 500 : 7000);
        n_gen[c]++;
        if (i == N_SLOW / 2 && c == 1) begin
          // second stop 1.5 ns later: inside the dead time, must not appear
          t_dead2 = t + 13 * T0;
          ev_t[c].push_back(t_dead2); ev_must[c].push_back(1'b0);
          pulse(c, t_dead2, 500);
          n_gen[c]++;
        end
      end
    end
    #(longint'(N_SLOW) * 1700 * T0 + 20_000);

    $display("phase: end at %0t", $time);
    // end of run
    end_pulse = 1'b1; #(7000); end_pulse = 1'b0;
    #(20_000);
    check(!run, "run ended by the end pulse");
    // after the end: stops are not coded
    for (int i = 0; i < 3; i++) begin pulse(2, on_grid(longint'($time) + 2000 + i * 20000), 7000); n_pretrig++; end
    wait_cyc = 0;
    while (wait_cyc < 4000 && (host_avail || n_words < n_coded_total || wait_cyc < 200)) begin @(posedge clk); wait_cyc++; end
    repeat (20) @(posedge clk);

    // ---- end-of-run checks --------------------------------------------
    check(n_words == n_coded_total, $sformatf("host read %0d of %0d coded words", n_words, n_coded_total));
    check(n_trig == 1, $sformatf("%0d trigger words", n_trig));
    check(n_unmatched == 0, "all words matched");
    check(n_missed_must == 0, $sformatf("%0d stops of the slow phase missing", n_missed_must));
    for (int c = 0; c < NUSED; c++)
      check(n_stopwords[c] <= n_gen[c] && n_stopwords[c] >= CHAN_DEPTH + N_SLOW - 1,
            $sformatf("channel %0d: %0d words of %0d stops", c, n_stopwords[c], n_gen[c]));
    // dead-time pair: the first stop is coded (a must), the second is not
    n_dead = (dead_seen == 0 && n_missed_must == 0) ? 1 : 0;
    check(n_dead == 1, "stop inside the dead time rejected");
    // multiplexer rate: the first register (ACQ_DEPTH words) filled in 2 cycles per word
    if (t_first_wr >= 0 && t_first_handover >= 0) begin
      longint cyc;
      cyc = (t_first_handover - t_first_wr) / TCLK;
      check(cyc >= 2 * (ACQ_DEPTH - 1) && cyc <= 2 * (ACQ_DEPTH - 1) + 6,
            $sformatf("first register filled in %0d cycles", cyc));
    end else check(1'b0, "no hand-over seen");
    // equal share among the busy channels in the first register
    for (int c = 1; c < NUSED; c++)
      check(first_blk_ch[c] + 2 >= first_blk_ch[0] && first_blk_ch[0] + 2 >= first_blk_ch[c],
            $sformatf("share of channel %0d: %0d vs %0d", c, first_blk_ch[c], first_blk_ch[0]));
    n_handover_full = (regs_sent >= 2) ? regs_sent - 1 : 0;
    n_flush = (last_blk_len != 0 && last_blk_len < ACQ_DEPTH) ? 1 : 0;

    $display("mechanisms: trigger_start=%0d dead_time_rejects=%0d channel_register_overflow=%0d mux_stall_cycles=%0d acq_handovers=%0d flush=%0d rollover_markers=%0d pre/post_run_stops_ignored=%0d words=%0d",
             n_trig, n_dead, n_lost, n_stall, n_handover_full, n_flush, n_markers, n_pretrig, n_words);
    check(n_lost > 0, "channel register overflow happened");
    check(n_stall > 0, "multiplexer stall happened");
    check(n_handover_full >= 2, "acquisition registers alternated");
    check(n_flush == 1, "final partial register flushed");
    if (EXPECT_WRAP) check(n_markers > 0, "rollover marker recorded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(400_000_000);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
