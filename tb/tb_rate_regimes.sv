`timescale 1ps/1ps
// tb_rate_regimes: the two count-rate regimes of the published bench test,
// run on the TDC at its default sizes. An 80 MHz pulse generator (7 ns wide
// pulses) feeds four stop channels in parallel; the host reads continuously.
//
// Each regime is one run (trigger ... end pulse).
// Regime (i): a burst of 500 pulses (6.2 us), fewer than the 512 words a
// channel register holds: every stop must be recorded, i.e. 80 MWords/s per
// channel, with no loss.
// Regime (ii): a 60 us train, far beyond the channel registers: the
// multiplexer (16.4 MWords/s) sets the pace, and the recorded stops per
// channel, counted over the steady part of the train by their time stamps,
// must come to 16.4 / 4 = 4.1 MWords/s each (within 3 %).
// Every word is also matched, in order, against the generated stop instants.
module tb_rate_regimes;
  import tdc_pkg::*;
  localparam int unsigned NUSED = 4, T0 = 120, TREF = 1920, TCLK = 30480;
  localparam longint PERIOD = 104 * T0;           // 12.48 ns: 80.1 MHz
  localparam int unsigned N_I = 500, N_II = 4800; // pulses per channel

  logic ref_clk = 1'b0, clk = 1'b0, rst_ref = 1'b0, rst = 1'b1;
  logic [15:0] taps;
  logic [15:0] stop = '0;
  logic trigger = 1'b0, end_pulse = 1'b0, run;
  logic [16:0] stop_lost;
  logic host_avail, host_rd_valid, host_rd_last, mux_stalled;
  logic [8:0] host_words;
  logic [31:0] host_rd_data, regs_sent;

  always #(TREF / 2) ref_clk = ~ref_clk;
  always #(TCLK / 2) clk = ~clk;

  dll_delay_line u_dll (.ref_clk(ref_clk), .taps(taps));

  tdc_top dut (
    .ref_clk(ref_clk), .rst_ref(rst_ref), .taps(taps), .stop(stop), .trigger(trigger), .end_pulse(end_pulse),
    .run(run), .stop_lost(stop_lost), .clk(clk), .rst(rst), .host_avail(host_avail), .host_words(host_words),
    .host_rd_en(1'b1), .host_rd_valid(host_rd_valid), .host_rd_data(host_rd_data),
    .host_rd_last(host_rd_last), .regs_sent(regs_sent), .mux_stalled(mux_stalled));

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s at %0t", what, $time); end
  endtask

  longint t_rel;
  longint ev_t [NUSED][$];
  int unsigned n_lost = 0, n_unmatched = 0;
  // recorded stops per channel inside a time window [win_lo, win_hi)
  longint win_lo = 0, win_hi = 0;
  int unsigned in_win [NUSED];
  int unsigned rec [NUSED];

  always @(posedge ref_clk) if (!rst_ref) n_lost += $countones(stop_lost);

  always @(posedge clk) if (host_rd_valid && !rst) begin
    tdc_word_t w;
    bit found;
    longint t;
    w = tdc_word_t'(host_rd_data);
    if (!w.marker && w.channel < NUSED) begin
      found = 1'b0;
      while (ev_t[w.channel].size() != 0 && !found) begin
        t = ev_t[w.channel].pop_front();
        if (TIME_BITS'((t - t_rel) / T0) == w.time_code) found = 1'b1;
      end
      if (!found) n_unmatched++;
      else begin
        rec[w.channel]++;
        if (t >= win_lo && t < win_hi) in_win[w.channel]++;
      end
    end
  end

  task automatic train(input longint start, input int unsigned n);
    for (int c = 0; c < NUSED; c++) for (int i = 0; i < n; i++) ev_t[c].push_back(start + i * PERIOD + c * 11 * T0);
    for (int c = 0; c < NUSED; c++) begin
      fork
        automatic int cc = c;
        begin
          #(start + cc * 11 * T0 - longint'($time));
          for (int i = 0; i < n; i++) begin
            stop[cc] = 1'b1;
            #(7000);
            stop[cc] = 1'b0;
            #(PERIOD - 7000);
          end
        end
      join_none
    end
  endtask

  function automatic longint on_grid(input longint t);
    return t_rel + ((t - t_rel) / T0) * T0 + T0 / 2;
  endfunction

  initial begin
    longint t0i, t_trig;
    int unsigned wait_cyc, lost0;
    for (int c = 0; c < NUSED; c++) begin in_win[c] = 0; rec[c] = 0; end
    @(posedge ref_clk); rst_ref <= 1'b1;
    repeat (40) @(posedge ref_clk);
    rst <= 1'b0; rst_ref <= 1'b0;
    t_rel = longint'($time);
    repeat (20) @(posedge ref_clk);
    // ---- regime (i): one run --------------------------------------------
    t_trig = on_grid(longint'($time) + 3000);
    #(t_trig - longint'($time)); trigger = 1'b1; #(7000); trigger = 1'b0;
    #(20_000);
    t0i = on_grid(longint'($time) + 2000);
    train(t0i, N_I);
    #(longint'(N_I) * PERIOD + 20_000);
    wait_cyc = 0;
    while (!(&dut.ch_empty) && wait_cyc < 100_000) begin @(posedge clk); wait_cyc++; end
    end_pulse = 1'b1; #(7000); end_pulse = 1'b0;
    repeat (600) @(posedge clk);
    for (int c = 0; c < NUSED; c++)
      check(rec[c] == N_I, $sformatf("regime (i): channel %0d recorded %0d of %0d", c, rec[c], N_I));
    check(n_lost == 0, "regime (i): no stop lost");
    $display("regime (i): %0d stops per channel in %0.2f us recorded (%0.1f MWords/s per channel)",
             N_I, real'(N_I) * PERIOD / 1.0e6, 1.0e6 / real'(PERIOD));

    // ---- regime (ii): a second run ----------------------------------------
    lost0 = n_lost;
    t_trig = on_grid(longint'($time) + 3000);
    #(t_trig - longint'($time)); trigger = 1'b1; #(7000); trigger = 1'b0;
    #(20_000);
    t0i = on_grid(longint'($time) + 2000);
    win_lo = t0i + 20_000_000;                      // steady state: from 20 us
    win_hi = t0i + longint'(N_II) * PERIOD - 2_000_000;
    train(t0i, N_II);
    #(longint'(N_II) * PERIOD + 20_000);
    wait_cyc = 0;
    while (!(&dut.ch_empty) && wait_cyc < 100_000) begin @(posedge clk); wait_cyc++; end
    end_pulse = 1'b1; #(7000); end_pulse = 1'b0;
    repeat (3000) @(posedge clk);
    begin
      real us, tot;
      us = real'(win_hi - win_lo) / 1.0e6;
      tot = 0.0;
      for (int c = 0; c < NUSED; c++) begin
        real r;
        r = real'(in_win[c]) / us;
        tot += r;
        $display("regime (ii): channel %0d %0.3f MWords/s", c, r);
        check(r > 4.1 * 0.97 && r < 4.1 * 1.03, $sformatf("regime (ii): channel %0d rate %0.3f", c, r));
      end
      $display("regime (ii): total %0.2f MWords/s", tot);
      check(tot > 16.4 * 0.98 && tot < 16.4 * 1.02, "regime (ii): total rate is the multiplexer rate");
    end
    check(n_lost > lost0, "regime (ii): stops lost while channel registers are full");
    check(n_unmatched == 0, $sformatf("%0d words without a matching stop", n_unmatched));
    check(!host_avail, "host read everything");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(2_000_000_000);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
