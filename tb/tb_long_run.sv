`timescale 1ps/1ps
// tb_long_run: a continuous 10 ms run of the TDC at its default sizes, longer
// than the 8.05 ms period of the 26-bit time code. Stop channels 0..3 each get a
// stop every 500 ns, staggered by 125 ns (8 MWords/s together), for 10 ms:
// 80 000 words, which pass through about 157 acquisition registers. The host
// reads continuously. Checks: every stop arrives in order on its channel with
// the exact code floor((t - t_rel) / t0) mod 2^26, none is lost, more than 150
// registers are handed over, and exactly one rollover marker arrives, between
// the stops coded just before and just after the time base wrapped. Counting
// markers thus extends the time code past 26 bits.
module tb_long_run;
  import tdc_pkg::*;
  localparam int unsigned T0 = 120, TREF = 1920, TCLK = 30480, NCH = 4;
  localparam longint PERIOD = 500_000, STAGGER = 125_000, RUN = 64'd10_000_000_000;
  localparam longint WRAP_PS = longint'(T0) << TIME_BITS;

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

  longint t_rel, t_first;
  int unsigned n_rec[NCH];
  int unsigned n_lost = 0, n_bad_code = 0, n_markers = 0, n_late = 0;
  longint t_max_before_marker = 0;

  always @(posedge ref_clk) if (!rst_ref) n_lost += $countones(stop_lost);

  always @(posedge clk) if (host_rd_valid && !rst) begin
    tdc_word_t w;
    longint t;
    w = tdc_word_t'(host_rd_data);
    if (w.marker) begin
      n_markers++;
    end else if (int'(w.channel) < NCH) begin
      t = t_first + longint'(w.channel) * STAGGER + longint'(n_rec[w.channel]) * PERIOD;
      if (w.time_code != TIME_BITS'((t - t_rel) / T0)) n_bad_code++;
      // Order around the wrap: a stop coded before it must not follow the marker.
      if (n_markers == 0 && t > t_max_before_marker) t_max_before_marker = t;
      if (n_markers > 0 && t - t_rel < WRAP_PS - 2000) n_late++;
      n_rec[w.channel]++;
    end
  end

  initial begin
    int unsigned per_ch, total;
    for (int c = 0; c < NCH; c++) n_rec[c] = 0;
    @(posedge ref_clk); rst_ref <= 1'b1;
    repeat (40) @(posedge ref_clk);
    rst <= 1'b0; rst_ref <= 1'b0;
    t_rel = longint'($time);
    repeat (20) @(posedge ref_clk);
    trigger = 1'b1; #(7000); trigger = 1'b0;
    #(20_000);
    // A phase of 1..39 ps past a step keeps every stop off the step boundaries:
    // PERIOD and STAGGER move the phase by multiples of 40 ps only.
    t_first = t_rel + ((longint'($time) - t_rel) / T0 + 1) * T0 + longint'($urandom_range(1, 39));
    #(t_first - longint'($time));
    per_ch = int'(RUN / PERIOD);
    for (int i = 0; i < per_ch; i++) begin
      for (int c = 0; c < NCH; c++) begin
        stop[c] = 1'b1; #(7000); stop[c] = 1'b0; #(STAGGER - 7000);
      end
    end
    #(20_000);
    end_pulse = 1'b1; #(7000); end_pulse = 1'b0;
    repeat (2000) @(posedge clk);
    total = 0;
    for (int c = 0; c < NCH; c++) begin
      check(n_rec[c] == per_ch, $sformatf("channel %0d: %0d of %0d stops recorded", c, n_rec[c], per_ch));
      total += n_rec[c];
    end
    $display("%0d words in %0d acquisition registers, %0d rollover marker(s)", total, regs_sent, n_markers);
    check(n_lost == 0, "no stop lost");
    check(n_bad_code == 0, $sformatf("%0d codes differ from the stop instants", n_bad_code));
    check(regs_sent > 150, "more than 150 acquisition registers handed over");
    check(n_markers == 1, "one rollover marker in 10 ms");
    check(n_late == 0, "no stop coded before the wrap arrives after the marker");
    check(t_max_before_marker - t_rel < WRAP_PS + 2000, "no stop coded after the wrap arrives before the marker");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd20_000_000_000);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
