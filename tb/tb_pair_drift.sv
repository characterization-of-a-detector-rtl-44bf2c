`timescale 1ps/1ps
// tb_pair_drift: the published two-channel drift check. Pulse pairs with a
// fixed 45 ns interval go into stop channels 0 and 1 of the TDC at its default
// sizes, first 200 pairs at 4 MHz, then 100 pairs at 0.4 MHz. Each pair starts
// at a random sub-step phase. 45 ns is exactly 375 steps of t0 = 120 ps, so an
// ideal sliding-scale coder must give every pair a difference of 375 steps at
// both rates: the drift between the two rates must be zero. Every word is also
// checked against the code computed from its stop instant, per channel and in
// order, and no stop may be lost (8 MWords/s at most against 16.4 drained).
module tb_pair_drift;
  import tdc_pkg::*;
  localparam int unsigned T0 = 120, TREF = 1920, TCLK = 30480;
  localparam longint DELTA = 45_000;
  localparam int unsigned N_FAST = 200, N_SLOW = 100;

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
  longint exp_t[2][$];
  logic [TIME_BITS-1:0] codes[2][$];
  int unsigned n_lost = 0, n_bad_code = 0, n_unexpected = 0;

  always @(posedge ref_clk) if (!rst_ref) n_lost += $countones(stop_lost);

  always @(posedge clk) if (host_rd_valid && !rst) begin
    tdc_word_t w;
    longint t;
    w = tdc_word_t'(host_rd_data);
    if (!w.marker && w.channel < 2) begin
      if (exp_t[w.channel].size() == 0) n_unexpected++;
      else begin
        t = exp_t[w.channel].pop_front();
        if (w.time_code != TIME_BITS'((t - t_rel) / T0)) n_bad_code++;
        codes[w.channel].push_back(w.time_code);
      end
    end
  end

  task automatic pairs(input int unsigned n, input longint period);
    longint t0;
    for (int i = 0; i < n; i++) begin
      #($urandom_range(0, T0 - 1));
      t0 = longint'($time);
      exp_t[0].push_back(t0);
      exp_t[1].push_back(t0 + DELTA);
      stop[0] = 1'b1; #(7000); stop[0] = 1'b0; #(DELTA - 7000);
      stop[1] = 1'b1; #(7000); stop[1] = 1'b0;
      #(period - DELTA - 7000 - T0);
    end
  endtask

  // Mean and spread of the coded interval over pairs [from, to).
  task automatic stats(input int unsigned from, input int unsigned to, output real mean, output int unsigned off);
    longint sum;
    logic [TIME_BITS-1:0] d;
    sum = 0; off = 0;
    for (int unsigned i = from; i < to; i++) begin
      d = codes[1][i] - codes[0][i];
      sum += longint'(d);
      if (d != TIME_BITS'(DELTA / T0)) off++;
    end
    mean = real'(sum) / real'(to - from);
  endtask

  initial begin
    real m_fast, m_slow;
    int unsigned off_fast, off_slow;
    @(posedge ref_clk); rst_ref <= 1'b1;
    repeat (40) @(posedge ref_clk);
    rst <= 1'b0; rst_ref <= 1'b0;
    t_rel = longint'($time);
    repeat (20) @(posedge ref_clk);
    trigger = 1'b1; #(7000); trigger = 1'b0;
    #(20_000);
    pairs(N_FAST, 250_000);
    pairs(N_SLOW, 2_500_000);
    end_pulse = 1'b1; #(7000); end_pulse = 1'b0;
    repeat (2000) @(posedge clk);
    check(codes[0].size() == N_FAST + N_SLOW && codes[1].size() == N_FAST + N_SLOW,
          $sformatf("%0d and %0d stops recorded", codes[0].size(), codes[1].size()));
    check(n_lost == 0, "no stop lost");
    check(n_unexpected == 0, "no unexpected word");
    check(n_bad_code == 0, $sformatf("%0d codes differ from the stop instants", n_bad_code));
    if (codes[0].size() == N_FAST + N_SLOW && codes[1].size() == N_FAST + N_SLOW) begin
      stats(0, N_FAST, m_fast, off_fast);
      stats(N_FAST, N_FAST + N_SLOW, m_slow, off_slow);
      $display("45 ns interval: mean %0.3f t0 at 4 MHz, %0.3f t0 at 0.4 MHz, drift %0.1f ps",
               m_fast, m_slow, (m_fast - m_slow) * T0);
      check(off_fast == 0, "every pair at 4 MHz codes 375 steps");
      check(off_slow == 0, "every pair at 0.4 MHz codes 375 steps");
      check(m_fast == m_slow, "no drift between the two rates");
    end else failures++;
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
