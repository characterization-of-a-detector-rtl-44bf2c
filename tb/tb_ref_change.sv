`timescale 1ps/1ps
// tb_ref_change: the published option of changing the reference frequency to
// change the step t0. Two converters at default sizes run side by side from the
// same stop train, one with its delay line locked to 260 MHz (t0 = 240 ps),
// one locked to 33.3 MHz (t0 = 1875 ps, near the coarsest published step of
// 1.9 ns). Only the reference clock and the delay of the line change; the
// digital design is the same. 400 stops at 1 MHz go into stop channel 3 of
// both. Each converter's codes are checked against floor((t - t_rel) / t0)
// for its own t0 and reference start, and successive intervals (1 us) must be
// the two integers around 1 us / t0, with a mean that tends to 1 us / t0.
// With a 30 ns reference period the coder's dead time grows to about 90 ns,
// still far below the 1 us stop spacing used here. The end pulse is sampled by
// the reference clock, so it is made 50 ns wide, longer than the 30 ns period.
module tb_ref_change;
  import tdc_pkg::*;
  localparam int NCFG = 2;
  localparam int unsigned T0_OF[NCFG] = '{240, 1875};
  localparam int unsigned TCLK = 30480, N = 400;
  localparam longint PERIOD = 1_000_000;

  logic clk = 1'b0, rst = 1'b1;
  logic [15:0] stop = '0;
  logic trigger = 1'b0, end_pulse = 1'b0;
  always #(TCLK / 2) clk = ~clk;

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s at %0t", what, $time); end
  endtask

  longint t_first;
  longint t_rel[NCFG];
  int unsigned n_rec[NCFG], n_lost[NCFG], n_bad_code[NCFG], n_bad_diff[NCFG];
  longint sum_diff[NCFG];
  bit ready[NCFG];

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int unsigned T0 = T0_OF[g], TREF = 16 * T0_OF[g];
    localparam longint LO = PERIOD / longint'(T0);
    logic ref_clk = 1'b0, rst_ref = 1'b0, run;
    logic [15:0] taps;
    logic [16:0] stop_lost;
    logic host_avail, host_rd_valid, host_rd_last, mux_stalled;
    logic [8:0] host_words;
    logic [31:0] host_rd_data, regs_sent;
    logic [TIME_BITS-1:0] prev_code;

    always #(TREF / 2) ref_clk = ~ref_clk;

    dll_delay_line #(.T0_PS(T0)) u_dll (.ref_clk(ref_clk), .taps(taps));

    tdc_top dut (
      .ref_clk(ref_clk), .rst_ref(rst_ref), .taps(taps), .stop(stop), .trigger(trigger), .end_pulse(end_pulse),
      .run(run), .stop_lost(stop_lost), .clk(clk), .rst(rst), .host_avail(host_avail), .host_words(host_words),
      .host_rd_en(1'b1), .host_rd_valid(host_rd_valid), .host_rd_data(host_rd_data),
      .host_rd_last(host_rd_last), .regs_sent(regs_sent), .mux_stalled(mux_stalled));

    initial begin
      n_rec[g] = 0; n_lost[g] = 0; n_bad_code[g] = 0; n_bad_diff[g] = 0; sum_diff[g] = 0; ready[g] = 1'b0;
      @(posedge ref_clk); rst_ref <= 1'b1;
      repeat (40) @(posedge ref_clk);
      rst_ref <= 1'b0;
      t_rel[g] = longint'($time);
      ready[g] = 1'b1;
    end

    always @(posedge ref_clk) if (!rst_ref && ready[g]) n_lost[g] += $countones(stop_lost);

    always @(posedge clk) if (host_rd_valid && !rst) begin
      tdc_word_t w;
      longint t;
      logic [TIME_BITS-1:0] d;
      w = tdc_word_t'(host_rd_data);
      if (!w.marker && w.channel == 3) begin
        t = t_first + longint'(n_rec[g]) * PERIOD;
        if (w.time_code != TIME_BITS'((t - t_rel[g]) / T0)) n_bad_code[g]++;
        if (n_rec[g] > 0) begin
          d = w.time_code - prev_code;
          if (longint'(d) != LO && longint'(d) != LO + 1) n_bad_diff[g]++;
          sum_diff[g] += longint'(d);
        end
        prev_code = w.time_code;
        n_rec[g]++;
      end
    end
  end

  initial begin
    real mean, ideal;
    wait (ready[0] && ready[1]);
    #(100_000);
    rst = 1'b0;
    #(200_000);
    trigger = 1'b1; #(7000); trigger = 1'b0;
    #(300_000);
    #($urandom_range(0, 1874));
    t_first = longint'($time);
    for (int i = 0; i < N; i++) begin
      stop[3] = 1'b1; #(7000); stop[3] = 1'b0; #(PERIOD - 7000);
    end
    end_pulse = 1'b1; #(50_000); end_pulse = 1'b0;
    repeat (2000) @(posedge clk);
    for (int g = 0; g < NCFG; g++) begin
      ideal = real'(PERIOD) / real'(T0_OF[g]);
      mean = n_rec[g] > 1 ? real'(sum_diff[g]) / real'(n_rec[g] - 1) : 0.0;
      $display("t0 = %0d ps: %0d stops, mean interval %0.4f t0 (ideal %0.4f)", T0_OF[g], n_rec[g], mean, ideal);
      check(n_rec[g] == N, $sformatf("t0 %0d: %0d of %0d stops recorded", T0_OF[g], n_rec[g], N));
      check(n_lost[g] == 0, $sformatf("t0 %0d: no stop lost", T0_OF[g]));
      check(n_bad_code[g] == 0, $sformatf("t0 %0d: %0d codes differ from the stop instants", T0_OF[g], n_bad_code[g]));
      check(n_bad_diff[g] == 0, $sformatf("t0 %0d: intervals are the two integers around 1 us / t0", T0_OF[g]));
      check(mean > ideal - 0.01 && mean < ideal + 0.01, $sformatf("t0 %0d: mean interval near 1 us / t0", T0_OF[g]));
    end
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
