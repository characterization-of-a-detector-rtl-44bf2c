`timescale 1ps/1ps
// tb_interval_20mhz: the published linearity check. Pulses at 20 MHz go into
// one stop channel of the TDC at its default sizes for 100 us (2000 pulses);
// the host reads continuously. 50 ns is 416.67 steps of t0 = 120 ps, so with
// sliding-scale coding each coded interval (difference of successive time
// codes) must be 416 or 417, and their mean must tend to 416.67: no offset,
// no integral non-linearity. The channel register absorbs the 3.6 MWords/s by
// which 20 MWords/s exceeds the multiplexer rate, so no stop is lost in
// 100 us. Every word is also checked against the code computed from its
// stop instant.
module tb_interval_20mhz;
  import tdc_pkg::*;
  localparam int unsigned T0 = 120, TREF = 1920, TCLK = 30480, N = 2000;
  localparam longint PERIOD = 50_000;

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
  int unsigned n_rec = 0, n_lost = 0, n_bad_code = 0, n_bad_diff = 0;
  longint sum_diff = 0;
  logic [TIME_BITS-1:0] prev_code;

  always @(posedge ref_clk) if (!rst_ref) n_lost += $countones(stop_lost);

  always @(posedge clk) if (host_rd_valid && !rst) begin
    tdc_word_t w;
    longint t;
    logic [TIME_BITS-1:0] d;
    w = tdc_word_t'(host_rd_data);
    if (!w.marker && w.channel == 3) begin
      t = t_first + longint'(n_rec) * PERIOD;
      if (w.time_code != TIME_BITS'((t - t_rel) / T0)) n_bad_code++;
      if (n_rec > 0) begin
        d = w.time_code - prev_code;
        if (d != 416 && d != 417) n_bad_diff++;
        sum_diff += longint'(d);
      end
      prev_code = w.time_code;
      n_rec++;
    end
  end

  initial begin
    real mean;
    @(posedge ref_clk); rst_ref <= 1'b1;
    repeat (40) @(posedge ref_clk);
    rst <= 1'b0; rst_ref <= 1'b0;
    t_rel = longint'($time);
    repeat (20) @(posedge ref_clk);
    trigger = 1'b1; #(7000); trigger = 1'b0;
    #(20_000);
    t_first = t_rel + ((longint'($time) - t_rel) / T0) * T0 + 37;
    #(t_first - longint'($time));
    for (int i = 0; i < N; i++) begin
      stop[3] = 1'b1; #(7000); stop[3] = 1'b0; #(PERIOD - 7000);
    end
    #(20_000);
    end_pulse = 1'b1; #(7000); end_pulse = 1'b0;
    repeat (2000) @(posedge clk);
    mean = real'(sum_diff) / real'(n_rec - 1);
    $display("%0d intervals, mean %0.4f t0 (ideal %0.4f), %0d outside {416, 417}", n_rec - 1, mean,
             real'(PERIOD) / T0, n_bad_diff);
    check(n_rec == N, $sformatf("%0d of %0d stops recorded", n_rec, N));
    check(n_lost == 0, "no stop lost");
    check(n_bad_code == 0, $sformatf("%0d codes differ from the stop instants", n_bad_code));
    check(n_bad_diff == 0, "every interval is 416 or 417 steps");
    check(mean > 416.6567 && mean < 416.6767, "mean interval 416.667 steps: no offset");
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
