`timescale 1ps/1ps
// tb_time_coder: one channel's coding of time, driven by the delay-line model
// and an 8-bit time base. Stops are placed at known picosecond instants; the
// expected 12-bit code is floor((t - t_release) / 120 ps), computed from the
// instant alone. Also checked: channel number and marker bit, write latency,
// no coding while disabled, the dead time after a stop, the loss of a stop
// when the channel register is full, and the rollover marker word.
module tb_time_coder;
  import tdc_pkg::*;
  localparam int unsigned CB = 8, CH = 5, T0 = 120, TREF = 1920;
  localparam int unsigned NB = CB + 4;

  logic ref_clk = 1'b0, rst = 1'b0, stop = 1'b0;
  logic enable = 1'b0, marker_req = 1'b0, fifo_full = 1'b0;
  logic [15:0] taps;
  logic [CB-1:0] coarse;
  logic wrap, wr_en, hit_lost, coded;
  tdc_word_t wr_word;
  int unsigned checks = 0, failures = 0;
  longint t_rel;
  int unsigned n_wr = 0, n_lost = 0;
  tdc_word_t got_q[$];
  longint    got_t[$];

  always #(TREF / 2) ref_clk = ~ref_clk;

  dll_delay_line u_dll (.ref_clk(ref_clk), .taps(taps));
  time_base #(.COARSE_BITS(CB)) u_tb (.clk(ref_clk), .rst(rst), .coarse(coarse), .wrap(wrap));
  time_coder #(.CHANNEL(CH), .COARSE_BITS(CB)) dut (
    .clk(ref_clk), .rst(rst), .stop(stop), .taps(taps), .coarse(coarse), .enable(enable),
    .marker_req(marker_req), .fifo_full(fifo_full), .wr_en(wr_en), .wr_word(wr_word),
    .hit_lost(hit_lost), .coded(coded));

  bit started = 1'b0;   // set once the coder has been reset
  always @(posedge ref_clk) if (started) begin
    if (wr_en) begin got_q.push_back(wr_word); got_t.push_back(longint'($time)); n_wr++; end
    if (hit_lost) n_lost++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic logic [NB-1:0] code_at(input longint t);
    return NB'((t - t_rel) / T0);
  endfunction

  // stop pulse of width w at absolute time t
  task automatic pulse_at(input longint t, input int w);
    #(t - longint'($time));
    stop = 1'b1;
    #(w);
    stop = 1'b0;
  endtask

  task automatic expect_word(input longint t, input bit mk, input logic [NB-1:0] code);
    tdc_word_t w;
    check(got_q.size() == 1, $sformatf("one word expected, %0d seen", got_q.size()));
    if (got_q.size() == 0) return;
    w = got_q.pop_front();
    check(w.channel == CH_BITS'(CH), "channel number");
    check(w.marker == mk, "marker bit");
    check(w.time_code == TIME_BITS'(code), $sformatf("code %0d expected %0d", w.time_code, code));
    if (!mk) begin
      longint lat = got_t.pop_front() - t;
      check(lat >= 2 * TREF && lat <= 4 * TREF, $sformatf("latency %0d ps", lat));
    end else void'(got_t.pop_front());
  endtask

  initial begin
    longint t;
    repeat (2) @(posedge ref_clk);
    rst <= 1'b1;
    repeat (5) @(posedge ref_clk);
    rst <= 1'b0;
    started = 1'b1;
    t_rel = longint'($time);
    repeat (4) @(posedge ref_clk);

    // disabled: nothing written
    t = longint'($time) + 5000;
    pulse_at(t, 7000);
    repeat (10) @(posedge ref_clk);
    check(got_q.size() == 0, "no word while disabled");

    // enabled: random instants, all phases
    enable = 1'b1;
    for (int i = 0; i < 60; i++) begin
      t = longint'($time) + 20000 + longint'($urandom_range(0, 3000)) * T0 + 40 + $urandom_range(0, 40);
      pulse_at(t, 7000);
      repeat (8) @(posedge ref_clk);
      expect_word(t, 1'b0, code_at(t));
    end

    // dead time: a second stop 1.5 ns after the first is not coded
    t = longint'($time) + 10000 + 60;
    pulse_at(t, 400);
    pulse_at(t + 1500, 400);
    repeat (8) @(posedge ref_clk);
    expect_word(t, 1'b0, code_at(t));
    // ... but one 20 ns later is
    t = longint'($time) + 20000 + 60;
    pulse_at(t, 7000);
    repeat (8) @(posedge ref_clk);
    expect_word(t, 1'b0, code_at(t));

    // channel register full: stop lost
    fifo_full = 1'b1;
    t = longint'($time) + 9000 + 60;
    pulse_at(t, 7000);
    repeat (8) @(posedge ref_clk);
    check(got_q.size() == 0 && n_lost == 1, "stop lost when full");
    fifo_full = 1'b0;

    // rollover marker: written on the next edge with the coarse count, fine 0
    @(posedge ref_clk);
    marker_req <= 1'b1;
    t = longint'($time);
    @(posedge ref_clk);
    marker_req <= 1'b0;
    repeat (3) @(posedge ref_clk);
    expect_word(t, 1'b1, NB'(((t + 1 - t_rel) / TREF) * 16));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(100_000_000);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
