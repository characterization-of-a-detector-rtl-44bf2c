`timescale 1ps/1ps
// tb_dll_delay_line: checks that tap k of the delay-line model is the
// reference clock delayed by k * 120 ps, by sampling all taps at many instants
// and comparing with the clock waveform computed from the instant alone.
module tb_dll_delay_line;
  localparam int unsigned T0 = 120;
  localparam int unsigned HALF = 8 * T0;        // 960 ps, period 1920 ps
  logic        ref_clk = 1'b0;
  logic [15:0] taps;
  int unsigned checks = 0, failures = 0;

  dll_delay_line dut (.ref_clk(ref_clk), .taps(taps));

  always #(HALF) ref_clk = ~ref_clk;   // rising edges at 960 + n*1920

  // level of the reference clock at time t (t >= 960)
  function automatic logic clk_at(input longint t);
    return ((t - HALF) % (2 * HALF)) < HALF;
  endfunction

  initial begin
    #(20000);
    for (int j = 0; j < 400; j++) begin
      longint t;
      #(37 + (j % 5));
      t = longint'($time);
      if ((t % longint'(T0)) == 0) continue;     // avoid instants that fall on a tap edge
      for (int k = 0; k < 16; k++) begin
        checks++;
        if (taps[k] !== clk_at(t - k * T0)) begin
          failures++;
          if (failures < 5) $display("tap %0d at %0d ps: got %b", k, t, taps[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(10_000_000);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
