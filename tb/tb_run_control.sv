`timescale 1ps/1ps
// tb_run_control: run starts the cycle after the coded trigger, ends
// SYNC_STAGES+1 reference edges after the end pulse rises (2 + 1 here), and a
// single flush follows in the multiplexer domain only after DRAIN_WAIT cycles
// and only once the channel registers report drained.
module tb_run_control;
  logic clk = 1'b0, rst = 1'b1, sclk = 1'b0, srst = 1'b1;
  logic trig_coded = 1'b0, end_pulse = 1'b0, drained = 1'b0;
  logic run, flush;
  int unsigned checks = 0, failures = 0, n_flush = 0;
  longint t_flush = 0;

  run_control dut (.clk(clk), .rst(rst), .trig_coded(trig_coded), .end_pulse(end_pulse), .run(run),
                   .sclk(sclk), .srst(srst), .drained(drained), .flush(flush));

  always #960   clk  = ~clk;
  always #15240 sclk = ~sclk;

  always @(posedge sclk) if (flush && !srst) begin n_flush++; t_flush = longint'($time); end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    int n;
    longint t_drained;
    repeat (5) @(posedge sclk);
    rst <= 1'b0; srst <= 1'b0;
    repeat (3) @(posedge clk);
    check(!run, "idle after reset");
    // end pulse with no run: nothing happens
    end_pulse = 1'b1; #7000; end_pulse = 1'b0;
    repeat (10) @(posedge sclk);
    check(!run && n_flush == 0, "no flush without a run");
    @(posedge clk); trig_coded <= 1'b1;
    @(posedge clk); trig_coded <= 1'b0;
    #1 check(run, "run set the cycle after the coded trigger");
    repeat (100) @(posedge clk);
    check(run, "run holds");
    // end pulse at a known instant
    @(negedge clk);
    end_pulse = 1'b1;
    n = 0;
    while (run) begin @(posedge clk); #1; n++; end
    check(n == 3, $sformatf("run fell after %0d edges", n));
    #6000 end_pulse = 1'b0;
    // not drained for a while: no flush
    repeat (30) @(posedge sclk);
    check(n_flush == 0, "no flush before drained");
    @(negedge sclk); drained = 1'b1; t_drained = longint'($time);
    repeat (5) @(posedge sclk);
    check(n_flush == 1 && t_flush > t_drained && t_flush - t_drained < 3 * 30480, "one flush once drained");
    repeat (20) @(posedge sclk);
    check(n_flush == 1, "single flush");
    // second run, drained at once: flush after DRAIN_WAIT
    @(posedge clk); trig_coded <= 1'b1;
    @(posedge clk); trig_coded <= 1'b0;
    repeat (200) @(posedge clk);
    end_pulse = 1'b1; #7000; end_pulse = 1'b0;
    n = 0;
    while (n_flush == 1 && n < 40) begin @(posedge sclk); n++; end
    check(n_flush == 2 && n >= 8 && n <= 14, $sformatf("second flush after %0d cycles", n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(50_000_000);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
