`timescale 1ps/1ps
// run_control: start and end of an acquisition run.
//
// A run (the coding sequence) starts when the event trigger has been coded
// (trig_coded, from the trigger channel's time coder) and ends on the rising
// edge of the external end pulse, which is brought into the reference-clock
// domain through SYNC_STAGES flip-flops. While run is high the stop channels
// code their inputs. The multiplexer domain synchronises run; when
// that copy falls, run_control waits DRAIN_WAIT cycles for words still crossing
// into the channel registers, then waits until the channel registers are empty
// and no word is in flight (drained) and pulses flush, which hands the last,
// partly filled acquisition register to the host.
//
// Interface: reference side clk/rst/trig_coded/end_pulse/run, multiplexer side
// sclk/srst/drained/flush. Timing: run rises the cycle after trig_coded;
// it falls SYNC_STAGES+1 clk edges after the end pulse rises. The end pulse is
// sampled, not edge-captured, so it must stay high for longer than one clk
// period (1.92 ns at 520 MHz, 30 ns at the coarsest t0 of 1.875 ns).
// Start on the trigger and end on an external pulse are published; the
// synchronisers and the flush are this design's.
module run_control #(
  parameter int unsigned SYNC_STAGES = 2,
  parameter int unsigned DRAIN_WAIT  = 8
) (
  input  logic clk,
  input  logic rst,
  input  logic trig_coded,
  input  logic end_pulse,
  output logic run,
  input  logic sclk,
  input  logic srst,
  input  logic drained,
  output logic flush
);

  // ---- reference domain --------------------------------------------------
  logic [SYNC_STAGES:0] end_sync;  // one extra stage for edge detection

  always_ff @(posedge clk) begin
    if (rst) begin
      end_sync <= '0;
      run      <= 1'b0;
    end else begin
      end_sync <= {end_sync[SYNC_STAGES-1:0], end_pulse};
      if (end_sync[SYNC_STAGES] == 1'b0 && end_sync[SYNC_STAGES-1] == 1'b1) run <= 1'b0;
      else if (trig_coded) run <= 1'b1;
    end
  end

  // ---- multiplexer domain ------------------------------------------------
  localparam int unsigned WW = $clog2(DRAIN_WAIT + 1);

  logic [SYNC_STAGES-1:0] run_sync;
  logic                   run_s;
  logic                   run_prev;
  logic                   pend;
  logic [WW-1:0]          wait_cnt;

  assign run_s = run_sync[SYNC_STAGES-1];

  always_ff @(posedge sclk) begin
    if (srst) begin
      run_sync <= '0;
      run_prev <= 1'b0;
      pend     <= 1'b0;
      wait_cnt <= '0;
      flush    <= 1'b0;
    end else begin
      run_sync <= {run_sync[SYNC_STAGES-2:0], run};
      run_prev <= run_s;
      flush    <= 1'b0;
      if (run_prev && !run_s) begin
        pend     <= 1'b1;
        wait_cnt <= WW'(DRAIN_WAIT);
      end else if (pend) begin
        if (wait_cnt != '0) wait_cnt <= wait_cnt - 1'b1;
        else if (drained) begin
          pend  <= 1'b0;
          flush <= 1'b1;
        end
      end
    end
  end

  initial assert (SYNC_STAGES >= 2) else $error("SYNC_STAGES must be at least 2");

endmodule
