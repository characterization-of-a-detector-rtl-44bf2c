`timescale 1ps/1ps
// tdc_top: a 17-channel sliding-scale time-to-digital converter with
// continuous read-out.
//
// Sixteen stop inputs and one event-trigger input each have a time coder that
// latches the 26-bit time (free-running coarse counter at the 520 MHz
// reference plus the phase from the 16-stage locked delay line, t0 = 120 ps)
// and writes a 32-bit word into its own 512-word channel register. A
// round-robin multiplexer empties the channel registers at 16.4 MWords/s into
// two 509-word acquisition registers that are filled alternately and read by
// the host one whole register at a time. Coding of stops is enabled by the
// coded event trigger and disabled by the end pulse; the trigger channel also
// records a marker word each time the time base wraps (every 8 ms), so that
// runs longer than the 26-bit period can be timed off-line. At the end of a
// run the partly filled acquisition register is handed over once the channel
// registers are drained.
//
// Clock domains: ref_clk (520 MHz; time base, coders, channel-register write
// side, run start/stop) and clk (32.8 MHz; multiplexer, acquisition registers,
// host port). rst_ref and rst are synchronous resets of the two domains; hold
// both for at least 4 cycles of their clock. The locked delay line is analog
// and lives outside this module: its taps come in on `taps`.
// The block structure, channel count, depths and rates are the published ones;
// clocking, word layout, handshakes and the host port are this design's.
module tdc_top
  import tdc_pkg::*;
#(
  parameter int unsigned NSTOP           = 16,
  parameter int unsigned COARSE_BITS     = 22,
  parameter int unsigned CHAN_DEPTH      = 512,
  parameter int unsigned ACQ_DEPTH       = 509,
  parameter int unsigned CYCLES_PER_WORD = 2,
  localparam int unsigned NCH  = NSTOP + 1,
  localparam int unsigned CNTW = $clog2(ACQ_DEPTH + 1)
) (
  // reference domain
  input  logic                 ref_clk,
  input  logic                 rst_ref,
  input  logic [STAGES-1:0]    taps,
  input  logic [NSTOP-1:0]     stop,
  input  logic                 trigger,
  input  logic                 end_pulse,
  output logic                 run,
  output logic [NCH-1:0]       stop_lost,
  // multiplexer / host domain
  input  logic                 clk,
  input  logic                 rst,
  output logic                 host_avail,
  output logic [CNTW-1:0]      host_words,
  input  logic                 host_rd_en,
  output logic                 host_rd_valid,
  output logic [WORD_BITS-1:0] host_rd_data,
  output logic                 host_rd_last,
  output logic [31:0]          regs_sent,
  output logic                 mux_stalled
);

  logic [COARSE_BITS-1:0] coarse;
  logic                   wrap;
  logic [NCH-1:0]         hit_in, enable, marker_req, ch_full, ch_wr, coded;
  tdc_word_t              ch_word   [NCH];
  logic [WORD_BITS-1:0]   ch_rd_data[NCH];
  logic [NCH-1:0]         ch_empty, ch_rd_en;
  logic                   acq_ready, acq_wr_en, mux_busy, flush;
  logic [WORD_BITS-1:0]   acq_wr_data;

  time_base #(.COARSE_BITS(COARSE_BITS)) u_time_base (
    .clk(ref_clk), .rst(rst_ref), .coarse(coarse), .wrap(wrap)
  );

  assign hit_in = {trigger, stop};

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    // stop channels code only during a run; the trigger channel always codes
    // and records the rollover markers of a run
    assign enable[c]     = (c == NSTOP) ? 1'b1 : run;
    assign marker_req[c] = (c == NSTOP) ? (wrap && run) : 1'b0;

    time_coder #(.CHANNEL(c), .COARSE_BITS(COARSE_BITS)) u_coder (
      .clk       (ref_clk),
      .rst       (rst_ref),
      .stop      (hit_in[c]),
      .taps      (taps),
      .coarse    (coarse),
      .enable    (enable[c]),
      .marker_req(marker_req[c]),
      .fifo_full (ch_full[c]),
      .wr_en     (ch_wr[c]),
      .wr_word   (ch_word[c]),
      .hit_lost  (stop_lost[c]),
      .coded     (coded[c])
    );

    chan_reg #(.DEPTH(CHAN_DEPTH), .WIDTH(WORD_BITS)) u_chan_reg (
      .wclk   (ref_clk),
      .wrst   (rst_ref),
      .wr_en  (ch_wr[c]),
      .wr_data(ch_word[c]),
      .full   (ch_full[c]),
      .rclk   (clk),
      .rrst   (rst),
      .rd_en  (ch_rd_en[c]),
      .rd_data(ch_rd_data[c]),
      .empty  (ch_empty[c])
    );
  end

  run_control u_run_control (
    .clk       (ref_clk),
    .rst       (rst_ref),
    .trig_coded(coded[NSTOP]),
    .end_pulse (end_pulse),
    .run       (run),
    .sclk      (clk),
    .srst      (rst),
    .drained   ((&ch_empty) && !mux_busy),
    .flush     (flush)
  );

  tdc_mux #(.NUM_CH(NCH), .CYCLES_PER_WORD(CYCLES_PER_WORD)) u_mux (
    .clk        (clk),
    .rst        (rst),
    .ch_empty   (ch_empty),
    .ch_rd_en   (ch_rd_en),
    .ch_rd_data (ch_rd_data),
    .acq_ready  (acq_ready),
    .acq_wr_en  (acq_wr_en),
    .acq_wr_data(acq_wr_data),
    .busy       (mux_busy)
  );

  acq_pingpong #(.DEPTH(ACQ_DEPTH)) u_acq (
    .clk          (clk),
    .rst          (rst),
    .wr_en        (acq_wr_en),
    .wr_data      (acq_wr_data),
    .wr_ready     (acq_ready),
    .flush        (flush),
    .host_avail   (host_avail),
    .host_words   (host_words),
    .host_rd_en   (host_rd_en),
    .host_rd_valid(host_rd_valid),
    .host_rd_data (host_rd_data),
    .host_rd_last (host_rd_last),
    .regs_sent    (regs_sent)
  );

  // multiplexer held back by the acquisition registers while data waits
  assign mux_stalled = !acq_ready && !(&ch_empty);

endmodule
