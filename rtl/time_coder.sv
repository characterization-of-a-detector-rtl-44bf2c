`timescale 1ps/1ps
// time_coder: the "coding of time" stage of one TDC input channel.
//
// A stop pulse latches, on its own rising edge, the 16 taps of the locked delay
// line and the coarse counter of the time base (a hit register clocked by the
// input, as in DLL-based TDCs). The tap pattern of a 50 % duty reference seen
// through 16 taps is eight ones followed by eight zeros, rotated by the phase of
// the clock at the stop; the fine time is the index k with tap k = 1 and tap
// k+1 = 0. The latched values are handed to the reference-clock domain with a
// toggle handshake: the hit register toggles hit_tgl, the reference domain sees
// the toggle after SYNC_STAGES flip-flops, builds the 32-bit word
// {channel, marker = 0, coarse:fine} and writes it into the channel register,
// then returns ack_tgl, which re-arms the hit register. A stop arriving while
// the hit register is still armed-out is not coded (dead time). A coded stop
// that finds the channel register full is dropped and reported on hit_lost.
// Words are written only while enable is high (the coding sequence runs).
// marker_req asks for a rollover marker word {channel, marker = 1, coarse:0};
// it is used on the event-trigger channel at every wrap of the time base.
//
// Interface: see ports. Hold rst for at least SYNC_STAGES+1 clk cycles. Timing: wr_en is a one-cycle strobe in the clk domain,
// SYNC_STAGES+1 rising clk edges after the stop; dead time is therefore about
// (SYNC_STAGES + 1) reference periods (5.8 ns at 520 MHz), longer than the
// 2.5 ns of the original, whose hit-register circuit is not published. The
// latching of the delay line and the 26-bit time code follow the published
// design; the handshake, fine-code decoder and marker word are this design's.
// The ack_tgl comparison in the stop domain is an asynchronous read by nature
// (the stop is not a free-running clock), as is the latch of taps and coarse.
module time_coder
  import tdc_pkg::*;
#(
  parameter int unsigned CHANNEL     = 0,
  parameter int unsigned COARSE_BITS = 22,
  parameter int unsigned SYNC_STAGES = 2
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   stop,
  input  logic [STAGES-1:0]      taps,
  input  logic [COARSE_BITS-1:0] coarse,
  input  logic                   enable,
  input  logic                   marker_req,
  input  logic                   fifo_full,
  output logic                   wr_en,
  output tdc_word_t              wr_word,
  output logic                   hit_lost,
  output logic                   coded
);

  localparam int unsigned CODE_BITS = COARSE_BITS + FINE_BITS;

  // ---- hit register, clocked by the stop --------------------------------
  logic [STAGES-1:0]      hit_taps;
  logic [COARSE_BITS-1:0] hit_coarse;
  logic                   hit_tgl;
  logic                   ack_tgl;

  always_ff @(posedge stop or posedge rst) begin
    if (rst) begin
      hit_tgl    <= 1'b0;
      hit_taps   <= '0;
      hit_coarse <= '0;
    end else if (hit_tgl == ack_tgl) begin
      hit_taps   <= taps;
      hit_coarse <= coarse;
      hit_tgl    <= ~hit_tgl;
    end
  end

  // ---- thermometer-ring to binary ---------------------------------------
  function automatic logic [FINE_BITS-1:0] ring_to_fine(input logic [STAGES-1:0] t);
    logic [FINE_BITS-1:0] f;
    f = '0;
    for (int unsigned k = 0; k < STAGES; k++) begin
      if (t[k] && !t[(k + 1) % STAGES]) f = FINE_BITS'(k);
    end
    return f;
  endfunction

  function automatic logic [TIME_BITS-1:0] make_code(input logic [COARSE_BITS-1:0] c,
                                                     input logic [FINE_BITS-1:0] f);
    logic [CODE_BITS-1:0] code;
    code = {c, f};
    return TIME_BITS'(code);
  endfunction

  // ---- reference-clock domain --------------------------------------------
  logic [SYNC_STAGES-1:0] sync;
  logic                   marker_pend;
  logic                   hit_new;

  assign hit_new = (sync[SYNC_STAGES-1] != ack_tgl);

  always_ff @(posedge clk) begin
    if (rst) begin
      // follow the hit register during reset so that no stale toggle is seen
      sync        <= {sync[SYNC_STAGES-2:0], hit_tgl};
      ack_tgl     <= sync[SYNC_STAGES-1];
      marker_pend <= 1'b0;
      wr_en       <= 1'b0;
      wr_word     <= '0;
      hit_lost    <= 1'b0;
      coded       <= 1'b0;
    end else begin
      sync     <= {sync[SYNC_STAGES-2:0], hit_tgl};
      wr_en    <= 1'b0;
      hit_lost <= 1'b0;
      coded    <= 1'b0;
      if (hit_new) begin
        ack_tgl <= sync[SYNC_STAGES-1];
        if (marker_req) marker_pend <= 1'b1;
        if (enable) begin
          if (fifo_full) begin
            hit_lost <= 1'b1;
          end else begin
            wr_en   <= 1'b1;
            coded   <= 1'b1;
            wr_word <= '{channel: CH_BITS'(CHANNEL), marker: 1'b0,
                         time_code: make_code(hit_coarse, ring_to_fine(hit_taps))};
          end
        end
      end else if (marker_req || marker_pend) begin
        marker_pend <= 1'b0;
        if (enable && !fifo_full) begin
          wr_en   <= 1'b1;
          wr_word <= '{channel: CH_BITS'(CHANNEL), marker: 1'b1,
                       time_code: make_code(coarse, '0)};
        end
      end
    end
  end

  initial begin
    assert (SYNC_STAGES >= 2) else $error("SYNC_STAGES must be at least 2");
    assert (CODE_BITS <= TIME_BITS) else $error("coarse + fine bits exceed the 26-bit time code");
  end

endmodule
