`timescale 1ps/1ps
// tdc_mux: the multiplexer that drains the channel registers.
//
// Time is divided into read slots of CYCLES_PER_WORD clock cycles. In the
// first cycle of a slot, if the acquisition registers can take a word, a
// round-robin arbiter picks the first non-empty channel register after the one
// served last and reads it; in the next cycle the word arrives and is written
// to the acquisition registers. Empty channels cost no slot, and every channel
// with data is served once per round, so a word is taken from each busy channel
// with the same probability. With CYCLES_PER_WORD = 2 at a 32.8 MHz clock the
// multiplexer moves 16.4 MWords/s, shared between the busy channels (4.1 MWords/s
// each with four busy channels). When the acquisition registers cannot accept
// (acq_ready low) no read is issued and the channel registers fill up.
//
// Interface: ch_empty / ch_rd_en / ch_rd_data to the channel registers (read
// data valid one cycle after ch_rd_en), acq_ready / acq_wr_en / acq_wr_data to
// the acquisition registers, busy while a word is in flight.
// The 16.4 MWords/s rate and the equal-probability reading are published; the
// clock, the slot length and the round-robin arbiter are this design's.
module tdc_mux
  import tdc_pkg::*;
#(
  parameter int unsigned NUM_CH          = 17,
  parameter int unsigned CYCLES_PER_WORD = 2
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [NUM_CH-1:0]    ch_empty,
  output logic [NUM_CH-1:0]    ch_rd_en,
  input  logic [WORD_BITS-1:0] ch_rd_data [NUM_CH],
  input  logic                 acq_ready,
  output logic                 acq_wr_en,
  output logic [WORD_BITS-1:0] acq_wr_data,
  output logic                 busy
);

  localparam int unsigned SW = (CYCLES_PER_WORD > 1) ? $clog2(CYCLES_PER_WORD) : 1;
  localparam int unsigned CW = $clog2(NUM_CH);

  logic [SW-1:0] slot;
  logic [CW-1:0] last;       // channel served last
  logic [CW-1:0] pend_ch;    // channel whose word is in flight
  logic          pend;
  logic [CW-1:0] grant_ch;
  logic          grant;

  // round-robin choice: first non-empty channel after 'last'
  always_comb begin
    grant    = 1'b0;
    grant_ch = last;
    for (int unsigned i = 1; i <= NUM_CH; i++) begin
      automatic int unsigned c = (int'(last) + i) % NUM_CH;
      if (!grant && !ch_empty[c]) begin
        grant    = 1'b1;
        grant_ch = CW'(c);
      end
    end
  end

  logic issue;
  assign issue = (slot == '0) && acq_ready && grant && !pend;

  always_comb begin
    ch_rd_en = '0;
    if (issue) ch_rd_en[grant_ch] = 1'b1;
  end

  assign acq_wr_en   = pend;
  assign acq_wr_data = ch_rd_data[pend_ch];
  assign busy        = pend;

  always_ff @(posedge clk) begin
    if (rst) begin
      slot    <= '0;
      last    <= CW'(NUM_CH - 1);
      pend    <= 1'b0;
      pend_ch <= '0;
    end else begin
      slot <= (slot == SW'(CYCLES_PER_WORD - 1)) ? '0 : slot + 1'b1;
      pend <= issue;
      if (issue) begin
        pend_ch <= grant_ch;
        last    <= grant_ch;
      end
    end
  end

  initial assert (CYCLES_PER_WORD >= 2) else $error("tdc_mux needs at least 2 cycles per word");

  a_write_accepted: assert property (@(posedge clk) disable iff (rst) acq_wr_en |-> acq_ready)
    else $error("tdc_mux wrote while the acquisition registers were not ready");

endmodule
