`timescale 1ps/1ps
// time_base: the free-running coarse time of the TDC.
//
// A COARSE_BITS counter advances on every rising edge of the 520 MHz reference
// clock. Together with the 4-bit phase from the delay line it forms the 26-bit
// time code. The TDC works as a sliding-scale converter: the counter is never
// re-zeroed at the start of an acquisition, times are only meaningful as
// differences against the coded event trigger. When the counter returns to 0,
// wrap pulses for one cycle so that a rollover marker can be recorded and
// elapsed periods of 8 ms can be counted off-line.
//
// Interface: clk/rst (synchronous, active high), coarse (current count), wrap.
// Timing: coarse changes on each rising clk edge; wrap is high during the cycle
// in which coarse == 0 after a wrap. The 22 + 4 bit split follows from the
// published 26-bit code and 16 stages; the wrap pulse is this design's means of
// off-line period counting.
module time_base #(
  parameter int unsigned COARSE_BITS = 22
) (
  input  logic                   clk,
  input  logic                   rst,
  output logic [COARSE_BITS-1:0] coarse,
  output logic                   wrap
);

  always_ff @(posedge clk) begin
    if (rst) begin
      coarse <= '0;
      wrap   <= 1'b0;
    end else begin
      coarse <= coarse + 1'b1;
      wrap   <= (coarse == {COARSE_BITS{1'b1}});
    end
  end

endmodule
