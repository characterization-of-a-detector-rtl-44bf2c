`timescale 1ps/1ps
// acq_reg: an acquisition register, a single-clock FIFO of DEPTH data words.
//
// Two of these hold the multiplexed stream until the host takes it over the
// bus. DEPTH need not be a power of two (the published depth is 509 words):
// both pointers wrap explicitly at DEPTH-1 and a word counter gives full,
// empty and the fill level that the host reads before a transfer.
//
// Interface: clk/rst, wr_en/wr_data, rd_en/rd_data, count/full/empty.
// Timing: a write is stored on the clock edge where wr_en && !full; rd_data
// holds the word one edge after rd_en && !empty; count updates on the same
// edges. Depth and width are the published ones; the rest is this design's.
module acq_reg #(
  parameter int unsigned DEPTH = 509,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned CNTW = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic [CNTW-1:0]  count,
  output logic             full,
  output logic             empty
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             do_wr, do_rd;

  assign full  = (count == CNTW'(DEPTH));
  assign empty = (count == '0);
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr    <= '0;
      rptr    <= '0;
      count   <= '0;
      rd_data <= '0;
    end else begin
      if (do_wr) wptr <= next_ptr(wptr);
      if (do_rd) begin
        rptr    <= next_ptr(rptr);
        rd_data <= mem[rptr];
      end
      count <= count + CNTW'(do_wr) - CNTW'(do_rd);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (rst) !(wr_en && full))
    else $error("acq_reg written while full");

endmodule
