`timescale 1ps/1ps
// chan_reg: the channel register, a dual-clock FIFO of DEPTH data words.
//
// Each input channel of the TDC owns one. It is written in the 520 MHz
// reference domain by the channel's time coder and read in the multiplexer
// domain. Read and write pointers are DEPTH-wrapping binary counters with one
// extra bit; each side publishes its pointer in Gray code and the other side
// reads it through two flip-flops, so full and empty are pessimistic but never
// wrong. While the register is full, stops on the channel are lost: at high
// rates the number of coded stops is set by how fast the multiplexer drains it.
//
// Interface: write side wclk/wrst/wr_en/wr_data/full, read side
// rclk/rrst/rd_en/rd_data/empty. Timing: a write is accepted on the wclk edge
// when wr_en && !full; rd_data holds the word one rclk edge after rd_en &&
// !empty. The 512-word depth and 32-bit width are the published ones; the
// pointer scheme is this design's. DEPTH must be a power of two.
module chan_reg #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned WIDTH = 32
) (
  input  logic             wclk,
  input  logic             wrst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  input  logic             rclk,
  input  logic             rrst,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];

  logic [AW:0] wbin, wgray, wgray_r1, wgray_r2;  // write pointer, and its copy in rclk
  logic [AW:0] rbin, rgray, rgray_w1, rgray_w2;  // read pointer, and its copy in wclk

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---- write side --------------------------------------------------------
  assign full = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  always_ff @(posedge wclk) begin
    if (wr_en && !full) mem[wbin[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge wclk) begin
    if (wrst) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (wr_en && !full) begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
    end
  end

  // ---- read side ---------------------------------------------------------
  assign empty = (rgray == wgray_r2);

  always_ff @(posedge rclk) begin
    if (rrst) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
      rd_data  <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rd_en && !empty) begin
        rd_data <= mem[rbin[AW-1:0]];
        rbin    <= rbin + 1'b1;
        rgray   <= bin2gray(rbin + 1'b1);
      end
    end
  end

  initial assert (DEPTH == (1 << AW) && AW >= 2) else $error("chan_reg DEPTH must be a power of two >= 4");

  a_no_write_when_full: assert property (@(posedge wclk) disable iff (wrst) !(wr_en && full))
    else $error("chan_reg written while full");
  a_no_read_when_empty: assert property (@(posedge rclk) disable iff (rrst) !(rd_en && empty))
    else $error("chan_reg read while empty");

endmodule
