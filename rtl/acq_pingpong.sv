`timescale 1ps/1ps
// acq_pingpong: the two acquisition registers used alternately.
//
// The multiplexer always writes into the "fill" register. When that register
// reaches DEPTH words, or when flush is pulsed at the end of a run and it holds
// at least one word, it is handed over to the host (ready) and filling moves to
// the other register if the host has finished with it. If both registers are
// ready, wr_ready drops and the multiplexer stalls until the host has read one
// out. The host reads the registers in the order they were handed over, a
// whole register per transfer: host_avail says one is waiting, host_words how
// many words it holds; each host_rd_en returns one word a cycle later, the last
// one flagged with host_rd_last, after which the register is free again.
// Reading one word per clock at 33 MHz gives the published 33 MWords/s.
// Because hand-overs always alternate between the two registers, the read
// pointer just toggles. regs_sent counts hand-overs (a long run at full rate
// hands over thousands of registers).
//
// Interface: writer side wr_en/wr_data/wr_ready/flush, host side host_*.
// Timing: all on clk; host_rd_valid/host_rd_data/host_rd_last one cycle after
// an accepted host_rd_en (host_avail high). The two 509-word registers and
// their alternate use are published; the hand-over rules and the read port are
// this design's (the bus interface itself is not part of this RTL).
module acq_pingpong
  import tdc_pkg::*;
#(
  parameter int unsigned DEPTH = 509,
  localparam int unsigned CNTW = $clog2(DEPTH + 1)
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 wr_en,
  input  logic [WORD_BITS-1:0] wr_data,
  output logic                 wr_ready,
  input  logic                 flush,
  output logic                 host_avail,
  output logic [CNTW-1:0]      host_words,
  input  logic                 host_rd_en,
  output logic                 host_rd_valid,
  output logic [WORD_BITS-1:0] host_rd_data,
  output logic                 host_rd_last,
  output logic [31:0]          regs_sent
);

  logic [1:0]           ready_q;   // register handed to the host
  logic                 fill_sel;  // register being filled
  logic                 rd_sel;    // register the host reads next
  logic                 rd_sel_q;  // register of the word in flight
  logic [1:0]           r_wr_en, r_rd_en, r_empty;
  logic [WORD_BITS-1:0] r_rd_data [2];
  logic [CNTW-1:0]      r_count   [2];

  for (genvar i = 0; i < 2; i++) begin : g_reg
    acq_reg #(.DEPTH(DEPTH), .WIDTH(WORD_BITS)) u_reg (
      .clk    (clk),
      .rst    (rst),
      .wr_en  (r_wr_en[i]),
      .wr_data(wr_data),
      .rd_en  (r_rd_en[i]),
      .rd_data(r_rd_data[i]),
      .count  (r_count[i]),
      .full   (),
      .empty  (r_empty[i])
    );
  end

  logic host_take, last_word, handover;

  assign wr_ready   = !ready_q[fill_sel];
  assign host_avail = ready_q[rd_sel];
  assign host_words = r_count[rd_sel];
  assign host_take  = host_rd_en && host_avail;
  assign last_word  = host_take && (r_count[rd_sel] == CNTW'(1));

  always_comb begin
    r_wr_en = '0;
    r_rd_en = '0;
    r_wr_en[fill_sel] = wr_en && wr_ready;
    r_rd_en[rd_sel]   = host_take;
  end

  // hand over on the write that fills the register, or on flush if not empty
  assign handover = wr_ready &&
                    ((wr_en && r_count[fill_sel] == CNTW'(DEPTH - 1)) ||
                     (flush && (wr_en || !r_empty[fill_sel])));

  logic [1:0] ready_n;
  always_comb begin
    ready_n = ready_q;
    if (handover)  ready_n[fill_sel] = 1'b1;
    if (last_word) ready_n[rd_sel]   = 1'b0;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ready_q       <= '0;
      fill_sel      <= 1'b0;
      rd_sel        <= 1'b0;
      rd_sel_q      <= 1'b0;
      host_rd_valid <= 1'b0;
      host_rd_last  <= 1'b0;
      regs_sent     <= '0;
    end else begin
      ready_q       <= ready_n;
      host_rd_valid <= host_take;
      host_rd_last  <= last_word;
      if (host_take) rd_sel_q <= rd_sel;
      if (last_word) rd_sel <= ~rd_sel;
      if (handover) regs_sent <= regs_sent + 1'b1;
      // move filling to the other register once the current one is handed
      // over and the other one is free
      if (ready_n[fill_sel] && !ready_n[~fill_sel]) fill_sel <= ~fill_sel;
    end
  end

  assign host_rd_data = r_rd_data[rd_sel_q];

  a_no_write_when_stalled: assert property (@(posedge clk) disable iff (rst) wr_en |-> wr_ready)
    else $error("acq_pingpong written while no register was open");

endmodule
