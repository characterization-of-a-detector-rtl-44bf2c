`timescale 1ps/1ps
// tb_acq_pingpong: the two alternately used 509-word acquisition registers.
// A writer pushes numbered words whenever wr_ready allows; a host model reads
// registers as they are handed over. Checks: hand-over at exactly 509 words;
// switch to the other register; stall (wr_ready low) when both are waiting;
// host reads one word per clock with the last word flagged; a flush hands
// over a partly filled register; every word comes back once, in order, in
// blocks of 509 except a final flushed block; regs_sent counts hand-overs.
module tb_acq_pingpong;
  localparam int unsigned DEPTH = 509;
  logic clk = 1'b0, rst = 1'b1;
  logic wr_req = 1'b0, wr_en, wr_ready, flush = 1'b0;
  logic [31:0] wr_data = '0;
  logic host_avail, host_rd_en = 1'b0, host_rd_valid, host_rd_last;
  logic [8:0] host_words;
  logic [31:0] host_rd_data, regs_sent;
  int unsigned checks = 0, failures = 0;
  int unsigned n_wr = 0, n_rd = 0, blk_len = 0, n_blocks = 0, stall_cycles = 0;
  int unsigned blk_sizes[$];

  assign wr_en = wr_req && wr_ready;

  acq_pingpong dut (.clk(clk), .rst(rst), .wr_en(wr_en), .wr_data(wr_data), .wr_ready(wr_ready),
                    .flush(flush), .host_avail(host_avail), .host_words(host_words),
                    .host_rd_en(host_rd_en), .host_rd_valid(host_rd_valid), .host_rd_data(host_rd_data),
                    .host_rd_last(host_rd_last), .regs_sent(regs_sent));

  always #15240 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(posedge clk) if (!rst) begin
    if (wr_en) begin n_wr++; wr_data <= wr_data + 1; end
    if (wr_req && !wr_ready) stall_cycles++;
    if (host_rd_valid) begin
      check(host_rd_data == n_rd, $sformatf("host got %0d expected %0d", host_rd_data, n_rd));
      n_rd++;
      blk_len++;
      if (host_rd_last) begin blk_sizes.push_back(blk_len); blk_len = 0; n_blocks++; end
    end
  end

  task automatic write_n(input int n);
    int done = 0;
    wr_req <= 1'b1;
    while (done < n) begin @(posedge clk); if (wr_en) done++; end
    wr_req <= 1'b0;
  endtask

  // read one whole register, one word per clock: n back-to-back cycles must
  // return n words with the last one flagged
  task automatic host_read_block(output int cycles);
    int n, rd0, blk0;
    @(negedge clk);
    n = host_words;
    rd0 = n_rd;
    blk0 = n_blocks;
    check(host_avail, "register waiting for the host");
    host_rd_en = 1'b1;
    repeat (n) @(negedge clk);
    host_rd_en = 1'b0;
    cycles = n;
    repeat (2) @(negedge clk);
    check(n_rd - rd0 == n && n_blocks == blk0 + 1 && blk_sizes[blk0] == n,
          $sformatf("block of %0d read in %0d cycles", n, n_rd - rd0));
  endtask

  initial begin
    int cyc;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    check(!host_avail && wr_ready, "idle after reset");
    write_n(DEPTH - 1);
    @(posedge clk);
    check(!host_avail, "not handed over before 509 words");
    write_n(1);
    @(posedge clk);
    check(host_avail && host_words == DEPTH && regs_sent == 1 && wr_ready, "first register handed over");
    write_n(DEPTH);
    @(posedge clk);
    check(regs_sent == 2 && !wr_ready, "both registers waiting: writer stalled");
    wr_req <= 1'b1;
    repeat (20) @(posedge clk);
    check(stall_cycles >= 19 && n_wr == 2 * DEPTH, "no write during stall");
    host_read_block(cyc);
    @(posedge clk);
    check(n_blocks == 1 && blk_sizes[0] == DEPTH, "first block complete");
    repeat (4) @(posedge clk);
    wr_req <= 1'b0;
    @(posedge clk);
    check(wr_ready && n_wr > 2 * DEPTH, "writer resumed in the freed register");
    // partial register handed over by flush
    write_n(7);
    @(negedge clk); flush = 1'b1; @(negedge clk); flush = 1'b0;
    @(posedge clk);
    check(regs_sent == 3, "flush handed over the partial register");
    host_read_block(cyc);
    host_read_block(cyc);
    check(n_blocks == 3 && blk_sizes[1] == DEPTH && blk_sizes[2] == n_wr - 2 * DEPTH, $sformatf("flushed block of %0d", blk_sizes[2]));
    check(n_rd == n_wr, "everything read");
    // random traffic
    fork
      begin
        for (int i = 0; i < 6000; i++) begin @(posedge clk); wr_req <= ($urandom_range(0, 1) == 1); end
        wr_req <= 1'b0;
      end
      begin
        for (int i = 0; i < 7000; i++) begin @(posedge clk); host_rd_en <= ($urandom_range(0, 2) != 0); end
      end
    join
    @(negedge clk); flush = 1'b1; @(negedge clk); flush = 1'b0;
    host_rd_en <= 1'b1;
    repeat (1200) @(posedge clk);
    host_rd_en <= 1'b0;
    repeat (3) @(posedge clk);
    check(n_rd == n_wr && n_wr > 3 * DEPTH, $sformatf("random: wrote %0d read %0d", n_wr, n_rd));
    for (int i = 0; i < blk_sizes.size() - 1; i++) if (i != 2) check(blk_sizes[i] == DEPTH, "full blocks");
    check(regs_sent == n_blocks, "regs_sent counts hand-overs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(2_000_000_000);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
