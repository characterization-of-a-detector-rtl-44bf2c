`timescale 1ps/1ps
// tb_tdc_mux: the 17-input multiplexer against channel registers modelled as
// queues in the testbench (read data one cycle after the read strobe). Each
// word carries its channel number and a per-channel sequence number, so the
// checks are independent of the arbiter: every word arrives once, in order per
// channel; channels with data are served in strict rotation (0, 3, 9, 16, 0,
// ...); the rate is one word per 2 clock cycles (16.4 MWords/s at 32.8 MHz);
// four busy channels get a quarter each; nothing is read while the
// acquisition registers are not ready.
module tb_tdc_mux;
  localparam int unsigned NCH = 17;
  logic clk = 1'b0, rst = 1'b1;
  logic [NCH-1:0] ch_empty, ch_rd_en;
  logic [31:0] ch_rd_data [NCH];
  logic acq_ready = 1'b1, acq_wr_en, busy;
  logic [31:0] acq_wr_data;
  int unsigned checks = 0, failures = 0;
  logic [31:0] q [NCH][$];
  int unsigned next_seq [NCH];
  int unsigned loaded [NCH];
  int unsigned n_out = 0, per_ch [NCH];
  int last_ch = -1;
  logic [NCH-1:0] order_mask = '0;   // channels whose rotation is being checked

  tdc_mux dut (.clk(clk), .rst(rst), .ch_empty(ch_empty), .ch_rd_en(ch_rd_en), .ch_rd_data(ch_rd_data),
               .acq_ready(acq_ready), .acq_wr_en(acq_wr_en), .acq_wr_data(acq_wr_data), .busy(busy));

  always #15240 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  always_comb for (int c = 0; c < NCH; c++) ch_empty[c] = (q[c].size() == 0);

  always @(posedge clk) if (!rst) begin
    for (int c = 0; c < NCH; c++) begin
      if (ch_rd_en[c]) begin
        check(q[c].size() != 0, "read of an empty channel");
        if (q[c].size() != 0) ch_rd_data[c] <= q[c].pop_front();
      end
    end
    check(!(ch_rd_en != 0 && !acq_ready), "read while acquisition registers not ready");
    check($countones(ch_rd_en) <= 1, "one read at a time");
    if (acq_wr_en) begin
      int c, s;
      c = int'(acq_wr_data[31:24]);
      s = int'(acq_wr_data[23:0]);
      check(c < NCH && s == next_seq[c], $sformatf("word ch %0d seq %0d, expected seq %0d", c, s, next_seq[c]));
      next_seq[c] = s + 1;
      per_ch[c]++;
      n_out++;
      if (order_mask != 0) begin
        // next channel in rotation among the masked ones
        int e, k;
        e = -1;
        for (int i = 1; i <= NCH; i++) begin
          k = (last_ch + i) % NCH;
          if (e < 0 && order_mask[k]) e = k;
        end
        if (last_ch >= 0) check(c == e, $sformatf("rotation: got %0d expected %0d", c, e));
      end
      last_ch = c;
    end
  end

  task automatic load(input int c, input int n);
    for (int i = 0; i < n; i++) begin q[c].push_back({8'(c), 24'(loaded[c])}); loaded[c]++; end
  endtask

  initial begin
    int unsigned n0;
    for (int c = 0; c < NCH; c++) begin next_seq[c] = 0; loaded[c] = 0; per_ch[c] = 0; ch_rd_data[c] = '0; end
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    // rotation over channels 0, 3, 9, 16
    @(negedge clk);
    load(0, 40); load(3, 40); load(9, 40); load(16, 40);
    order_mask = 17'h10209;
    n0 = n_out;
    repeat (200) @(posedge clk);
    check(n_out - n0 >= 99 && n_out - n0 <= 101, $sformatf("rate: %0d words in 200 cycles", n_out - n0));
    for (int c = 0; c < NCH; c++) per_ch[c] = 0;
    repeat (140) @(posedge clk);
    check(n_out == 160, "all 160 words out");
    // fairness with four channels always busy
    order_mask = '0;
    for (int c = 0; c < NCH; c++) per_ch[c] = 0;
    @(negedge clk);
    load(1, 300); load(2, 300); load(5, 300); load(7, 300);
    repeat (400) @(posedge clk);
    for (int c = 1; c <= 7; c++) if (c == 1 || c == 2 || c == 5 || c == 7)
      check(per_ch[c] >= 49 && per_ch[c] <= 51, $sformatf("channel %0d got %0d of 200", c, per_ch[c]));
    // stall: no reads while acq_ready is low
    @(negedge clk); acq_ready = 1'b0;
    n0 = n_out;
    repeat (2) @(posedge clk);
    n0 = n_out;
    repeat (50) @(posedge clk);
    check(n_out == n0, "no words while not ready");
    @(negedge clk); acq_ready = 1'b1;
    // all channels, then drain
    @(negedge clk);
    for (int c = 0; c < NCH; c++) load(c, 5);
    repeat (3200) @(posedge clk);
    for (int c = 0; c < NCH; c++) check(q[c].size() == 0, "drained");
    check(n_out == 160 + 1200 + 85, $sformatf("total %0d words", n_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(500_000_000);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
