`timescale 1ps/1ps
// tb_acq_reg: the 509-word acquisition register. Checks: empty after reset;
// count, full at exactly 509 words; in-order read-back; wrap-around of the
// non-power-of-two pointers under random simultaneous reads and writes,
// against a testbench queue.
module tb_acq_reg;
  localparam int unsigned DEPTH = 509;
  logic clk = 1'b0, rst = 1'b1, wr_en = 1'b0, rd_en = 1'b0, full, empty;
  logic [31:0] wr_data = '0, rd_data;
  logic [8:0] count;
  int unsigned checks = 0, failures = 0, n_rd = 0;
  logic [31:0] model[$];
  logic rd_pend = 1'b0;

  acq_reg dut (.clk(clk), .rst(rst), .wr_en(wr_en), .wr_data(wr_data), .rd_en(rd_en),
               .rd_data(rd_data), .count(count), .full(full), .empty(empty));

  always #15240 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(posedge clk) begin
    if (rd_pend) begin
      logic [31:0] e;
      e = model.pop_front();
      check(rd_data == e, $sformatf("read %h expected %h", rd_data, e));
      n_rd++;
    end
    rd_pend <= rd_en && !empty && !rst;
    if (wr_en && !full && !rst) model.push_back(wr_data);
  end

  always @(negedge clk) if (!rst) check(count == model.size() - (rd_pend ? 1 : 0) || count == model.size(), "count");

  initial begin
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    check(empty && !full && count == 0, "empty after reset");
    for (int i = 0; i < DEPTH; i++) begin
      wr_en <= 1'b1; wr_data <= 32'h5000_0000 + i;
      @(posedge clk);
    end
    wr_en <= 1'b0;
    @(posedge clk);
    check(full && count == DEPTH, $sformatf("full at %0d", count));
    for (int i = 0; i < DEPTH; i++) begin
      rd_en <= 1'b1;
      @(posedge clk);
    end
    rd_en <= 1'b0;
    repeat (2) @(posedge clk);
    check(empty && count == 0 && n_rd == DEPTH, "drained");
    for (int i = 0; i < 4000; i++) begin
      wr_en   <= ($urandom_range(0, 2) != 0) && !full;
      wr_data <= $urandom;
      rd_en   <= ($urandom_range(0, 2) != 0) && (model.size() > 300 || $urandom_range(0, 1) == 1);
      @(posedge clk);
    end
    wr_en <= 1'b0;
    while (!empty) begin rd_en <= 1'b1; @(posedge clk); end
    rd_en <= 1'b0;
    repeat (2) @(posedge clk);
    check(model.size() == 0, "all words returned");
    check(n_rd > 2 * DEPTH, "pointers wrapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(1_000_000_000);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
