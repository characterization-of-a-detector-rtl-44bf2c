`timescale 1ps/1ps
// tb_chan_reg: the 512-word dual-clock channel register between a 1920 ps
// write clock and a 30480 ps read clock. Checks: empty after reset; exactly
// 512 writes accepted before full with no reads; data read back in order;
// then random writes and reads against a testbench queue, including
// wrap-around of the pointers many times.
module tb_chan_reg;
  localparam int unsigned DEPTH = 512;
  logic wclk = 1'b0, rclk = 1'b0, wrst = 1'b1, rrst = 1'b1;
  logic wr_req = 1'b0, wr_en, rd_req = 1'b0, rd_en, full, empty;
  assign wr_en = wr_req && !full;   // the writer never pushes into a full register
  assign rd_en = rd_req && !empty;  // nor the reader pops an empty one
  logic [31:0] wr_data = '0, rd_data;
  int unsigned checks = 0, failures = 0;
  logic [31:0] model[$];
  int unsigned n_rd = 0;
  logic rd_pend = 1'b0;

  chan_reg dut (.wclk(wclk), .wrst(wrst), .wr_en(wr_en), .wr_data(wr_data), .full(full),
                .rclk(rclk), .rrst(rrst), .rd_en(rd_en), .rd_data(rd_data), .empty(empty));

  always #960   wclk = ~wclk;
  always #15240 rclk = ~rclk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  // read-side monitor: data one edge after an accepted read
  always @(posedge rclk) begin
    if (rd_pend) begin
      logic [31:0] e;
      e = model.pop_front();
      check(rd_data == e, $sformatf("read %h expected %h", rd_data, e));
      n_rd++;
    end
    rd_pend <= rd_en && !empty && !rrst;
  end

  // write-side model
  always @(posedge wclk) if (wr_en && !full && !wrst) model.push_back(wr_data);

  int unsigned accepted;
  initial begin
    repeat (4) @(posedge rclk);
    wrst <= 1'b0; rrst <= 1'b0;
    repeat (3) @(posedge rclk);
    check(empty && !full, "empty after reset");
    // fill without reading
    accepted = 0;
    for (int i = 0; i < DEPTH + 20; i++) begin
      @(posedge wclk);
      if (wr_en) accepted++;
      wr_req  <= 1'b1;
      wr_data <= 32'hA000_0000 + i;
    end
    @(posedge wclk);
    if (wr_en) accepted++;
    wr_req <= 1'b0;
    @(posedge wclk);
    check(full, "full after filling");
    check(accepted == DEPTH, $sformatf("accepted %0d words", accepted));
    // drain completely
    repeat (4) @(posedge rclk);
    while (!empty) begin
      @(posedge rclk);
      rd_req <= 1'b1;
    end
    @(posedge rclk); rd_req <= 1'b0;
    repeat (4) @(posedge rclk);
    check(n_rd == DEPTH, $sformatf("read %0d words", n_rd));
    // random traffic on both sides
    fork
      begin
        for (int i = 0; i < 3000; i++) begin
          @(posedge wclk);
          wr_req  <= ($urandom_range(0, 15) == 0);
          wr_data <= $urandom;
        end
        @(posedge wclk); wr_req <= 1'b0;
      end
      begin
        for (int i = 0; i < 200; i++) begin
          @(posedge rclk);
          rd_req <= ($urandom_range(0, 3) != 0);
        end
      end
    join
    @(posedge rclk); rd_req <= 1'b0;
    repeat (3) @(posedge rclk);
    while (!empty) begin @(posedge rclk); rd_req <= 1'b1; end
    @(posedge rclk); rd_req <= 1'b0;
    repeat (3) @(posedge rclk);
    check(model.size() == 0, $sformatf("%0d words left in model", model.size()));
    check(n_rd > DEPTH + 100, "random phase moved data");
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
