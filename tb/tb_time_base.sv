`timescale 1ps/1ps
// tb_time_base: runs a 6-bit time base through several wraps and checks the
// count against a cycle counter kept by the testbench, and the wrap pulse
// against the cycle in which the count returns to zero.
module tb_time_base;
  localparam int unsigned CB = 6;
  logic clk = 1'b0, rst = 1'b1;
  logic [CB-1:0] coarse;
  logic wrap;
  int unsigned checks = 0, failures = 0, wraps = 0;

  time_base #(.COARSE_BITS(CB)) dut (.clk(clk), .rst(rst), .coarse(coarse), .wrap(wrap));

  always #960 clk = ~clk;

  initial begin
    int unsigned n;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    n = 0;
    repeat (300) begin
      @(posedge clk); #1;
      n++;
      checks++;
      if (coarse != CB'(n)) begin failures++; $display("cycle %0d coarse %0d", n, coarse); end
      checks++;
      if (wrap != ((n % (1 << CB)) == 0)) begin failures++; $display("cycle %0d wrap %b", n, wrap); end
      if (wrap) wraps++;
    end
    checks++;
    if (wraps != 300 / (1 << CB)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(5_000_000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
