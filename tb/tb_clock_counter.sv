`timescale 1ps / 1ps
// tb_clock_counter: checks reset, counting and wrap-around of the coarse counter
// (4-bit and default 16-bit instances) against a cycle count kept in the testbench.
module tb_clock_counter;
  logic        clk = 1'b0, rst = 1'b1;
  logic [3:0]  c4;
  logic [15:0] c16;
  int          checks = 0, failures = 0, n = 0;

  clock_counter #(.W(4)) dut4  (.clk(clk), .rst(rst), .count(c4));
  clock_counter          dut16 (.clk(clk), .rst(rst), .count(c16));

  always #1280 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    #100 rst = 1'b0;
    for (int i = 0; i < 100; i++) begin
      @(posedge clk); #100;
      n++;
      checks += 2;
      if (c4 !== 4'(n))   begin failures++; $display("c4=%0d exp %0d", c4, n); end
      if (c16 !== 16'(n)) begin failures++; $display("c16=%0d exp %0d", c16, n); end
      if (i == 60) begin
        rst = 1'b1; @(posedge clk); #100; rst = 1'b0; n = 0;
        checks++;
        if (c16 !== 0) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(1000 * 2560);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
