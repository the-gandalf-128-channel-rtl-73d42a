`timescale 1ps / 1ps
// tb_async_fifo: writes on a 2560 ps clock and reads on an unrelated 6250 ps clock
// (the S-Link side), in bursts that fill and drain the FIFO; every word read is
// compared with a queue model, and pushes are only issued when !full, pops when
// !empty. Also checks that full is reached and that all words arrive.
module tb_async_fifo;
  logic wclk = 1'b0, rclk = 1'b0, wrst = 1'b1, rrst = 1'b1;
  logic push, pop, full, empty;
  logic [31:0] din, dout;
  logic [31:0] model[$];
  int checks = 0, failures = 0, n_full = 0, n_wr = 0, n_rd = 0;
  localparam int NW = 3000;

  async_fifo #(.W(32), .DEPTH(16)) dut (.*);

  always #1280 wclk = ~wclk;
  always #3125 rclk = ~rclk;

  initial begin
    push = 0; din = 0;
    repeat (4) @(negedge wclk);
    wrst = 0;
    while (n_wr < NW) begin
      push = !full && (((n_wr / 200) % 2) ? ($urandom_range(0, 3) != 0) : ($urandom_range(0, 3) == 0));
      din  = $urandom;
      n_full += full;
      @(posedge wclk);
      if (push) begin model.push_back(din); n_wr++; end
      #1 push = 0;
      @(negedge wclk);
    end
    push = 0;
  end

  initial begin
    pop = 0;
    repeat (4) @(negedge rclk);
    rrst = 0;
    while (n_rd < NW) begin
      pop = !empty && ($urandom_range(0, 2) != 0);
      if (pop) begin
        checks++;
        if (model.size() == 0 || dout !== model[0]) begin
          failures++;
          if (failures < 10) $display("read %h expected %h", dout, model.size() ? model[0] : 0);
        end
      end
      @(posedge rclk);
      if (pop) begin void'(model.pop_front()); n_rd++; end
      #1 pop = 0;
      @(negedge rclk);
    end
    if (n_full == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(40000 * 6250);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
