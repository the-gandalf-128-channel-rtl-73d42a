// tb_hit_search: drives random partition words (built from random 17-sample
// snapshots with few transitions, as a real input gives) and a coarse time, and
// compares the registered hits with a reference that scans the whole 17-sample word
// for the first 0->1 and first 1->0 sample pair. Edge sensitivity is changed at random.
`timescale 1ps / 1ps
module tb_hit_search;
  import tdc_pkg::*;

  logic                   clk = 1'b0, rst = 1'b1;
  logic [3:0][4:0]        part;
  logic [COARSE_W-1:0]    coarse;
  logic                   lead_en, trail_en;
  hit_t                   hit_a, hit_b;
  logic                   hit_a_v, hit_b_v;
  int                     checks = 0, failures = 0;
  int                     n_lead = 0, n_trail = 0, n_two = 0;

  hit_search dut (.*);

  always #1280 clk = ~clk;

  task automatic check(input logic [16:0] w, input logic [COARSE_W-1:0] c,
                       input logic le, input logic te);
    int          lk = -1, tk = -1;
    logic [19:0] fr;
    hit_t        ea, eb;
    logic        eav, ebv;
    for (int k = 15; k >= 0; k--) begin
      if (!w[k] && w[k+1]) lk = k;
      if (w[k] && !w[k+1]) tk = k;
    end
    if (!le) lk = -1;
    if (!te) tk = -1;
    fr  = {c - 16'd2, 4'd0};
    eav = (lk >= 0) || (tk >= 0);
    ebv = (lk >= 0) && (tk >= 0);
    if (lk >= 0 && (tk < 0 || lk < tk)) begin
      ea = '{1'b1, fr + 20'(lk)}; eb = '{1'b0, fr + 20'(tk)};
    end else begin
      ea = '{1'b0, fr + 20'(tk)}; eb = '{1'b1, fr + 20'(lk)};
    end
    n_lead  += (lk >= 0);
    n_trail += (tk >= 0);
    n_two   += ebv;
    checks++;
    if (hit_a_v !== eav || hit_b_v !== ebv || (eav && hit_a !== ea) || (ebv && hit_b !== eb)) begin
      failures++;
      if (failures < 10)
        $display("w=%b got a=%b %h b=%b %h exp a=%b %h b=%b %h", w, hit_a_v, hit_a, hit_b_v, hit_b, eav, ea, ebv, eb);
    end
  endtask

  initial begin
    logic [16:0] w;
    logic [COARSE_W-1:0] c;
    logic le, te;
    part = '0; coarse = '0; lead_en = 1'b1; trail_en = 1'b1;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int n = 0; n < 3000; n++) begin
      // snapshot with 0, 1 or 2 transitions, sometimes fully random
      automatic int a = $urandom_range(0, 16), b = $urandom_range(0, 16);
      automatic logic start = 1'($urandom);
      case ($urandom_range(0, 4))
        0: w = {17{start}};
        1, 2: for (int k = 0; k < 17; k++) w[k] = (k > a) ? ~start : start;
        3: for (int k = 0; k < 17; k++) w[k] = ((k > a) ^ (k > b)) ? ~start : start;
        default: w = 17'($urandom);
      endcase
      c  = 16'($urandom);
      le = ($urandom_range(0, 3) != 0);
      te = ($urandom_range(0, 3) != 0);
      @(negedge clk);
      for (int p = 0; p < 4; p++) part[p] = w[4*p +: 5];
      coarse = c; lead_en = le; trail_en = te;
      @(posedge clk); #1;
      check(w, c, le, te);
    end
    if (n_lead == 0 || n_trail == 0 || n_two == 0) failures++;
    $display("leading=%0d trailing=%0d both=%0d", n_lead, n_trail, n_two);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(10000 * 2560);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
