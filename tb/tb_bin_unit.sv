// tb_bin_unit -- self-checking test of bin_unit.
// Plays random binsets (1 to 20 tokens each, random presence bits, counts and
// thresholds, idle cycles in between) and checks the accumulator after every
// update and the select bit (score > threshold) after each binset, against a
// score kept here. Includes the boundary cases score == T and score == T+1.
`timescale 1ns/1ps
module tb_bin_unit;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #2 rst_n = 1'b0;  // falling edge starts the asynchronous reset
  logic en = 1'b0, pres = 1'b0, last = 1'b0;
  logic [6:0] cnt = '0, thr = '0, acc;
  logic sel;
  int checks = 0, failures = 0;

  bin_unit #(.CNT_W(7), .ACC_W(7)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic binset(input int n, input int t, input bit force_eq);
    int score = 0;
    bit p;
    int c;
    for (int i = 0; i < n; i++) begin
      p = 1'($urandom);
      c = 1 + int'($urandom % 4);
      if (force_eq) p = 1'b1;
      en = 1'b1; pres = p; cnt = 7'(c); last = (i == n - 1);
      if (p) score += c;
      @(posedge clk); #1;
      en = 1'b0;
      checks++;
      if (i == n - 1) begin
        if (acc != 0 || sel != (score > t)) begin
          failures++; $display("binset end: acc %0d sel %0d, score %0d thr %0d", acc, sel, score, t);
        end
      end else if (acc != 7'(score)) begin
        failures++; $display("acc %0d expected %0d", acc, score);
      end
      if ($urandom % 4 == 0) begin @(posedge clk); #1; end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    for (int r = 0; r < 300; r++) begin
      thr = 7'($urandom % 30);
      binset(1 + $urandom % 20, int'(thr), 1'b0);
    end
    // four tokens of count 1..4 all present: score = sum of counts
    thr = 7'd0;
    for (int r = 0; r < 50; r++) begin
      automatic int n = 1 + $urandom % 5;
      binset(n, 0, 1'b1);
    end
    // exact boundary: score 6 with T = 6 (not selected), T = 5 (selected)
    for (int t = 5; t <= 6; t++) begin
      thr = 7'(t);
      for (int i = 0; i < 3; i++) begin
        en = 1'b1; pres = 1'b1; cnt = 7'd2; last = (i == 2);
        @(posedge clk); #1;
      end
      en = 1'b0;
      checks++;
      if (sel != (t == 5)) begin failures++; $display("boundary T=%0d sel=%0d", t, sel); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
