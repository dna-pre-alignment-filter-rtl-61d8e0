// tb_bin_array -- self-checking test of bin_array (64 bins).
// Streams random rows, one per cycle without gaps and with random gaps, each
// tagged with a count, a last-of-binset flag and a binset number, and checks
// every bitmask (bin selected when its score exceeds the threshold), its
// binset number and that it appears exactly two cycles after the binset's
// last row, against scores kept here.
`timescale 1ns/1ps
module tb_bin_array;
  localparam int unsigned B = 64;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #2 rst_n = 1'b0;  // falling edge starts the asynchronous reset
  logic row_valid = 1'b0, row_last = 1'b0;
  logic [B-1:0] row_data = '0;
  logic [6:0] row_cnt = '0, thr = 7'd3;
  logic [12:0] row_binset = '0;
  logic mask_valid;
  logic [B-1:0] mask;
  logic [12:0] mask_binset;
  int checks = 0, failures = 0;

  bin_array #(.COLS(B), .CNT_W(7), .ACC_W(7), .BINSET_W(13)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { logic [B-1:0] m; int bs; int due; } exp_t;
  exp_t exp_q [$];
  int cycle = 0;
  int n_masks = 0;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && mask_valid) begin
      n_masks++;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected mask");
      end else begin
        automatic exp_t e = exp_q.pop_front();
        if (e.m != mask || 13'(e.bs) != mask_binset || e.due != cycle) begin
          failures++;
          $display("mask %h bs %0d at %0d; expected %h bs %0d at %0d", mask, mask_binset, cycle, e.m, e.bs, e.due);
        end
      end
    end
  end

  initial begin
    int score [B];
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int bs = 0; bs < 200; bs++) begin
      automatic int n = 1 + $urandom % 12;
      foreach (score[k]) score[k] = 0;
      for (int i = 0; i < n; i++) begin
        automatic logic [B-1:0] r = {$urandom, $urandom};
        automatic int c = 1 + $urandom % 3;
        if (bs % 3 == 0 && $urandom % 3 == 0) begin
          row_valid <= 1'b0; @(posedge clk);
        end
        row_valid <= 1'b1; row_data <= r; row_cnt <= 7'(c); row_last <= (i == n - 1);
        row_binset <= 13'(bs);
        for (int k = 0; k < B; k++) if (r[k]) score[k] += c;
        if (i == n - 1) begin
          automatic exp_t e;
          for (int k = 0; k < B; k++) e.m[k] = (score[k] > int'(thr));
          e.bs = bs;
          e.due = cycle + 3;  // cycle reads one behind here: row in cycle N, mask in cycle N+2
          exp_q.push_back(e);
        end
        @(posedge clk);
      end
    end
    row_valid <= 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (n_masks != 200 || exp_q.size() != 0) begin failures++; $display("%0d masks", n_masks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
