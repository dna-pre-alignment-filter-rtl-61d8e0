// tb_count_buffer -- self-checking test of count_buffer.
// Feeds token streams (the 14-token example read of the ALPHA flow figure
// plus random 96-token reads with many repeats), then checks the number of
// distinct tokens, the list order (increasing token index), every repetition
// count, the compaction time (distinct tokens + 2 cycles at most) and that
// release clears the buffer for the next read.
`timescale 1ns/1ps
module tb_count_buffer;
  localparam int unsigned K = 5, L = 100, MAXT = L - K + 1;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #2 rst_n = 1'b0;  // falling edge starts the asynchronous reset
  logic tok_valid = 1'b0, read_end = 1'b0, release_list = 1'b0;
  logic [9:0] tok_id = '0;
  logic in_ready, list_valid;
  logic [6:0] n_distinct, rd_idx = '0, rd_cnt;
  logic [9:0] rd_tok;
  int checks = 0, failures = 0;

  count_buffer #(.TOKEN_NT(K), .READ_LEN(L)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [9:0] tok(input string s);
    logic [9:0] t = '0;
    foreach (s[i]) t = {t[7:0], (s[i] == "A") ? 2'd0 : (s[i] == "C") ? 2'd1 : (s[i] == "G") ? 2'd2 : 2'd3};
    return t;
  endfunction

  task automatic run_read(input logic [9:0] toks [$]);
    int ref_cnt [int];
    int keys [$];
    int cyc = 0;
    foreach (toks[i]) ref_cnt[toks[i]] = ref_cnt.exists(toks[i]) ? ref_cnt[toks[i]] + 1 : 1;
    foreach (ref_cnt[k]) keys.push_back(k);
    keys.sort();
    checks++;
    if (!in_ready) begin failures++; $display("not ready for a read"); end
    foreach (toks[i]) begin
      tok_valid <= 1'b1; tok_id <= toks[i]; read_end <= (i == toks.size() - 1);
      @(posedge clk);
    end
    tok_valid <= 1'b0; read_end <= 1'b0;
    while (!list_valid && cyc < 1000) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc > keys.size() + 2) begin failures++; $display("compaction took %0d cycles", cyc); end
    checks++;
    if (n_distinct != keys.size()) begin
      failures++; $display("n_distinct %0d expected %0d", n_distinct, keys.size());
    end
    foreach (keys[i]) begin
      rd_idx = 7'(i); #1;
      checks++;
      if (rd_tok != 10'(keys[i]) || rd_cnt != 7'(ref_cnt[keys[i]])) begin
        failures++;
        $display("entry %0d: tok %0d cnt %0d, expected %0d %0d", i, rd_tok, rd_cnt, keys[i], ref_cnt[keys[i]]);
      end
    end
    repeat (3) @(posedge clk);
    checks++;
    if (!list_valid) begin failures++; $display("list lost"); end
    release_list <= 1'b1; @(posedge clk); release_list <= 1'b0; @(posedge clk);
    checks++;
    if (list_valid || !in_ready) begin failures++; $display("release failed"); end
  endtask

  initial begin
    logic [9:0] q [$];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    // example read of the ALPHA flow figure, tokens t0..t13
    q = {tok("AATAA"), tok("ATAAA"), tok("TAAAC"), tok("AAACA"), tok("AACAC"), tok("ACACA"),
         tok("CACAA"), tok("ACAAA"), tok("CAAAA"), tok("AAAAA"), tok("AAAAT"), tok("AAATA"),
         tok("AATAA"), tok("ATAAA")};
    run_read(q);
    for (int r = 0; r < 6; r++) begin
      q = {};
      for (int i = 0; i < MAXT; i++) q.push_back(10'($urandom % ((r == 0) ? 1 : (r == 1) ? 7 : 1024)));
      run_read(q);
    end
    // all 96 tokens distinct
    q = {};
    for (int i = 0; i < MAXT; i++) q.push_back(10'(1023 - 10 * i));
    run_read(q);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
