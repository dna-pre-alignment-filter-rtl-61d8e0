// tb_token_extractor -- self-checking test of token_extractor.
// Streams reads of several lengths (100, 12, 5, 3 nucleotides) with random
// content and gaps, and compares every emitted token id, the number of tokens
// per read, the read_end pulse and the one-cycle latency with a reference
// computed here from the nucleotide array.
`timescale 1ns/1ps
module tb_token_extractor;
  localparam int unsigned K = 5;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #2 rst_n = 1'b0;  // falling edge starts the asynchronous reset
  logic nt_valid = 1'b0, nt_last = 1'b0;
  logic [1:0] nt = '0;
  logic tok_valid, read_end;
  logic [2*K-1:0] tok_id;
  int checks = 0, failures = 0;

  token_extractor #(.TOKEN_NT(K)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected tokens, queued by the driver
  logic [2*K-1:0] exp_q [$];
  int got_tokens = 0;
  bit exp_end = 1'b0;

  always @(posedge clk) begin
    if (rst_n && tok_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected token %0d", tok_id);
      end else begin
        automatic logic [2*K-1:0] e = exp_q.pop_front();
        if (e !== tok_id) begin failures++; $display("token %0d expected %0d", tok_id, e); end
      end
    end
  end

  task automatic send_read(input int len, input bit gaps);
    logic [1:0] s [];
    s = new[len];
    foreach (s[i]) s[i] = 2'($urandom);
    for (int i = 0; i + K <= len; i++) begin
      automatic logic [2*K-1:0] t = '0;
      for (int k = 0; k < K; k++) t = {t[2*K-3:0], s[i+k]};
      exp_q.push_back(t);
    end
    for (int i = 0; i < len; i++) begin
      if (gaps && ($urandom % 3 == 0)) begin
        nt_valid <= 1'b0; @(posedge clk);
      end
      nt_valid <= 1'b1; nt <= s[i]; nt_last <= (i == len - 1);
      @(posedge clk);
      nt_valid <= 1'b0; nt_last <= 1'b0;
      // one-cycle latency: the token of nucleotide i is visible now
      #1;
      if (i >= K - 1) begin
        checks++;
        if (!tok_valid) begin failures++; $display("no token after nucleotide %0d", i); end
      end else begin
        checks++;
        if (tok_valid) begin failures++; $display("early token after nucleotide %0d", i); end
      end
      checks++;
      if (read_end !== (i == len - 1)) begin failures++; $display("read_end wrong at %0d", i); end
    end
    @(posedge clk); #1;
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d tokens missing", exp_q.size()); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    send_read(100, 1'b0);
    send_read(100, 1'b1);
    send_read(12, 1'b1);
    send_read(5, 1'b0);
    send_read(3, 1'b0);
    send_read(100, 1'b0);
    // fixed example: AATAA = 0b0000110000 = 48
    exp_q.push_back(10'd48);
    nt_valid <= 1'b1; nt <= 2'b00; @(posedge clk);
    nt <= 2'b00; @(posedge clk);
    nt <= 2'b11; @(posedge clk);
    nt <= 2'b00; @(posedge clk);
    nt <= 2'b00; nt_last <= 1'b1; @(posedge clk);
    nt_valid <= 1'b0; nt_last <= 1'b0;
    repeat (2) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
