// tb_firm_top -- end-to-end test of the FIRM filter at reduced size.
// Configuration: 2-nucleotide tokens (16 tokens), 12-nucleotide reads,
// 64 subarrays of 16 rows x 32 columns, 8-domain track groups: 64 binsets of
// 32 bins. The whole reference (64 binsets x 16 tokens) is loaded with random
// presence bits, then eight reads are streamed back to back, among them a
// read made of one repeated token and reads with repeated tokens. For every
// read the test computes the score of every bin here and checks all 64
// bitmasks (bin selected when score > threshold) in order, plus the number of
// accesses and that the memory model saw no protocol violation.
// It also counts the mechanisms of the design and fails if one never
// happens: stalls on a busy subarray, preshifts, reads through the second
// port of a circular track, track groups wrapping back to their first row,
// several row accesses in flight at once, tokens with a repetition count
// above one, and a read streaming in while rows of the previous one are still in flight.
`timescale 1ns/1ps
module tb_firm_top;
  localparam int unsigned K = 2, L = 12, SAS = 64, R = 16, C = 32, D = 8;
  localparam int unsigned TOKS = 16, BS = 64, NREADS = 8;
  localparam logic [3:0] THR = 4'd3;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #2 rst_n = 1'b0;  // falling edge starts the asynchronous reset
  always #5 clk = ~clk;

  logic nt_valid = 1'b0, nt_last = 1'b0, nt_ready;
  logic [1:0] nt = '0;
  logic [3:0] thr = THR;
  logic ld_valid = 1'b0;
  logic [5:0] ld_binset = '0;
  logic [3:0] ld_token = '0;
  logic [C-1:0] ld_data = '0;
  logic mask_valid;
  logic [C-1:0] mask;
  logic [5:0] mask_binset;
  logic init_busy, sched_busy;
  logic [63:0] n_access, n_shift, n_preshift, n_stall_busy, n_stall_order, mem_shift_count,
               mem_portb_reads;
  logic [31:0] mem_viol_count;

  firm_top #(.TOKEN_NT(K), .READ_LEN(L), .SUBARRAYS(SAS), .ROWS(R), .COLS(C), .DOMAINS(D)) dut (.*);

  int checks = 0, failures = 0;
  logic [C-1:0] refmem [BS][TOKS];

  typedef struct { logic [C-1:0] m; int bs; } exp_t;
  exp_t exp_q [$];
  int n_masks = 0, mask_errs = 0;
  int exp_access = 0;

  // mechanism counters
  int m_overlap = 0, m_inflight = 0, m_wrap = 0, m_repeat = 0, outstanding = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (mask_valid) begin
        n_masks++;
        if (exp_q.size() == 0) begin
          mask_errs++; $display("unexpected mask for binset %0d", mask_binset);
        end else begin
          automatic exp_t e = exp_q.pop_front();
          if (e.m != mask || 6'(e.bs) != mask_binset) begin
            mask_errs++;
            if (mask_errs < 6) $display("mask %h binset %0d, expected %h binset %0d", mask, mask_binset, e.m, e.bs);
          end
        end
      end
      if (nt_valid && nt_ready && outstanding > 0) m_overlap++;
      outstanding <= outstanding + int'(dut.cmd_valid) - int'(dut.rsp_valid);
      if (outstanding > 1) m_inflight++;
      if (dut.cmd_valid && dut.cmd_row % D == D - 1) m_wrap++;
    end
  end

  // stream one read and queue its expected masks
  task automatic send_read(input logic [1:0] s [L]);
    int cnt [TOKS];
    foreach (cnt[t]) cnt[t] = 0;
    for (int i = 0; i + K <= L; i++) cnt[{s[i], s[i+1]}]++;
    foreach (cnt[t]) begin
      if (cnt[t] > 1) m_repeat++;
      if (cnt[t] > 0) exp_access += BS;
    end
    for (int b = 0; b < BS; b++) begin
      automatic exp_t e;
      for (int c = 0; c < C; c++) begin
        automatic int score = 0;
        for (int t = 0; t < TOKS; t++) if (refmem[b][t][c]) score += cnt[t];
        e.m[c] = (score > int'(THR));
      end
      e.bs = b;
      exp_q.push_back(e);
    end
    for (int i = 0; i < L; i++) begin
      nt_valid = 1'b1; nt = s[i]; nt_last = (i == L - 1);
      do @(posedge clk); while (!nt_ready);
      #1;
    end
    nt_valid = 1'b0; nt_last = 1'b0;
  endtask

  initial begin
    logic [1:0] s [L];
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    // load the reference
    for (int b = 0; b < BS; b++)
      for (int t = 0; t < TOKS; t++) begin
        refmem[b][t] = $urandom;
        ld_valid = 1'b1; ld_binset = 6'(b); ld_token = 4'(t); ld_data = refmem[b][t];
        @(posedge clk); #1;
      end
    ld_valid = 1'b0;
    wait (!init_busy);
    @(posedge clk); #1;
    for (int r = 0; r < NREADS; r++) begin
      for (int i = 0; i < L; i++) begin
        case (r)
          0: s[i] = 2'b00;                        // AAAA...: one token, count 11
          1: s[i] = 2'(i % 3);                    // periodic: few tokens, high counts
          default: s[i] = 2'($urandom);
        endcase
      end
      send_read(s);
    end
    while (exp_q.size() != 0 && n_masks < NREADS * BS + 10) @(posedge clk);
    repeat (50) @(posedge clk);
    checks++;
    if (mask_errs != 0 || n_masks != NREADS * BS) begin
      failures++; $display("masks: %0d received, %0d wrong", n_masks, mask_errs);
    end
    checks++;
    if (n_access != 64'(exp_access)) begin failures++; $display("accesses %0d expected %0d", n_access, exp_access); end
    checks++;
    if (mem_viol_count != 0) begin failures++; $display("memory violations %0d", mem_viol_count); end
    checks++;
    if (mem_shift_count != n_shift) begin failures++; $display("shift counts differ"); end
    // every mechanism must have happened
    $display("mechanisms: busy stalls %0d, order stalls %0d, preshifted domains %0d, port-B reads %0d, group wraps %0d, cycles with >1 access in flight %0d, repeated tokens %0d, overlapped read input %0d",
             n_stall_busy, n_stall_order, n_preshift, mem_portb_reads, m_wrap, m_inflight, m_repeat, m_overlap);
    checks++; if (n_stall_busy == 0)    begin failures++; $display("no busy stall"); end
    checks++; if (n_preshift == 0)      begin failures++; $display("no preshift"); end
    checks++; if (mem_portb_reads == 0) begin failures++; $display("no port-B read"); end
    checks++; if (m_wrap == 0)          begin failures++; $display("no group wrap"); end
    checks++; if (m_inflight == 0)      begin failures++; $display("no pipelining"); end
    checks++; if (m_repeat == 0)        begin failures++; $display("no repeated token"); end
    checks++; if (m_overlap == 0)       begin failures++; $display("no overlapped read input"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
