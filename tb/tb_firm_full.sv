// tb_firm_full -- one complete filtering operation at full size.
// firm_top with its default configuration (5-nucleotide tokens, 100-nucleotide
// reads, 8192 subarrays of 1024 rows x 4096 columns, 64-domain track groups,
// 8192 binsets of 4096 bins = 2^25 bins). Presence rows are loaded for the
// read's own tokens and for some other tokens in a few binsets spread over
// the reference (first and last binsets, binsets sharing subarrays, binsets
// at track-group boundaries); all other rows are empty. Two random reads are
// filtered, back to back, against the whole reference. The test checks all
// 2 x 8192 bitmasks (scores computed here), the number of row accesses (8192
// per distinct token), the number of shifted domains (62 per visited track
// group with the circular two-port tracks; the second read finds every group
// back at row 0, so it needs no reset shifts either), no memory protocol
// violation, and that the scheduler keeps up one access per cycle apart from
// a short start-up and the counting of the second read.
`timescale 1ns/1ps
module tb_firm_full;
  localparam int unsigned C = 4096, BS = 8192, TOKS = 1024, L = 100;
  localparam logic [6:0] THR = 7'd2;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #2 rst_n = 1'b0;  // falling edge starts the asynchronous reset
  always #5 clk = ~clk;

  logic nt_valid = 1'b0, nt_last = 1'b0, nt_ready;
  logic [1:0] nt = '0;
  logic [6:0] thr = THR;
  logic ld_valid = 1'b0;
  logic [12:0] ld_binset = '0;
  logic [9:0] ld_token = '0;
  logic [C-1:0] ld_data = '0;
  logic mask_valid;
  logic [C-1:0] mask;
  logic [12:0] mask_binset;
  logic init_busy, sched_busy;
  logic [63:0] n_access, n_shift, n_preshift, n_stall_busy, n_stall_order, mem_shift_count,
               mem_portb_reads;
  logic [31:0] mem_viol_count;

  firm_top dut (.*);

  int checks = 0, failures = 0;
  int n_masks = 0, mask_errs = 0;
  logic [C-1:0] exp_mask [int];       // read * BS + binset -> expected mask (absent: empty)
  logic [C-1:0] loaded [int];         // binset index * TOKS + token -> loaded row
  int cycle = 0;

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && mask_valid) begin
      automatic int key = (n_masks / BS) * BS + int'(mask_binset);
      automatic logic [C-1:0] e = exp_mask.exists(key) ? exp_mask[key] : '0;
      if (mask_binset != 13'(n_masks % BS) || mask != e) begin
        mask_errs++;
        if (mask_errs < 5) $display("binset %0d (mask %0d): mismatch", mask_binset, n_masks);
      end
      n_masks++;
    end
  end

  function automatic logic [C-1:0] rand_row();
    logic [C-1:0] r;
    for (int i = 0; i < C / 32; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  // expected masks of read rd with token counts cn, from the loaded rows
  task automatic expect_read(input int rd, input int cn [TOKS], input int bsel [8]);
    int score [C];
    foreach (bsel[k]) begin
      logic [C-1:0] e;
      foreach (score[c]) score[c] = 0;
      for (int t = 0; t < TOKS; t++)
        if (cn[t] > 0 && loaded.exists(k * TOKS + t))
          for (int c = 0; c < C; c++) if (loaded[k * TOKS + t][c]) score[c] += cn[t];
      for (int c = 0; c < C; c++) e[c] = (score[c] > int'(THR));
      exp_mask[rd * BS + bsel[k]] = e;
    end
  endtask

  task automatic send_read(input logic [1:0] s [L]);
    for (int i = 0; i < L; i++) begin
      nt_valid = 1'b1; nt = s[i]; nt_last = (i == L - 1);
      do @(posedge clk); while (!nt_ready);
      #1;
    end
    nt_valid = 1'b0; nt_last = 1'b0;
  endtask

  initial begin
    logic [1:0] s1 [L], s2 [L];
    int cnt1 [TOKS], cnt2 [TOKS];
    int d1 = 0, d2 = 0;
    int bsel [8] = '{0, 1, 7, 8, 63, 64, 4095, 8191};
    int t_first, t_last;
    logic [63:0] shift1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    foreach (s1[i]) s1[i] = 2'($urandom);
    foreach (s2[i]) s2[i] = 2'($urandom);
    foreach (cnt1[t]) begin cnt1[t] = 0; cnt2[t] = 0; end
    for (int i = 0; i + 5 <= L; i++) cnt1[{s1[i], s1[i+1], s1[i+2], s1[i+3], s1[i+4]}]++;
    for (int i = 0; i + 5 <= L; i++) cnt2[{s2[i], s2[i+1], s2[i+2], s2[i+3], s2[i+4]}]++;
    foreach (cnt1[t]) begin if (cnt1[t] > 0) d1++; if (cnt2[t] > 0) d2++; end
    // load rows: every token of the first read plus 20 other tokens, in 8
    // binsets; the second read shares only some of these tokens
    @(posedge clk); #1;
    foreach (bsel[k]) begin
      for (int t = 0; t < TOKS; t++) begin
        if (cnt1[t] > 0 || t % 50 == 7) begin
          automatic logic [C-1:0] r = rand_row();
          ld_valid = 1'b1; ld_binset = 13'(bsel[k]); ld_token = 10'(t); ld_data = r;
          loaded[k * TOKS + t] = r;
          @(posedge clk); #1;
        end
      end
    end
    ld_valid = 1'b0;
    expect_read(0, cnt1, bsel);
    expect_read(1, cnt2, bsel);
    wait (!init_busy);
    @(posedge clk); #1;
    send_read(s1);
    wait (sched_busy);
    t_first = cycle;
    send_read(s2);              // waits until the first read has been issued
    wait (n_access == 64'(d1 * BS));
    shift1 = n_shift;
    wait (n_access == 64'((d1 + d2) * BS));
    t_last = cycle;
    while (n_masks < 2 * BS) @(posedge clk);
    repeat (20) @(posedge clk);
    $display("reads with %0d and %0d distinct tokens: %0d accesses in %0d cycles, %0d shifted domains, stalls %0d/%0d",
             d1, d2, n_access, t_last - t_first, n_shift, n_stall_busy, n_stall_order);
    checks++;
    if (n_masks != 2 * BS || mask_errs != 0) begin failures++; $display("%0d masks, %0d wrong", n_masks, mask_errs); end
    checks++;
    if (n_access != 64'((d1 + d2) * BS)) begin failures++; $display("access count"); end
    checks++;
    if (shift1 != 64'(d1 * 8 * 16 * 62)) begin
      failures++; $display("first read: shift count %0d, expected %0d", shift1, d1 * 8 * 16 * 62);
    end
    checks++;
    if (n_shift - shift1 != 64'(d2 * 8 * 16 * 62) || mem_shift_count != n_shift) begin
      failures++; $display("second read: shift count %0d, expected %0d", n_shift - shift1, d2 * 8 * 16 * 62);
    end
    checks++;
    if (mem_viol_count != 0) begin failures++; $display("memory violations"); end
    checks++;
    if (t_last - t_first > (d1 + d2) * BS + L + d2 + 64) begin
      failures++; $display("throughput below one row per cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
