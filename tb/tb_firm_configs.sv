// tb_firm_configs -- the three FIRM configurations side by side.
// Three copies of firm_top filter the same reads against the same reference:
//   FIRM   (PRESHIFT = 0, US_BUF = 0): tracks shifted on demand, groups reset
//          lazily at the next read,
//   FIRMPR (PRESHIFT = 1, US_BUF = 0): each group moved to its next row right
//          after an access, and back to its first row after its last one,
//   FIRMUS (PRESHIFT = 1, US_BUF = 1): preshifting on two-port circular
//          tracks, which end a pass in their reset position.
// Reduced size: 2-nucleotide tokens (16 tokens), 12-nucleotide reads,
// 64 subarrays of 16 rows x 32 columns, 8-domain track groups (64 binsets).
// Every bitmask of every configuration is checked against scores computed
// here. The shift totals of FIRMPR and FIRMUS are checked in closed form
// (2(D-1) and D-2 domains per visited track group and read). FIRM must shift
// more than FIRMUS, FIRMUS must be no slower than FIRMPR, and FIRMPR no
// slower than FIRM. The run time and shift count of each are printed.
`timescale 1ns/1ps
module tb_firm_configs;
  localparam int unsigned K = 2, L = 12, SAS = 64, R = 16, C = 32, D = 8;
  localparam int unsigned TOKS = 16, BS = 64, NREADS = 6, NCFG = 3;
  localparam int unsigned SA1 = SAS / TOKS;      // subarrays per token
  localparam logic [3:0] THR = 4'd3;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #2 rst_n = 1'b0;  // falling edge starts the asynchronous reset
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic [C-1:0] refmem [BS][TOKS];
  logic [1:0]   reads [NREADS][L];
  logic [C-1:0] exp_mask [NREADS][BS];
  int           distinct [NREADS];
  bit           data_ready = 1'b0;

  // results per configuration
  int          t_run [NCFG];
  int          mask_errs [NCFG];
  int          n_masks [NCFG];
  logic [63:0] r_access [NCFG], r_shift [NCFG], r_portb [NCFG];
  logic [31:0] r_viol [NCFG];
  bit          done [NCFG];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference, reads and expected bitmasks
  initial begin
    foreach (refmem[b, t]) refmem[b][t] = C'($urandom);
    foreach (reads[r, i]) reads[r][i] = 2'($urandom);
    for (int i = 0; i < L; i++) reads[1][i] = 2'(i % 2);       // ACAC..: one token repeated
    foreach (reads[r]) begin
      int cnt [TOKS];
      foreach (cnt[t]) cnt[t] = 0;
      for (int i = 0; i + K <= L; i++) cnt[{reads[r][i], reads[r][i+1]}]++;
      distinct[r] = 0;
      foreach (cnt[t]) if (cnt[t] > 0) distinct[r]++;
      for (int b = 0; b < BS; b++)
        for (int c = 0; c < C; c++) begin
          automatic int score = 0;
          for (int t = 0; t < TOKS; t++) if (refmem[b][t][c]) score += cnt[t];
          exp_mask[r][b][c] = (score > int'(THR));
        end
    end
    data_ready = 1'b1;
  end

  for (genvar g = 0; g < NCFG; g++) begin : cfg
    localparam bit PS = (g > 0);
    localparam bit US = (g == 2);

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

    firm_top #(.TOKEN_NT(K), .READ_LEN(L), .SUBARRAYS(SAS), .ROWS(R), .COLS(C), .DOMAINS(D),
               .PRESHIFT(PS), .US_BUF(US)) dut (.*);

    always @(posedge clk) begin
      if (rst_n && mask_valid && n_masks[g] < NREADS * BS) begin
        automatic int r = n_masks[g] / BS, b = n_masks[g] % BS;
        if (mask_binset != 6'(b) || mask != exp_mask[r][b]) begin
          mask_errs[g]++;
          if (mask_errs[g] < 4) $display("config %0d read %0d binset %0d: wrong mask", g, r, b);
        end
        n_masks[g]++;
      end
    end

    initial begin
      int t0;
      n_masks[g] = 0;
      mask_errs[g] = 0;
      done[g] = 1'b0;
      wait (data_ready);
      repeat (3) @(posedge clk);
      #1;
      rst_n = 1'b1;
      for (int b = 0; b < BS; b++)
        for (int t = 0; t < TOKS; t++) begin
          ld_valid = 1'b1; ld_binset = 6'(b); ld_token = 4'(t); ld_data = refmem[b][t];
          @(posedge clk); #1;
        end
      ld_valid = 1'b0;
      wait (!init_busy);
      @(posedge clk); #1;
      t0 = cycle;
      for (int r = 0; r < NREADS; r++)
        for (int i = 0; i < L; i++) begin
          nt_valid = 1'b1; nt = reads[r][i]; nt_last = (i == L - 1);
          do @(posedge clk); while (!nt_ready);
          #1;
        end
      nt_valid = 1'b0; nt_last = 1'b0;
      while (n_masks[g] < NREADS * BS) @(posedge clk);
      t_run[g] = cycle - t0;
      repeat (5) @(posedge clk);
      r_access[g] = n_access;
      r_shift[g]  = n_shift;
      r_portb[g]  = mem_portb_reads;
      r_viol[g]   = mem_viol_count;
      if (mem_shift_count != n_shift) r_viol[g]++;   // scheduler and memory disagree
      done[g] = 1'b1;
    end
  end

  initial begin
    int sum_d = 0;
    string name [NCFG] = '{"FIRM", "FIRMPR", "FIRMUS"};
    wait (done[0] && done[1] && done[2]);
    foreach (distinct[r]) sum_d += distinct[r];
    for (int g = 0; g < NCFG; g++) begin
      $display("%-6s: %0d cycles, %0d accesses, %0d shifted domains, %0d second-port reads",
               name[g], t_run[g], r_access[g], r_shift[g], r_portb[g]);
      checks++;
      if (mask_errs[g] != 0) begin failures++; $display("%s: %0d wrong masks", name[g], mask_errs[g]); end
      checks++;
      if (r_access[g] != 64'(sum_d * BS)) begin failures++; $display("%s: access count", name[g]); end
      checks++;
      if (r_viol[g] != 0) begin failures++; $display("%s: memory violations or shift mismatch", name[g]); end
    end
    // visited track groups per read: distinct tokens x SA1 subarrays x R/D groups
    checks++;
    if (r_shift[1] != 64'(sum_d * SA1 * (R / D) * 2 * (D - 1))) begin
      failures++; $display("FIRMPR shifts %0d", r_shift[1]);
    end
    checks++;
    if (r_shift[2] != 64'(sum_d * SA1 * (R / D) * (D - 2))) begin
      failures++; $display("FIRMUS shifts %0d", r_shift[2]);
    end
    checks++;
    if (!(r_shift[0] > r_shift[2])) begin failures++; $display("FIRM does not shift more than FIRMUS"); end
    checks++;
    if (r_portb[2] != 64'(sum_d * BS / 2) || r_portb[0] != 0 || r_portb[1] != 0) begin
      failures++; $display("second-port reads");
    end
    checks++;
    if (!(t_run[2] <= t_run[1] && t_run[1] <= t_run[0])) begin
      failures++; $display("run times not ordered FIRMUS <= FIRMPR <= FIRM");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
