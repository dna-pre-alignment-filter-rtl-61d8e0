// tb_mem_scheduler -- self-checking test of mem_scheduler.
// Small configuration: 2-nucleotide tokens (16 tokens), 64 subarrays (so 4
// subarrays per token), 16 rows, 8-domain track groups: 64 binsets. Three
// schedulers run side by side: preshift with circular two-port tracks (the
// main configuration), preshift with single-port tracks, and no preshift.
// Each drives its own racetrack memory model. For reads of 9, 1 and 5
// distinct tokens the test checks
//  * every command: subarray {binset low bits, token}, row binset>>2, tag,
//    preshift row, in binset-major, token-index order;
//  * no protocol violation reported by the memory model;
//  * the shifted-domain totals against closed forms: per visited track group
//    D-2 (circular), 2(D-1) (preshift, single port), D-1 plus the lazy reset
//    of groups left shifted by the previous read (no preshift);
//  * one access per cycle without stalls for the 9-token read in the main
//    configuration, and stalls on busy subarrays for the 1-token read.
`timescale 1ns/1ps
module tb_mem_scheduler;
  localparam int unsigned K = 2, L = 10, SAS = 64, R = 16, D = 8;
  localparam int unsigned TOKS = 16, SA1 = 2, BS = R << SA1, MAXT = L - K + 1;
  localparam int unsigned NCFG = 3;
  localparam bit PS [NCFG] = '{1'b1, 1'b1, 1'b0};
  localparam bit US [NCFG] = '{1'b1, 1'b0, 1'b0};

  logic clk = 1'b0, rst_n = 1'b1;
  initial #2 rst_n = 1'b0;  // falling edge starts the asynchronous reset
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // the read's distinct-token list, shared by all schedulers
  int lst_tok [$];
  int lst_cnt [$];
  logic list_valid [NCFG];
  logic release_list [NCFG];
  logic [63:0] n_access [NCFG], n_shift [NCFG], n_preshift [NCFG], n_stall_busy [NCFG],
               n_stall_order [NCFG], mshift [NCFG];
  logic [31:0] viol [NCFG];
  logic init_busy [NCFG];
  int cmd_errs [NCFG];
  int cmd_seen [NCFG];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    logic [3:0] rd_idx, n_distinct;
    logic [3:0] rd_tok;
    logic [3:0] rd_cnt;
    logic cmd_valid, cmd_pre_en, busy, rsp_valid;
    logic [5:0] cmd_sa;
    logic [3:0] cmd_row, cmd_pre_row;
    logic [10:0] cmd_tag, rsp_tag;
    logic [7:0] rsp_data;
    logic [63:0] portb;

    assign n_distinct = 4'(lst_tok.size());
    assign rd_tok = (int'(rd_idx) < lst_tok.size()) ? 4'(lst_tok[rd_idx]) : '0;
    assign rd_cnt = (int'(rd_idx) < lst_cnt.size()) ? 4'(lst_cnt[rd_idx]) : '0;

    mem_scheduler #(.SUBARRAYS(SAS), .ROWS(R), .DOMAINS(D), .TOKEN_NT(K), .READ_LEN(L),
                    .PRESHIFT(PS[g]), .US_BUF(US[g])) dut (
      .clk(clk), .rst_n(rst_n), .list_valid(list_valid[g]), .n_distinct(n_distinct),
      .rd_idx(rd_idx), .rd_tok(rd_tok), .rd_cnt(rd_cnt), .release_list(release_list[g]),
      .cmd_valid(cmd_valid), .cmd_sa(cmd_sa), .cmd_row(cmd_row), .cmd_pre_en(cmd_pre_en),
      .cmd_pre_row(cmd_pre_row), .cmd_tag(cmd_tag), .init_busy(init_busy[g]), .busy(busy),
      .n_access(n_access[g]), .n_shift(n_shift[g]), .n_preshift(n_preshift[g]),
      .n_stall_busy(n_stall_busy[g]), .n_stall_order(n_stall_order[g]));

    rtm_memory #(.SUBARRAYS(SAS), .ROWS(R), .COLS(8), .DOMAINS(D), .US_BUF(US[g]), .TAG_W(11)) mem (
      .clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_sa(cmd_sa), .cmd_row(cmd_row),
      .cmd_pre_en(cmd_pre_en), .cmd_pre_row(cmd_pre_row), .cmd_tag(cmd_tag),
      .rsp_valid(rsp_valid), .rsp_data(rsp_data), .rsp_tag(rsp_tag),
      .ld_valid(1'b0), .ld_sa('0), .ld_row('0), .ld_data('0),
      .shift_count(mshift[g]), .portb_reads(portb), .viol_count(viol[g]));

    // expected command order: binset-major, then token index
    always @(posedge clk) begin
      if (rst_n && cmd_valid) begin
        automatic int b = cmd_seen[g] / lst_tok.size();
        automatic int j = cmd_seen[g] % lst_tok.size();
        automatic int row = b >> SA1;
        automatic int d = row % D;
        automatic int pre = (row / D) * D + ((d == D - 1) ? 0 : d + 1);
        automatic logic [10:0] tag = {6'(b), 4'(lst_cnt[j]), (j == lst_tok.size() - 1)};
        if (cmd_sa != 6'((b % 4) * TOKS + lst_tok[j]) || cmd_row != 4'(row) ||
            cmd_tag != tag || cmd_pre_en != PS[g] || (PS[g] && cmd_pre_row != 4'(pre))) begin
          cmd_errs[g]++;
          if (cmd_errs[g] < 5)
            $display("cfg %0d cmd %0d: sa %0d row %0d tag %h pre %0d; expected sa %0d row %0d tag %h pre %0d",
                     g, cmd_seen[g], cmd_sa, cmd_row, cmd_tag, cmd_pre_row,
                     (b % 4) * TOKS + lst_tok[j], row, tag, pre);
        end
        cmd_seen[g]++;
      end
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int prev_tok [$];

  task automatic run_read(input int toks [$], input string name);
    logic [63:0] a0 [NCFG], s0 [NCFG], p0 [NCFG], sb0 [NCFG], so0 [NCFG], m0 [NCFG];
    bit done [NCFG];
    int shared = 0;
    int n = toks.size();
    int groups = n * (1 << SA1) * (R / D);   // track groups visited
    int cyc = 0;
    toks.sort();
    lst_tok = toks;
    lst_cnt = {};
    foreach (toks[i]) lst_cnt.push_back(1 + $urandom % 3);
    foreach (toks[i]) foreach (prev_tok[k]) if (prev_tok[k] == toks[i]) shared++;
    for (int g = 0; g < NCFG; g++) begin
      a0[g] = n_access[g]; s0[g] = n_shift[g]; p0[g] = n_preshift[g];
      sb0[g] = n_stall_busy[g]; so0[g] = n_stall_order[g]; m0[g] = mshift[g];
      cmd_seen[g] = 0; cmd_errs[g] = 0; done[g] = 1'b0;
      list_valid[g] = 1'b1;
    end
    while (!(done[0] && done[1] && done[2]) && cyc < 20000) begin
      @(posedge clk);
      for (int g = 0; g < NCFG; g++) if (release_list[g]) done[g] = 1'b1;
      #1;
      for (int g = 0; g < NCFG; g++) if (done[g]) list_valid[g] = 1'b0;
      cyc++;
    end
    repeat (300) @(posedge clk);
    #1;
    for (int g = 0; g < NCFG; g++) begin
      check(done[g], $sformatf("%s cfg %0d finished", name, g));
      check(cmd_errs[g] == 0 && cmd_seen[g] == n * BS, $sformatf("%s cfg %0d commands (%0d seen, %0d wrong)",
            name, g, cmd_seen[g], cmd_errs[g]));
      check(n_access[g] - a0[g] == 64'(n * BS), $sformatf("%s cfg %0d access count", name, g));
      check(viol[g] == 0, $sformatf("%s cfg %0d memory violations %0d", name, g, viol[g]));
      check(mshift[g] - m0[g] == n_shift[g] - s0[g], $sformatf("%s cfg %0d shift counts agree", name, g));
    end
    check(n_shift[0] - s0[0] == 64'(groups * (D - 2)), $sformatf("%s circular shifts %0d", name, n_shift[0] - s0[0]));
    check(n_preshift[0] - p0[0] == n_shift[0] - s0[0], $sformatf("%s circular: all shifts are preshifts", name));
    check(n_shift[1] - s0[1] == 64'(groups * 2 * (D - 1)), $sformatf("%s preshift shifts %0d", name, n_shift[1] - s0[1]));
    check(n_shift[2] - s0[2] == 64'((groups + shared * (1 << SA1) * (R / D)) * (D - 1)),
          $sformatf("%s no-preshift shifts %0d (shared %0d)", name, n_shift[2] - s0[2], shared));
    check(n_preshift[2] == 0, "no preshift in cfg 2");
    if (n >= 4) begin
      check(n_stall_busy[0] == sb0[0] && n_stall_order[0] == so0[0],
            $sformatf("%s: one access per cycle without stalls", name));
    end
    if (n == 1) begin
      check(n_stall_busy[0] > sb0[0], $sformatf("%s: busy-subarray stalls seen", name));
    end
    // without preshift every group visited so far stays shifted to its last row
    foreach (toks[i]) if (!(toks[i] inside {prev_tok})) prev_tok.push_back(toks[i]);
    $display("%s: n=%0d cycles~%0d shifts %0d/%0d/%0d stalls busy %0d order %0d (cfg2)", name, n, cyc,
             n_shift[0] - s0[0], n_shift[1] - s0[1], n_shift[2] - s0[2],
             n_stall_busy[2] - sb0[2], n_stall_order[2] - so0[2]);
  endtask

  initial begin
    int q [$];
    for (int g = 0; g < NCFG; g++) list_valid[g] = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    wait (!init_busy[0] && !init_busy[1] && !init_busy[2]);
    @(posedge clk); #1;
    q = {0, 3, 4, 7, 9, 10, 12, 13, 15};
    run_read(q, "read A");
    q = {4};
    run_read(q, "read B");
    q = {1, 4, 5, 9, 14};
    run_read(q, "read C");
    check(n_stall_order[2] > 0, "order stalls seen without preshift");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
