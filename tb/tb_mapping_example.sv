// tb_mapping_example -- the interleaved mapping at full size, on a worked example.
// A read whose distinct tokens are AAAAG, AAACT, AAAGG and AACTA (token ids
// 2, 7, 10 and 28) is scheduled by two memory schedulers with the default
// sizes (8192 subarrays of 1024 rows, 64-domain track groups, 8192 binsets):
// one in the default configuration (preshift, circular two-port tracks) and
// one without preshift and with one port. The test stands in for the
// CountBuffer list and checks, for both, every one of the 4 x 8192 commands:
// binset b and token t go to subarray {b[2:0], t} and row b >> 3, binsets in
// order, tokens in index order. For the default configuration it checks that
// every access finds its row aligned (no shift before an access), that each
// preshift moves at most one domain and that a full pass costs 62 shifts per
// visited track group. Without preshift, the first eight binsets touch fresh
// subarrays at row 0 and need no shift: the first shift comes with binset 8,
// which returns to subarray 2 (token AAAAG) at row 1.
`timescale 1ns/1ps
module tb_mapping_example;
  localparam int unsigned BS = 8192, NT = 4;
  localparam logic [9:0] TOK [NT] = '{10'd2, 10'd7, 10'd10, 10'd28};

  logic clk = 1'b0, rst_n = 1'b1;
  initial #2 rst_n = 1'b0;  // falling edge starts the asynchronous reset
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic list_valid [2] = '{1'b0, 1'b0};
  logic [6:0] n_distinct = 7'(NT);

  // configuration 0: default (PRESHIFT = 1, US_BUF = 1); 1: no preshift, one port
  logic [6:0]  rd_idx [2];
  logic [9:0]  rd_tok [2];
  logic [6:0]  rd_cnt [2];
  logic        release_list [2], cmd_valid [2], cmd_pre_en [2], init_busy [2], busy [2];
  logic [12:0] cmd_sa [2];
  logic [9:0]  cmd_row [2], cmd_pre_row [2];
  logic [20:0] cmd_tag [2];
  logic [63:0] n_access [2], n_shift [2], n_preshift [2], n_stall_busy [2], n_stall_order [2];

  mem_scheduler u_us (
    .clk, .rst_n, .list_valid(list_valid[0]), .n_distinct, .rd_idx(rd_idx[0]), .rd_tok(rd_tok[0]),
    .rd_cnt(rd_cnt[0]), .release_list(release_list[0]), .cmd_valid(cmd_valid[0]),
    .cmd_sa(cmd_sa[0]), .cmd_row(cmd_row[0]), .cmd_pre_en(cmd_pre_en[0]),
    .cmd_pre_row(cmd_pre_row[0]), .cmd_tag(cmd_tag[0]), .init_busy(init_busy[0]),
    .busy(busy[0]), .n_access(n_access[0]), .n_shift(n_shift[0]),
    .n_preshift(n_preshift[0]), .n_stall_busy(n_stall_busy[0]),
    .n_stall_order(n_stall_order[0]));

  mem_scheduler #(.PRESHIFT(1'b0), .US_BUF(1'b0)) u_plain (
    .clk, .rst_n, .list_valid(list_valid[1]), .n_distinct, .rd_idx(rd_idx[1]), .rd_tok(rd_tok[1]),
    .rd_cnt(rd_cnt[1]), .release_list(release_list[1]), .cmd_valid(cmd_valid[1]),
    .cmd_sa(cmd_sa[1]), .cmd_row(cmd_row[1]), .cmd_pre_en(cmd_pre_en[1]),
    .cmd_pre_row(cmd_pre_row[1]), .cmd_tag(cmd_tag[1]), .init_busy(init_busy[1]),
    .busy(busy[1]), .n_access(n_access[1]), .n_shift(n_shift[1]),
    .n_preshift(n_preshift[1]), .n_stall_busy(n_stall_busy[1]),
    .n_stall_order(n_stall_order[1]));

  // the CountBuffer list, read combinationally by index
  for (genvar g = 0; g < 2; g++) begin : lst
    assign rd_tok[g] = (rd_idx[g] < 7'(NT)) ? TOK[rd_idx[g]] : '0;
    assign rd_cnt[g] = 7'd1;
  end

  int n_cmd [2] = '{0, 0};
  int cmd_errs [2] = '{0, 0};
  int first_shift_cmd = -1;        // command index of the first shift without preshift
  logic [12:0] first_shift_sa;
  logic [9:0]  first_shift_row;
  logic [63:0] last_shift [2] = '{0, 0};
  int preshift_errs = 0;
  bit released [2] = '{0, 0};

  always @(posedge clk) begin
    // the counters show a command's shifts one cycle after it, when n_cmd
    // already counts it
    if (rst_n && n_shift[1] != last_shift[1] && first_shift_cmd < 0)
      first_shift_cmd = n_cmd[1] - 1;
    last_shift[1] <= n_shift[1];
    for (int g = 0; g < 2; g++) begin
      if (rst_n && cmd_valid[g]) begin
        automatic int b = n_cmd[g] / NT, j = n_cmd[g] % NT;
        if (cmd_sa[g] != {3'(b), TOK[j]} || cmd_row[g] != 10'(b >> 3)) begin
          cmd_errs[g]++;
          if (cmd_errs[g] < 4)
            $display("config %0d command %0d: subarray %0d row %0d, expected %0d row %0d",
                     g, n_cmd[g], cmd_sa[g], cmd_row[g], {3'(b), TOK[j]}, b >> 3);
        end
        if (g == 0 && (cmd_pre_row[0] != ((cmd_row[0] % 64 == 63) ? cmd_row[0] - 10'd63 : cmd_row[0] + 10'd1)))
          preshift_errs++;
        if (g == 1 && n_cmd[1] == 8 * NT) begin
          first_shift_sa  = cmd_sa[1];
          first_shift_row = cmd_row[1];
        end
        n_cmd[g]++;
      end
      if (rst_n && release_list[g]) begin
        released[g] = 1'b1;
        list_valid[g] <= 1'b0;       // one read only
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    wait (!init_busy[0] && !init_busy[1]);
    @(posedge clk); #1;
    list_valid[0] = 1'b1;
    list_valid[1] = 1'b1;
    wait (released[0] && released[1]);
    repeat (5) @(posedge clk);
    $display("default: %0d accesses, %0d shifted domains (%0d preshifted); no preshift: %0d shifted domains, first shift at command %0d",
             n_access[0], n_shift[0], n_preshift[0], n_shift[1], first_shift_cmd);
    for (int g = 0; g < 2; g++) begin
      checks++;
      if (n_cmd[g] != NT * BS || cmd_errs[g] != 0) begin
        failures++; $display("config %0d: %0d commands, %0d wrong", g, n_cmd[g], cmd_errs[g]);
      end
    end
    checks++;
    if (preshift_errs != 0) begin failures++; $display("%0d wrong preshift targets", preshift_errs); end
    checks++;
    if (n_shift[0] != n_preshift[0]) begin failures++; $display("default: shift before an access"); end
    checks++;
    if (n_preshift[0] > n_access[0]) begin failures++; $display("default: preshift of more than one domain"); end
    checks++;
    if (n_shift[0] != 64'(NT * 8 * 16 * 62)) begin
      failures++; $display("default: %0d shifted domains, expected %0d", n_shift[0], NT * 8 * 16 * 62);
    end
    checks++;
    if (first_shift_cmd != 8 * NT || first_shift_sa != 13'd2 || first_shift_row != 10'd1) begin
      failures++;
      $display("no preshift: first shift at command %0d (subarray %0d row %0d), expected %0d (subarray 2 row 1)",
               first_shift_cmd, first_shift_sa, first_shift_row, 8 * NT);
    end
    checks++;
    if (n_shift[1] != 64'(NT * 8 * 16 * 63)) begin
      failures++; $display("no preshift: %0d shifted domains, expected %0d", n_shift[1], NT * 8 * 16 * 63);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
