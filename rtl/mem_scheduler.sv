// mem_scheduler -- memory access scheduler of the logic layer.
//
// For one read it walks every binset b = 0 .. BINSETS-1 of the reference and,
// inside a binset, every distinct token t of the read in token-index order
// (the CountBuffer list). Each (b, t) is one row access:
//     subarray = {b[SA1_W-1:0], t}      row = b >> SA1_W
// which is the interleaved mapping: consecutive tokens of a binset sit in
// different subarrays, so their accesses overlap (pipelining), and only the
// subarrays of tokens present in the read are ever touched.
//
// The scheduler mirrors the memory state it needs for issuing:
//  * pos_tab: the port offset of every track group (subarray x group),
//  * ready_tab: the cycle at which every subarray finishes its last
//    access (PRE plus any preshift),
//  * last_ret: the cycle of the latest scheduled response.
// An access is issued when its subarray is ready and its response,
// T_SH*S + T_RCD + T_CAS cycles later (S = shift distance to the row's
// offset), falls strictly after last_ret, which keeps the one-row-per-cycle
// data path conflict-free and in order. Otherwise the scheduler stalls and
// counts the cause. With PRESHIFT the command asks the memory to move the
// track group to the following row right after precharge (to row 0 of the
// group after its last row), so the next visit, eight binsets later, finds it
// aligned. With US_BUF the offsets follow the two-port circular track order
// (see firm_pkg::port_offset), which makes the return to row 0 free.
//
// Interface: list_valid/n_distinct and rd_idx -> rd_tok/rd_cnt read the
// CountBuffer list; release_list pulses after the read's last access has been
// issued. cmd_* go to rtm_memory; cmd_tag = {binset, count, last-of-binset}.
// Counters report accesses, shifted domains, preshifted domains and stall
// cycles. After reset, the tables are cleared one entry per cycle
// (init_busy) before the first read is scheduled.
// Timing: at most one access per cycle. Mapping, preshifting and the
// circular order follow the paper; the table-based bookkeeping, the issue
// rule and the 48-bit time stamps are this design's choices.
module mem_scheduler #(
  parameter int unsigned SUBARRAYS = 8192,
  parameter int unsigned ROWS      = 1024,
  parameter int unsigned DOMAINS   = 64,
  parameter int unsigned TOKEN_NT  = 5,
  parameter int unsigned READ_LEN  = 100,
  parameter bit          PRESHIFT  = 1'b1,
  parameter bit          US_BUF    = 1'b1,
  parameter int unsigned TOK_W     = 2 * TOKEN_NT,
  parameter int unsigned SA_W      = $clog2(SUBARRAYS),
  parameter int unsigned SA1_W     = SA_W - TOK_W,
  parameter int unsigned ROW_W     = $clog2(ROWS),
  parameter int unsigned BINSETS   = ROWS << SA1_W,
  parameter int unsigned BINSET_W  = $clog2(BINSETS),
  parameter int unsigned MAX_TOK   = READ_LEN - TOKEN_NT + 1,
  parameter int unsigned CNT_W     = $clog2(MAX_TOK + 1),
  parameter int unsigned IDX_W     = $clog2(MAX_TOK + 1),
  parameter int unsigned TAG_W     = BINSET_W + CNT_W + 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // CountBuffer list
  input  logic                list_valid,
  input  logic [IDX_W-1:0]    n_distinct,
  output logic [IDX_W-1:0]    rd_idx,
  input  logic [TOK_W-1:0]    rd_tok,
  input  logic [CNT_W-1:0]    rd_cnt,
  output logic                release_list,
  // RTM commands
  output logic                cmd_valid,
  output logic [SA_W-1:0]     cmd_sa,
  output logic [ROW_W-1:0]    cmd_row,
  output logic                cmd_pre_en,
  output logic [ROW_W-1:0]    cmd_pre_row,
  output logic [TAG_W-1:0]    cmd_tag,
  // status
  output logic                init_busy,
  output logic                busy,
  output logic [63:0]         n_access,
  output logic [63:0]         n_shift,
  output logic [63:0]         n_preshift,
  output logic [63:0]         n_stall_busy,
  output logic [63:0]         n_stall_order
);
  import firm_pkg::*;

  localparam int unsigned D_W    = $clog2(DOMAINS);
  localparam int unsigned TGS    = ROWS / DOMAINS;
  localparam int unsigned NTG    = SUBARRAYS * TGS;
  localparam int unsigned TGI_W  = $clog2(NTG);
  localparam int unsigned TS_W   = 48;
  localparam int unsigned T_ROW  = ((T_RCD + T_CAS > T_RAS) ? T_RCD + T_CAS : T_RAS) + T_RP;

  typedef enum logic [1:0] {S_INIT, S_IDLE, S_RUN} state_e;
  state_e state;

  logic [D_W-1:0]  pos_tab   [NTG];
  logic [TS_W-1:0] ready_tab [SUBARRAYS];
  logic [TS_W-1:0] now, last_ret;
  logic [TGI_W-1:0] init_idx;

  logic [BINSET_W-1:0] b;
  logic [IDX_W-1:0]    j;

  // current access
  logic [SA_W-1:0]   sa;
  logic [ROW_W-1:0]  row;
  logic [D_W-1:0]    d, pre_d;
  logic [TGI_W-1:0]  tgi;
  logic [D_W-1:0]    off, off2, cur;
  logic [D_W:0]      s, s2;
  logic [TS_W-1:0]   ret, ready_new;
  logic              ok_busy, ok_order, issue, last_tok, last_bs;

  function automatic logic [D_W-1:0] offs(input logic [D_W-1:0] dd);
    return D_W'(port_offset(int'(dd), DOMAINS, US_BUF));
  endfunction

  always_comb begin
    sa    = SA_W'({b[SA1_W-1:0], rd_tok});
    row   = ROW_W'(b >> SA1_W);
    d     = row[D_W-1:0];
    tgi   = TGI_W'(sa) * TGI_W'(TGS) + TGI_W'(row >> D_W);
    cur   = pos_tab[tgi];
    off   = offs(d);
    s     = (off > cur) ? {1'b0, off - cur} : {1'b0, cur - off};
    pre_d = (d == D_W'(DOMAINS - 1)) ? '0 : d + 1'b1;
    off2  = offs(pre_d);
    s2    = PRESHIFT ? ((off2 > off) ? {1'b0, off2 - off} : {1'b0, off - off2}) : '0;
    ret   = now + TS_W'(T_SH) * TS_W'(s) + TS_W'(T_RCD + T_CAS);
    ready_new = now + TS_W'(T_SH) * TS_W'(s) + TS_W'(T_ROW) + TS_W'(T_SH) * TS_W'(s2);
    ok_busy  = $signed(ready_tab[sa] - now) <= 0;
    ok_order = $signed(ret - last_ret) > 0;
    issue    = (state == S_RUN) && ok_busy && ok_order;
    last_tok = (j == n_distinct - 1'b1);
    last_bs  = (b == BINSET_W'(BINSETS - 1));
  end

  assign rd_idx      = j;
  assign cmd_valid   = issue;
  assign cmd_sa      = sa;
  assign cmd_row     = row;
  assign cmd_pre_en  = PRESHIFT;
  assign cmd_pre_row = {row[ROW_W-1:D_W], pre_d};
  assign cmd_tag     = {b, rd_cnt, last_tok};
  assign init_busy   = (state == S_INIT);
  assign busy        = (state == S_RUN);
  // A read shorter than a token has no distinct token: release it at once.
  assign release_list = (issue && last_tok && last_bs) ||
                        (state == S_IDLE && list_valid && n_distinct == '0);

  // tables
  always_ff @(posedge clk) begin
    if (state == S_INIT) begin
      pos_tab[init_idx] <= '0;
      if (init_idx < TGI_W'(SUBARRAYS)) ready_tab[init_idx[SA_W-1:0]] <= '0;
    end else if (issue) begin
      pos_tab[tgi]  <= PRESHIFT ? off2 : off;
      ready_tab[sa] <= ready_new;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_INIT;
      init_idx      <= '0;
      now           <= '0;
      last_ret      <= '0;
      b             <= '0;
      j             <= '0;
      n_access      <= '0;
      n_shift       <= '0;
      n_preshift    <= '0;
      n_stall_busy  <= '0;
      n_stall_order <= '0;
    end else begin
      now <= now + 1'b1;
      unique case (state)
        S_INIT: begin
          init_idx <= init_idx + 1'b1;
          if (init_idx == TGI_W'(NTG - 1)) state <= S_IDLE;
        end
        S_IDLE: begin
          b <= '0;
          j <= '0;
          if (list_valid && n_distinct != '0) state <= S_RUN;
        end
        S_RUN: begin
          if (issue) begin
            last_ret   <= ret;
            n_access   <= n_access + 1'b1;
            n_shift    <= n_shift + 64'(s) + 64'(s2);
            n_preshift <= n_preshift + 64'(s2);
            if (last_tok) begin
              j <= '0;
              if (last_bs) state <= S_IDLE;
              else         b <= b + 1'b1;
            end else begin
              j <= j + 1'b1;
            end
          end else if (!ok_busy) begin
            n_stall_busy <= n_stall_busy + 1'b1;
          end else begin
            n_stall_order <= n_stall_order + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the scheduler reads the list only while it holds
  assert property (@(posedge clk) (state == S_RUN) |-> list_valid);

endmodule
