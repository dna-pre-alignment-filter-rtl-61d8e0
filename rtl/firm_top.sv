// firm_top -- FIRM: DNA pre-alignment filter processing near racetrack memory.
//
// The filter decides, for one short read at a time, which bins of a reference
// genome are worth a full alignment. Each bin has a presence bit per possible
// five-nucleotide token; a bin is selected when the sum over the distinct
// tokens of the read of count(token) * presence(bin, token) exceeds the
// threshold thr.
//
// Data path (logic layer next to the memory):
//   token_extractor -> count_buffer     pre-processing of the read: distinct
//                                       tokens with repetition counts, in
//                                       token-index order
//   mem_scheduler   -> rtm_memory       one row access per (binset, token),
//                                       interleaved across subarrays,
//                                       pipelined, with preshift and the
//                                       two-port circular track order
//   rtm_memory      -> bin_array        one row of COLS presence bits per
//                                       cycle, accumulated by COLS bin units
//   bin_array       -> mask_*           seed location filter bitmask, one
//                                       COLS-bit word per binset, binsets in
//                                       increasing order
// rtm_memory is a behavioural model of the racetrack memory layers; all other
// blocks are synthesizable.
//
// Interfaces: the read enters as 2-bit nucleotides (nt_valid/nt/nt_last,
// accepted while nt_ready). The reference is loaded before filtering with
// ld_valid/ld_binset/ld_token/ld_data: the presence bits of token ld_token for
// the COLS bins of binset ld_binset (bins ld_binset*COLS .. +COLS-1); the top
// places the row with the interleaved mapping. Status and counters are
// brought out for evaluation.
// Timing: a read is accepted one nucleotide per cycle; the next read may
// stream in while the previous one's accesses drain. The first masks appear
// a few tens of cycles after the read's last nucleotide; afterwards about one
// binset every max(distinct tokens, 1) cycles, subject to subarray
// availability.
module firm_top #(
  parameter int unsigned TOKEN_NT  = 5,
  parameter int unsigned READ_LEN  = 100,
  parameter int unsigned SUBARRAYS = 8192,
  parameter int unsigned ROWS      = 1024,
  parameter int unsigned COLS      = 4096,
  parameter int unsigned DOMAINS   = 64,
  parameter bit          PRESHIFT  = 1'b1,
  parameter bit          US_BUF    = 1'b1,
  parameter int unsigned TOK_W     = 2 * TOKEN_NT,
  parameter int unsigned SA_W      = $clog2(SUBARRAYS),
  parameter int unsigned SA1_W     = SA_W - TOK_W,
  parameter int unsigned ROW_W     = $clog2(ROWS),
  parameter int unsigned BINSET_W  = $clog2(ROWS << SA1_W),
  parameter int unsigned MAX_TOK   = READ_LEN - TOKEN_NT + 1,
  parameter int unsigned CNT_W     = $clog2(MAX_TOK + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  // read input
  input  logic                nt_valid,
  input  logic [1:0]          nt,
  input  logic                nt_last,
  output logic                nt_ready,
  input  logic [CNT_W-1:0]    thr,
  // reference loading
  input  logic                ld_valid,
  input  logic [BINSET_W-1:0] ld_binset,
  input  logic [TOK_W-1:0]    ld_token,
  input  logic [COLS-1:0]     ld_data,
  // seed location filter bitmask
  output logic                mask_valid,
  output logic [COLS-1:0]     mask,
  output logic [BINSET_W-1:0] mask_binset,
  // status and counters
  output logic                init_busy,
  output logic                sched_busy,
  output logic [63:0]         n_access,
  output logic [63:0]         n_shift,
  output logic [63:0]         n_preshift,
  output logic [63:0]         n_stall_busy,
  output logic [63:0]         n_stall_order,
  output logic [63:0]         mem_shift_count,
  output logic [63:0]         mem_portb_reads,
  output logic [31:0]         mem_viol_count
);

  localparam int unsigned TAG_W = BINSET_W + CNT_W + 1;

  logic             cmd_valid, cmd_pre_en, rsp_valid, mem_ld_valid;
  logic [SA_W-1:0]  cmd_sa, mem_ld_sa;
  logic [ROW_W-1:0] cmd_row, cmd_pre_row, mem_ld_row;
  logic [TAG_W-1:0] cmd_tag, rsp_tag;
  logic [COLS-1:0]  rsp_data, mem_ld_data;

  firm_logic_layer #(
    .TOKEN_NT(TOKEN_NT), .READ_LEN(READ_LEN), .SUBARRAYS(SUBARRAYS), .ROWS(ROWS),
    .COLS(COLS), .DOMAINS(DOMAINS), .PRESHIFT(PRESHIFT), .US_BUF(US_BUF)
  ) u_logic (
    .clk(clk), .rst_n(rst_n),
    .nt_valid(nt_valid), .nt(nt), .nt_last(nt_last), .nt_ready(nt_ready), .thr(thr),
    .ld_valid(ld_valid), .ld_binset(ld_binset), .ld_token(ld_token), .ld_data(ld_data),
    .mask_valid(mask_valid), .mask(mask), .mask_binset(mask_binset),
    .cmd_valid(cmd_valid), .cmd_sa(cmd_sa), .cmd_row(cmd_row), .cmd_pre_en(cmd_pre_en),
    .cmd_pre_row(cmd_pre_row), .cmd_tag(cmd_tag),
    .rsp_valid(rsp_valid), .rsp_data(rsp_data), .rsp_tag(rsp_tag),
    .mem_ld_valid(mem_ld_valid), .mem_ld_sa(mem_ld_sa), .mem_ld_row(mem_ld_row),
    .mem_ld_data(mem_ld_data),
    .init_busy(init_busy), .sched_busy(sched_busy),
    .n_access(n_access), .n_shift(n_shift), .n_preshift(n_preshift),
    .n_stall_busy(n_stall_busy), .n_stall_order(n_stall_order)
  );

  rtm_memory #(
    .SUBARRAYS(SUBARRAYS), .ROWS(ROWS), .COLS(COLS), .DOMAINS(DOMAINS),
    .US_BUF(US_BUF), .TAG_W(TAG_W)
  ) u_mem (
    .clk(clk), .rst_n(rst_n),
    .cmd_valid(cmd_valid), .cmd_sa(cmd_sa), .cmd_row(cmd_row),
    .cmd_pre_en(cmd_pre_en), .cmd_pre_row(cmd_pre_row), .cmd_tag(cmd_tag),
    .rsp_valid(rsp_valid), .rsp_data(rsp_data), .rsp_tag(rsp_tag),
    .ld_valid(mem_ld_valid), .ld_sa(mem_ld_sa), .ld_row(mem_ld_row), .ld_data(mem_ld_data),
    .shift_count(mem_shift_count), .portb_reads(mem_portb_reads), .viol_count(mem_viol_count)
  );

endmodule
