// firm_logic_layer -- the CMOS logic layer of the FIRM filter, everything
// next to the racetrack memory: read pre-processing (token_extractor,
// count_buffer), the memory access scheduler (mem_scheduler), the accelerator
// (bin_array) and the placement of loaded reference rows.
//
// A read enters as 2-bit nucleotides (nt_valid/nt/nt_last, accepted while
// nt_ready). Its distinct tokens and counts are collected, then the scheduler
// issues one row access per (binset, distinct token) on cmd_*; the rows come
// back in order on rsp_* with their tag {binset, count, last}, and the bin
// units turn them into one seed location filter bitmask per binset (mask_*).
// ld_* places the presence bits of token ld_token for binset ld_binset at
// subarray {ld_binset low bits, ld_token}, row ld_binset >> SA1_W (mem_ld_*).
// Timing: one nucleotide per cycle in; one access per cycle out when the
// memory allows; masks two cycles after the last row of a binset. The next
// read may stream in as soon as the previous one's last access is issued.
// The partition into these blocks follows the paper's logic-layer figure; the
// handshakes are this design's.
module firm_logic_layer #(
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
  parameter int unsigned CNT_W     = $clog2(MAX_TOK + 1),
  parameter int unsigned TAG_W     = BINSET_W + CNT_W + 1
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
  // racetrack memory command / response / load ports
  output logic                cmd_valid,
  output logic [SA_W-1:0]     cmd_sa,
  output logic [ROW_W-1:0]    cmd_row,
  output logic                cmd_pre_en,
  output logic [ROW_W-1:0]    cmd_pre_row,
  output logic [TAG_W-1:0]    cmd_tag,
  input  logic                rsp_valid,
  input  logic [COLS-1:0]     rsp_data,
  input  logic [TAG_W-1:0]    rsp_tag,
  output logic                mem_ld_valid,
  output logic [SA_W-1:0]     mem_ld_sa,
  output logic [ROW_W-1:0]    mem_ld_row,
  output logic [COLS-1:0]     mem_ld_data,
  // status and counters
  output logic                init_busy,
  output logic                sched_busy,
  output logic [63:0]         n_access,
  output logic [63:0]         n_shift,
  output logic [63:0]         n_preshift,
  output logic [63:0]         n_stall_busy,
  output logic [63:0]         n_stall_order
);

  localparam int unsigned IDX_W = $clog2(MAX_TOK + 1);

  // ---------------- pre-processing ----------------
  logic             tok_valid, read_end, cb_in_ready, last_seen, nt_take;
  logic [TOK_W-1:0] tok_id;

  assign nt_ready = cb_in_ready && !last_seen;
  assign nt_take  = nt_valid && nt_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  last_seen <= 1'b0;
    else if (nt_take && nt_last) last_seen <= 1'b1;
    else if (!cb_in_ready)       last_seen <= 1'b0;
  end

  token_extractor #(.TOKEN_NT(TOKEN_NT)) u_tok (
    .clk(clk), .rst_n(rst_n),
    .nt_valid(nt_take), .nt(nt), .nt_last(nt_last),
    .tok_valid(tok_valid), .tok_id(tok_id), .read_end(read_end)
  );

  logic             list_valid, release_list;
  logic [IDX_W-1:0] n_distinct, rd_idx;
  logic [TOK_W-1:0] rd_tok;
  logic [CNT_W-1:0] rd_cnt;

  count_buffer #(.TOKEN_NT(TOKEN_NT), .READ_LEN(READ_LEN)) u_cb (
    .clk(clk), .rst_n(rst_n),
    .tok_valid(tok_valid), .tok_id(tok_id), .read_end(read_end), .in_ready(cb_in_ready),
    .list_valid(list_valid), .n_distinct(n_distinct),
    .rd_idx(rd_idx), .rd_tok(rd_tok), .rd_cnt(rd_cnt), .release_list(release_list)
  );

  // ---------------- memory access scheduler ----------------

  mem_scheduler #(
    .SUBARRAYS(SUBARRAYS), .ROWS(ROWS), .DOMAINS(DOMAINS), .TOKEN_NT(TOKEN_NT),
    .READ_LEN(READ_LEN), .PRESHIFT(PRESHIFT), .US_BUF(US_BUF)
  ) u_sched (
    .clk(clk), .rst_n(rst_n),
    .list_valid(list_valid), .n_distinct(n_distinct),
    .rd_idx(rd_idx), .rd_tok(rd_tok), .rd_cnt(rd_cnt), .release_list(release_list),
    .cmd_valid(cmd_valid), .cmd_sa(cmd_sa), .cmd_row(cmd_row),
    .cmd_pre_en(cmd_pre_en), .cmd_pre_row(cmd_pre_row), .cmd_tag(cmd_tag),
    .init_busy(init_busy), .busy(sched_busy),
    .n_access(n_access), .n_shift(n_shift), .n_preshift(n_preshift),
    .n_stall_busy(n_stall_busy), .n_stall_order(n_stall_order)
  );

  // ---------------- reference loading ----------------
  // interleaved mapping of a loaded row: subarray {binset low bits, token},
  // row = binset high bits
  assign mem_ld_valid = ld_valid;
  assign mem_ld_sa    = SA_W'({ld_binset[SA1_W-1:0], ld_token});
  assign mem_ld_row   = ROW_W'(ld_binset >> SA1_W);
  assign mem_ld_data  = ld_data;

  // ---------------- accelerator ----------------
  bin_array #(.COLS(COLS), .CNT_W(CNT_W), .ACC_W(CNT_W), .BINSET_W(BINSET_W)) u_bins (
    .clk(clk), .rst_n(rst_n),
    .row_valid (rsp_valid),
    .row_data  (rsp_data),
    .row_cnt   (rsp_tag[CNT_W:1]),
    .row_last  (rsp_tag[0]),
    .row_binset(rsp_tag[TAG_W-1 -: BINSET_W]),
    .thr(thr),
    .mask_valid(mask_valid), .mask(mask), .mask_binset(mask_binset)
  );

endmodule
