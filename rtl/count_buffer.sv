// count_buffer -- the CountBuffer of the pre-processing step.
//
// While a read streams in, every token id increments its counter in a table
// of 4^TOKEN_NT entries. A presence flag per entry marks which counters hold
// a value for the current read, so the whole table is cleared in one cycle by
// clearing the flags. When the read ends, the block walks the flags from
// token 0 upward, one distinct token per cycle, using a priority encoder, and
// writes (token, count) pairs into a short list. The list is therefore in
// token-index order, the order in which the memory is visited; each token of
// the list stands for one row access per binset, weighted by its count.
//
// Interface: tok_valid/tok_id/read_end from token_extractor; in_ready is high
// while counting is possible. list_valid goes high when the list is complete;
// n_distinct gives its length and rd_idx -> rd_tok/rd_cnt reads it
// combinationally. release_list empties the buffer for the next read.
// Timing: one token per cycle while counting; the compaction takes one cycle
// per distinct token plus one. Counting and the token-index order follow the
// paper; the flag-clear, the list form and the handshake are this design's.
module count_buffer #(
  parameter int unsigned TOKEN_NT = 5,
  parameter int unsigned READ_LEN = 100,
  parameter int unsigned TOK_W    = 2 * TOKEN_NT,
  parameter int unsigned TOKENS   = 1 << TOK_W,
  parameter int unsigned MAX_TOK  = READ_LEN - TOKEN_NT + 1,   // tokens per read
  parameter int unsigned CNT_W    = $clog2(MAX_TOK + 1),
  parameter int unsigned IDX_W    = $clog2(MAX_TOK + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // token stream
  input  logic             tok_valid,
  input  logic [TOK_W-1:0] tok_id,
  input  logic             read_end,
  output logic             in_ready,
  // distinct-token list
  output logic             list_valid,
  output logic [IDX_W-1:0] n_distinct,
  input  logic [IDX_W-1:0] rd_idx,
  output logic [TOK_W-1:0] rd_tok,
  output logic [CNT_W-1:0] rd_cnt,
  input  logic             release_list
);

  typedef enum logic [1:0] {S_COUNT, S_COMPACT, S_READY} state_e;
  state_e state;

  logic [CNT_W-1:0] counts  [TOKENS];
  logic [TOKENS-1:0] present;
  logic [TOKENS-1:0] pending;           // flags not yet moved to the list
  logic [TOK_W-1:0] list_tok [MAX_TOK];
  logic [CNT_W-1:0] list_cnt [MAX_TOK];
  logic [IDX_W-1:0] n_q;

  // lowest pending token
  logic             found;
  logic [TOK_W-1:0] first_tok;
  always_comb begin
    found     = 1'b0;
    first_tok = '0;
    for (int i = TOKENS - 1; i >= 0; i--) begin
      if (pending[i]) begin
        found     = 1'b1;
        first_tok = TOK_W'(i);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_COUNT && tok_valid) begin
      if (!present[tok_id])
        counts[tok_id] <= CNT_W'(1);
      else if (counts[tok_id] != '1)
        counts[tok_id] <= counts[tok_id] + 1'b1;
    end
    if (state == S_COMPACT && found && 32'(n_q) < MAX_TOK) begin
      list_tok[n_q] <= first_tok;
      list_cnt[n_q] <= counts[first_tok];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_COUNT;
      present <= '0;
      pending <= '0;
      n_q     <= '0;
    end else begin
      unique case (state)
        S_COUNT: begin
          if (tok_valid)
            present[tok_id] <= 1'b1;
          if (read_end) begin
            pending <= present | (tok_valid ? (TOKENS'(1) << tok_id) : '0);
            n_q     <= '0;
            state   <= S_COMPACT;
          end
        end
        S_COMPACT: begin
          if (found) begin
            pending[first_tok] <= 1'b0;
            n_q <= n_q + 1'b1;
          end else begin
            state <= S_READY;
          end
        end
        S_READY: begin
          if (release_list) begin
            present <= '0;
            n_q     <= '0;
            state   <= S_COUNT;
          end
        end
        default: state <= S_COUNT;
      endcase
    end
  end

  assign in_ready   = (state == S_COUNT);
  assign list_valid = (state == S_READY);
  assign n_distinct = n_q;
  assign rd_tok     = (32'(rd_idx) < MAX_TOK) ? list_tok[rd_idx] : '0;
  assign rd_cnt     = (32'(rd_idx) < MAX_TOK) ? list_cnt[rd_idx] : '0;

endmodule
