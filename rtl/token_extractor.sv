// token_extractor -- turns a stream of nucleotides into overlapping token ids.
//
// A read arrives one 2-bit nucleotide per cycle (A=00, C=01, G=10, T=11).
// The block keeps the last TOKEN_NT nucleotides in a shift register and,
// from the TOKEN_NT-th nucleotide of the read on, emits the token formed by
// them. The first nucleotide of the token is the most significant one, so the
// token id is the lexicographic index (AAAAA = 0, AAAAT = 3, TTTTT = 1023 for
// five-nucleotide tokens). A read of L nucleotides yields L-TOKEN_NT+1 tokens
// (96 for the 100-nucleotide reads evaluated).
//
// Interface: nt_valid/nt/nt_last in; tok_valid/tok_id and read_end out.
// Timing: outputs are registered, one cycle after the nucleotide that
// completes the token. read_end pulses together with the read's last token
// (or alone for a read shorter than a token). There is no back-pressure: the
// consumer (count_buffer) accepts one token per cycle. Token size and
// encoding follow the paper; the streaming interface is this design's choice.
module token_extractor #(
  parameter int unsigned TOKEN_NT = 5,
  parameter int unsigned TOK_W    = 2 * TOKEN_NT
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             nt_valid,
  input  logic [1:0]       nt,
  input  logic             nt_last,
  output logic             tok_valid,
  output logic [TOK_W-1:0] tok_id,
  output logic             read_end
);

  logic [TOK_W-3:0] window;              // last TOKEN_NT-1 nucleotides
  logic [$clog2(TOKEN_NT+1)-1:0] fill;     // nucleotides seen in this read, saturating
  logic [TOK_W-1:0] window_next;

  assign window_next = {window, nt};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      window    <= '0;
      fill      <= '0;
      tok_valid <= 1'b0;
      tok_id    <= '0;
      read_end  <= 1'b0;
    end else begin
      tok_valid <= 1'b0;
      read_end  <= 1'b0;
      if (nt_valid) begin
        window <= window_next[TOK_W-3:0];
        if (32'(fill) >= TOKEN_NT - 1) begin
          tok_valid <= 1'b1;
          tok_id    <= window_next;
        end
        if (nt_last) begin
          fill     <= '0;
          read_end <= 1'b1;
        end else if (32'(fill) < TOKEN_NT) begin
          fill <= fill + 1'b1;
        end
      end
    end
  end

endmodule
