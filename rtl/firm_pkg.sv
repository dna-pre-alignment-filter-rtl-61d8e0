// firm_pkg -- shared constants, types and address-mapping functions of the
// FIRM pre-alignment filter (filtering in racetrack memory).
//
// The reference genome is cut into bins. Every bin k owns a presence
// bit-vector with one bit per possible token (4^TOKEN_NT = 1024 tokens of five
// nucleotides). The filter scores a read against all bins by adding, per bin,
// count(token) * presence(bin, token) over the distinct tokens of the read.
//
// Interleaved mapping (the central idea of the design): the logical bit
// address {bin_id, token_id} is split as
//     {row_id, subarray_id1, col_id, subarray_id2}
// with subarray_id2 = token_id, col_id = bin_id[COL_BITS-1:0],
// subarray_id1 = next SA1_BITS bits of bin_id, row_id = top bits of bin_id.
// The subarray is {subarray_id1, subarray_id2}. Every subarray therefore holds
// the presence bits of exactly one token, and one row of it holds that token's
// bit for COLS consecutive bins (a "binset"). Binset b lives in row b>>SA1_BITS
// of subarrays {b[SA1_BITS-1:0], token}.
//
// Default sizes follow the evaluated configuration: 8192 subarrays, 1024 rows
// and 4096 columns per subarray, 64-domain tracks, 2^25 bins. The RTM timing
// values follow the racetrack memory column of the evaluation's parameter
// table; the reading of its "2S" entry as 2 cycles per shifted domain is this
// design's interpretation.
package firm_pkg;

  // Nucleotide encoding: A=00, C=01, G=10, T=11.
  typedef enum logic [1:0] {NT_A = 2'b00, NT_C = 2'b01, NT_G = 2'b10, NT_T = 2'b11} nt_e;

  // RTM timing in controller cycles (1 GHz clock).
  localparam int unsigned T_RAS = 9;   // ACT to PRE minimum
  localparam int unsigned T_RCD = 4;   // ACT to read
  localparam int unsigned T_CAS = 4;   // read plus I/O to data
  localparam int unsigned T_WR  = 4;   // write recovery (loading only)
  localparam int unsigned T_RP  = 2;   // precharge (assumed, see README)
  localparam int unsigned T_SH  = 2;   // cycles per domain shifted ("2S")

  // Port offset of a row inside its track group.
  // Single-port tracks: the track has to be moved by d to align domain d.
  // Two-port circular ("unlimited single-shift") tracks: rows 0..D/2-1 are
  // read by port A moving one domain per row, rows D/2..D-1 are stored in
  // reverse order and read by port B moving back, so row d needs offset
  // D-1-d and row D-1 is read with the track already back in reset position.
  function automatic int unsigned port_offset(input int unsigned d, input int unsigned domains,
                                              input bit us_buf);
    if (!us_buf || d < domains / 2) return d;
    return domains - 1 - d;
  endfunction

  function automatic int unsigned abs_diff(input int unsigned a, input int unsigned b);
    return (a > b) ? a - b : b - a;
  endfunction

endpackage
