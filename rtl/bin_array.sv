// bin_array -- the accelerator of the logic layer: B bin units working on one
// memory row per cycle.
//
// A row read from the racetrack memory carries the presence bits of one token
// for the B = COLS bins of a binset. The row is first captured in B 1-bit
// registers together with the token's repetition count, the "last token of
// this binset" flag and the binset number. In the next cycle all B bin units
// add count * presence bit to their scores in parallel. After the binset's
// last token, every unit compares its score with the threshold and the B
// results form the seed location filter bitmask of that binset.
//
// Interface: row_valid/row_data/row_cnt/row_last/row_binset from the memory
// (the last three travel as the request's tag); thr is the threshold;
// mask_valid/mask/mask_binset give one bitmask per binset.
// Timing: throughput one row per cycle (the accelerator of the paper
// accumulates one 4096-bin row per cycle); mask_valid rises two cycles after
// the row of the binset's last token. Structure follows the paper; the
// pipeline split is this design's choice.
module bin_array #(
  parameter int unsigned COLS     = 4096,
  parameter int unsigned CNT_W    = 7,
  parameter int unsigned ACC_W    = 7,
  parameter int unsigned BINSET_W = 13
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                row_valid,
  input  logic [COLS-1:0]     row_data,
  input  logic [CNT_W-1:0]    row_cnt,
  input  logic                row_last,
  input  logic [BINSET_W-1:0] row_binset,
  input  logic [ACC_W-1:0]    thr,
  output logic                mask_valid,
  output logic [COLS-1:0]     mask,
  output logic [BINSET_W-1:0] mask_binset
);

  // B 1-bit registers and the row's tag
  logic [COLS-1:0]     pres_q;
  logic                v_q, last_q;
  logic [CNT_W-1:0]    cnt_q;
  logic [BINSET_W-1:0] binset_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q      <= 1'b0;
      last_q   <= 1'b0;
      cnt_q    <= '0;
      binset_q <= '0;
      pres_q   <= '0;
    end else begin
      v_q <= row_valid;
      if (row_valid) begin
        pres_q   <= row_data;
        cnt_q    <= row_cnt;
        last_q   <= row_last;
        binset_q <= row_binset;
      end
    end
  end

  for (genvar k = 0; k < COLS; k++) begin : g_bin
    logic [ACC_W-1:0] acc_unused;
    bin_unit #(.CNT_W(CNT_W), .ACC_W(ACC_W)) u_bin (
      .clk  (clk),
      .rst_n(rst_n),
      .en   (v_q),
      .pres (pres_q[k]),
      .cnt  (cnt_q),
      .last (last_q),
      .thr  (thr),
      .acc  (acc_unused),
      .sel  (mask[k])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask_valid  <= 1'b0;
      mask_binset <= '0;
    end else begin
      mask_valid <= v_q && last_q;
      if (v_q && last_q) mask_binset <= binset_q;
    end
  end

endmodule
