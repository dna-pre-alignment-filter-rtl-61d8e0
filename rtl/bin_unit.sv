// bin_unit -- score accumulator of one reference bin.
//
// Each bin unit holds the running score c_k of one bin of the binset being
// processed. For every row delivered by the memory it adds the repetition
// count of the row's token when the bin's presence bit is set (the adder),
// keeps the sum (the accumulator) and, on the last token of the binset,
// compares the final score with the threshold T (the comparator): the bin is
// selected for seed extension when c_k > T. The accumulator then restarts
// at zero, so consecutive binsets follow each other without a gap.
//
// Interface: en qualifies pres/cnt/last; thr is the threshold; sel is the
// bin's bit of the seed location filter bitmask, valid in the cycle after an
// en with last=1 and held until the next such update.
// Timing: one update per cycle. Adder, accumulator and comparator and the
// "greater than T" rule follow the paper; widths and the restart are this
// design's choice (ACC_W must hold the number of tokens of a read).
module bin_unit #(
  parameter int unsigned CNT_W = 7,
  parameter int unsigned ACC_W = 7
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             pres,
  input  logic [CNT_W-1:0] cnt,
  input  logic             last,
  input  logic [ACC_W-1:0] thr,
  output logic [ACC_W-1:0] acc,
  output logic             sel
);

  logic [ACC_W-1:0] sum;
  assign sum = acc + (pres ? ACC_W'(cnt) : '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
      sel <= 1'b0;
    end else if (en) begin
      if (last) begin
        acc <= '0;
        sel <= (sum > thr);
      end else begin
        acc <= sum;
      end
    end
  end

endmodule
