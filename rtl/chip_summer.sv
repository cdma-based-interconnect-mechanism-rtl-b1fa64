// chip_summer: the parallel counter of one batch. It adds the encoded chips
// column by column: after CHIPS additions, sums[k] holds how many of the CHIPS
// spread bits had a 1 in chip k, a value 0..CHIPS.
//
// The paper's encoder figure draws the XOR outputs of all bits of a batch going
// into one arithmetic adder that produces the CHIPS chip sums; the text says the
// bits arrive one per clock and are added after CHIPS clocks. This block does
// that addition as it goes, one chip vector per clock, which gives the same
// sums with CHIPS small counters instead of a stored CHIPS x CHIPS matrix
// (this design's choice).
//
// Interface and timing: at a clock edge with `clear`, every sum restarts from
// zero (plus the chips, if `add_en` is also high); with only `add_en`, each
// sums[k] grows by chips[k]. Sums are registered.
module chip_summer #(
  parameter int unsigned CHIPS = 8,
  parameter int unsigned SUM_W = $clog2(CHIPS) + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             add_en,
  input  logic [CHIPS-1:0] chips,
  output logic [SUM_W-1:0] sums [CHIPS]
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < CHIPS; k++) sums[k] <= '0;
    end else if (clear || add_en) begin
      for (int k = 0; k < CHIPS; k++)
        sums[k] <= (clear ? SUM_W'(0) : sums[k]) + SUM_W'(add_en & chips[k]);
    end
  end

endmodule
