// cdma_pkg: types and helpers shared by the CDMA bus-coding blocks.
//
// A data word of DATA_W bits is cut into DATA_W/CHIPS "batches" of CHIPS bits.
// Bit j of every batch is spread with a CHIPS-chip code word (one chip per
// column k), and the chips of a batch are summed column by column. Each column
// sum lies in 0..CHIPS and needs clog2(CHIPS)+1 bits, so the coded bus is
// (DATA_W/CHIPS)*(clog2(CHIPS)+1) lines wide: 16 lines for the 32-bit,
// 8-chip configuration.
//
// The code words are rows of the Sylvester-Hadamard (Walsh) matrix in natural
// order: chip k of row r is the parity of (r AND k). Batch b uses row
// (j - b) mod CHIPS for its bit j, so every batch starts the table at a
// different row. This assignment reproduces every chip-sum value printed in the
// paper's encoder and decoder simulation screenshots; it is taken from those
// printed numbers, not from the text. The text says the code words come from an
// 8-bit LFSR; that source is kept as the CODE_LFSR option (see lfsr8 and
// spread_code_gen) but its windows are not orthogonal, so it does not decode
// losslessly.
package cdma_pkg;

  // Where the spreading codes come from.
  typedef enum logic {
    CODE_WALSH = 1'b0,   // orthogonal Hadamard rows (default, lossless)
    CODE_LFSR  = 1'b1    // parallel state of one 8-bit LFSR per batch
  } code_src_e;

  // LFSR seed of batch b when CODE_LFSR is chosen: 1, 38, 75, ... (never
  // zero). The paper gives no seeds; this spacing is arbitrary.
  function automatic logic [7:0] lfsr_seed(input int unsigned b);
    return 8'(((b * 37) % 255) + 1);
  endfunction

  // Chip k of Hadamard row r: parity of the bitwise AND of r and k.
  function automatic logic walsh_chip(input int unsigned row, input int unsigned col);
    return ^(row & col);
  endfunction

  // Width of one column sum for a code of `chips` chips: values 0..chips.
  function automatic int unsigned sum_width(input int unsigned chips);
    return $clog2(chips) + 1;
  endfunction

endpackage
