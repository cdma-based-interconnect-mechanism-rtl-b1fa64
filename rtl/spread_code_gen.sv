// spread_code_gen: supplies the spreading code word of every batch for the
// current bit slot.
//
// A word is coded in CHIPS bit slots j = 0..CHIPS-1; in slot j, batch b spreads
// its bit j with code[b]. With CODE_SRC = CODE_WALSH (the default) code[b] is
// Hadamard row (j - b) mod CHIPS, chip k being parity(row AND k). That row
// assignment is the one that reproduces the chip sums printed in the paper's
// simulation screenshots (53355735, 55333351, 53535357, 55553733 for the word
// used there); the rows are mutually orthogonal, which the decoder needs.
// Chip 0 of every Walsh row is parity(row AND 0) = 0, so in this mode code[b][0]
// is a constant 0 and synthesis removes it.
// With CODE_SRC = CODE_LFSR (only for CHIPS = 8) each batch has its own lfsr8,
// started from seed lfsr_seed(b) of cdma_pkg, and code[b] is that register's parallel
// state, as the paper's text describes. Those windows are not orthogonal.
//
// Interface and timing: `restart` returns to slot 0 (and reloads the seeds) at
// the next clock edge, `step` moves to the next slot at the next edge; restart
// wins. `code` is a registered-state lookup, valid in the cycle after the edge.
// The encoder and the decoder each own one generator and drive it the same way,
// so both ends see the same code in the same slot.
module spread_code_gen
  import cdma_pkg::*;
#(
  parameter int unsigned CHIPS      = 8,
  parameter int unsigned NB         = 4,
  parameter code_src_e   CODE_SRC   = CODE_WALSH
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             restart,
  input  logic             step,
  output logic [CHIPS-1:0] code [NB]
);

  localparam int unsigned SLOT_W = (CHIPS > 1) ? $clog2(CHIPS) : 1;

  if (CODE_SRC == CODE_WALSH) begin : g_walsh
    logic [SLOT_W-1:0] slot;

    always_ff @(posedge clk) begin
      if (!rst_n)       slot <= '0;
      else if (restart) slot <= '0;
      else if (step)    slot <= (slot == SLOT_W'(CHIPS - 1)) ? '0 : slot + 1'b1;
    end

    always_comb begin
      for (int b = 0; b < NB; b++) begin
        // CHIPS is a power of two, so the subtraction wraps modulo CHIPS.
        logic [SLOT_W-1:0] row;
        row = slot - SLOT_W'(b % CHIPS);
        for (int k = 0; k < CHIPS; k++)
          code[b][k] = walsh_chip(int'(row), k);
      end
    end

    initial assert (CHIPS >= 2 && (CHIPS & (CHIPS - 1)) == 0)
      else $error("CHIPS must be a power of two for Walsh codes");
  end else begin : g_lfsr
    for (genvar b = 0; b < NB; b++) begin : g_batch
      logic [7:0] state;
      lfsr8 #(.RESET_SEED(lfsr_seed(b))) u_lfsr (
        .clk   (clk),
        .rst_n (rst_n),
        .load  (restart),
        .seed  (lfsr_seed(b)),
        .step  (step),
        .state (state)
      );
      assign code[b] = state[CHIPS-1:0];
    end

    initial assert (CHIPS == 8) else $error("the LFSR code source is 8 chips wide");
  end

endmodule
