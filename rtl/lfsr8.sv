// lfsr8: 8-bit Fibonacci linear feedback shift register used as a code-word
// source.
//
// Following the paper, the registers are numbered 1..8, the taps are at
// registers 1, 2, 3 and 7, and their XOR is shifted into register 1 while every
// other register takes the value of the one before it. All eight stages are
// read in parallel (like a serial-in parallel-out register), so `state` is one
// 8-chip code word per clock. state[0] is register 1, state[7] is register 8.
//
// Interface and timing: `load` copies `seed` into the register at the next
// clock edge and has priority over `step`; `step` shifts once per clock edge.
// Reset clears nothing to zero: it loads RESET_SEED, because the all-zero state
// locks the register. The paper gives no seed and no reset behaviour; those are
// this design's choices. Register 8 is not a tap, so the
// register is not maximal-length: from seed 8'h01 it falls into a cycle of 127
// states (8'h01 itself is not on it), not the 2^8-1 = 255 the paper's text
// quotes for an 8-bit register.
module lfsr8 #(
  parameter logic [7:0] RESET_SEED = 8'h01
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       load,
  input  logic [7:0] seed,
  input  logic       step,
  output logic [7:0] state
);

  logic feedback;
  assign feedback = state[0] ^ state[1] ^ state[2] ^ state[6];

  always_ff @(posedge clk) begin
    if (!rst_n)    state <= RESET_SEED;
    else if (load) state <= seed;
    else if (step) state <= {state[6:0], feedback};
  end

  // A zero seed would stop the register for good.
  a_seed_nonzero: assert property (@(posedge clk) disable iff (!rst_n) load |-> seed != 8'h00);

endmodule
