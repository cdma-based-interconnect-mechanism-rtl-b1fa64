// cdma_decoder: recovers a data word from the CDMA-coded bus.
//
// It first collects CHIPS beats; beat k carries column sum P_k of every batch
// (batch b on in_data[b*SUM_W +: SUM_W]). It then spends CHIPS "despread"
// clocks: in clock j it correlates every batch's sums with that batch's code
// word for slot j, using the paper's Eq. 2 term for each chip,
//     +(2*P_k - CHIPS) where the code chip is 0,  -(2*P_k - CHIPS) where it is 1,
// and adds the CHIPS terms. With orthogonal codes the other bits of the batch
// cancel and the total is +CHIPS for a 1 and -CHIPS for a 0, so bit j is taken
// as 1 when the total is above zero. The code words come from the same spread_code_gen as
// in the encoder, restarted at the same slot. The receive-then-despread order
// follows the paper's decoding timing diagram; the handshake and the sign test
// as the decision rule are this design's.
//
// Interface and timing:
//   in_valid/in_ready/in_data  a beat is taken at an edge where both are 1;
//                              in_ready is 0 while despreading.
//   out_valid/out_data         out_valid is a one-cycle pulse; out_data holds
//                              the word until the next pulse.
// Beats taken in cycles 1..CHIPS are despread in cycles CHIPS+1..2*CHIPS and
// out_valid is high in cycle 2*CHIPS+1 (17 for 8 chips).
module cdma_decoder
  import cdma_pkg::*;
#(
  parameter int unsigned DATA_W   = 32,
  parameter int unsigned CHIPS    = 8,
  parameter code_src_e   CODE_SRC = CODE_WALSH,
  localparam int unsigned NB      = DATA_W / CHIPS,
  localparam int unsigned SUM_W   = $clog2(CHIPS) + 1,
  localparam int unsigned BUS_W   = NB * SUM_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [BUS_W-1:0]  in_data,
  output logic              out_valid,
  output logic [DATA_W-1:0] out_data
);

  localparam int unsigned SLOT_W = $clog2(CHIPS);
  // A term lies in -CHIPS..CHIPS, a sum of CHIPS terms in -CHIPS^2..CHIPS^2.
  localparam int unsigned CORR_W = 2 * $clog2(CHIPS) + 2;

  typedef enum logic {S_RECV, S_DESPREAD} state_e;
  state_e state;

  logic [SLOT_W-1:0] slot;       // beat while receiving, bit slot while despreading
  logic              last_slot;
  logic              take;
  logic [SUM_W-1:0]  sums_q [NB][CHIPS];
  logic [DATA_W-1:0] bits_q;
  logic [DATA_W-1:0] bits_next;
  logic [CHIPS-1:0]  code   [NB];
  logic [NB-1:0]     bit_now;

  assign last_slot = (slot == SLOT_W'(CHIPS - 1));
  assign in_ready  = (state == S_RECV);
  assign take      = in_valid && in_ready;

  // Eq. 2 correlation of every batch for the current slot.
  always_comb begin
    for (int b = 0; b < NB; b++) begin
      logic signed [CORR_W-1:0] corr;
      logic signed [CORR_W-1:0] term;
      corr = '0;
      for (int k = 0; k < CHIPS; k++) begin
        term = CORR_W'(2 * int'(sums_q[b][k])) - CORR_W'(CHIPS);
        corr = code[b][k] ? corr - term : corr + term;
      end
      bit_now[b] = (corr > 0);
    end
  end

  always_comb begin
    bits_next = bits_q;
    for (int b = 0; b < NB; b++) bits_next[b*CHIPS + int'(slot)] = bit_now[b];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_RECV;
      slot      <= '0;
      bits_q    <= '0;
      out_data  <= '0;
      out_valid <= 1'b0;
      for (int b = 0; b < NB; b++)
        for (int k = 0; k < CHIPS; k++) sums_q[b][k] <= '0;
    end else begin
      out_valid <= 1'b0;
      unique case (state)
        S_RECV: if (take) begin
          for (int b = 0; b < NB; b++) sums_q[b][slot] <= in_data[b*SUM_W +: SUM_W];
          slot <= slot + 1'b1;
          if (last_slot) state <= S_DESPREAD;
        end
        S_DESPREAD: begin
          bits_q <= bits_next;
          slot   <= slot + 1'b1;
          if (last_slot) begin
            out_data  <= bits_next;
            out_valid <= 1'b1;
            state     <= S_RECV;
          end
        end
        default: state <= S_RECV;
      endcase
    end
  end

  spread_code_gen #(
    .CHIPS(CHIPS), .NB(NB), .CODE_SRC(CODE_SRC)
  ) u_codes (
    .clk     (clk),
    .rst_n   (rst_n),
    .restart (take && last_slot),
    .step    (state == S_DESPREAD),
    .code    (code)
  );

  // A chip sum can never exceed the number of bits that were added.
  for (genvar b = 0; b < NB; b++) begin : g_chk
    a_sum_range: assert property (@(posedge clk) disable iff (!rst_n)
      take |-> (in_data[b*SUM_W +: SUM_W] <= SUM_W'(CHIPS)));
  end

endmodule
