// cdma_encoder: CDMA-codes one data word onto a narrow bus.
//
// The DATA_W-bit word is split into NB = DATA_W/CHIPS batches; batch b holds
// bits b*CHIPS .. b*CHIPS+CHIPS-1 (for 32 bits and 8 chips: 0-7, 8-15, 16-23,
// 24-31). In each of CHIPS "spread" clocks j, bit j of every batch is XORed with
// that batch's code word for slot j, and the resulting chips are added into the
// batch's column sums (chip_summer). After CHIPS clocks each batch has CHIPS
// sums of SUM_W bits. Those are then sent in CHIPS "send" beats: beat k carries
// sum k of every batch, batch b on out_data[b*SUM_W +: SUM_W]. For the default
// sizes that is 16 bus lines instead of 32. All of this follows the paper's
// Section 3, Eq. 1 and its encoding figures; the flow-control handshake is this
// design's.
//
// Interface and timing (valid/ready on both sides):
//   in_valid/in_ready/in_data  a word is taken at a clock edge where both are 1.
//   out_valid/out_ready/out_data/out_last  one beat moves at an edge where
//                              both are 1; out_last marks beat CHIPS-1.
// A word taken at edge 0 is spread during the next CHIPS cycles, and its beats
// are offered in cycles CHIPS+1 .. 2*CHIPS when out_ready stays high (cycles
// 9..16 for 8 chips, as in the paper's encoder timing diagram). A new word can
// be taken at the edge that moves the last beat, so an unstalled encoder
// codes one word every 2*CHIPS cycles.
module cdma_encoder
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
  input  logic [DATA_W-1:0] in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [BUS_W-1:0]  out_data,
  output logic              out_last
);

  localparam int unsigned SLOT_W = $clog2(CHIPS);

  typedef enum logic [1:0] {S_IDLE, S_SPREAD, S_SEND} state_e;
  state_e state;

  logic [DATA_W-1:0] data_q;
  logic [SLOT_W-1:0] slot;       // bit slot while spreading, beat while sending
  logic              last_slot;
  logic              take;       // a word is accepted this cycle
  logic              beat_moves;

  logic [CHIPS-1:0]  code  [NB];
  logic [CHIPS-1:0]  chips [NB];
  logic [SUM_W-1:0]  sums  [NB][CHIPS];

  assign last_slot  = (slot == SLOT_W'(CHIPS - 1));
  assign out_valid  = (state == S_SEND);
  assign out_last   = out_valid && last_slot;
  assign beat_moves = out_valid && out_ready;
  assign in_ready   = (state == S_IDLE) || (beat_moves && last_slot);
  assign take       = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      slot   <= '0;
      data_q <= '0;
    end else begin
      if (take) begin
        data_q <= in_data;
        slot   <= '0;
        state  <= S_SPREAD;
      end else begin
        unique case (state)
          S_IDLE: ;
          S_SPREAD: begin
            slot <= slot + 1'b1;          // wraps to 0 after the last slot
            if (last_slot) state <= S_SEND;
          end
          S_SEND: if (beat_moves) begin
            slot <= slot + 1'b1;
            if (last_slot) state <= S_IDLE;
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  spread_code_gen #(
    .CHIPS(CHIPS), .NB(NB), .CODE_SRC(CODE_SRC)
  ) u_codes (
    .clk     (clk),
    .rst_n   (rst_n),
    .restart (take),
    .step    (state == S_SPREAD),
    .code    (code)
  );

  for (genvar b = 0; b < NB; b++) begin : g_batch
    // Spread: the data bit of this slot XORed with every chip of the code.
    assign chips[b] = code[b] ^ {CHIPS{data_q[b*CHIPS + int'(slot)]}};

    chip_summer #(.CHIPS(CHIPS), .SUM_W(SUM_W)) u_sum (
      .clk    (clk),
      .rst_n  (rst_n),
      .clear  (take),
      .add_en (state == S_SPREAD),
      .chips  (chips[b]),
      .sums   (sums[b])
    );

    // Send: beat `slot` carries column sum `slot` of this batch.
    assign out_data[b*SUM_W +: SUM_W] = sums[b][slot];
  end

  // The word and beat must not be changed by the sink's back-pressure.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
