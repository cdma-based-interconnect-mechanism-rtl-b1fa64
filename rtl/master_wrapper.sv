// master_wrapper: the processor-side custom component of the CDMA interconnect.
//
// Its Avalon-MM slave port s0 faces the processor and carries plain 32-bit
// data; its Avalon-MM master port m0 faces the CDMA bus, whose data lines are
// BUS_W wide (16 for the default sizes). As in the paper's Fig. 5(a), writedata
// goes through a cdma_encoder on its way out and readdata through a
// cdma_decoder on its way in, while address, read and write are not coded.
// Signal names follow the paper's <prefix>_<interface>_<signal> convention.
//
// Sequencing (this design's choice; the paper gives none):
//  * write: the word on avs_s0_writedata is encoded (CHIPS cycles) and sent as
//    CHIPS write beats on m0, each beat moving in a cycle where
//    avm_m0_waitrequest is low. The processor's write completes one cycle after
//    the last beat moves; the bus write is posted, so the slave side may still
//    be decoding it.
//  * read: CHIPS read beats are issued on m0; the readdata of each beat that
//    moves goes to the decoder. After CHIPS despread cycles the word is
//    returned on avs_s0_readdata in the one cycle avs_s0_waitrequest is low.
//  avm_m0_address is avs_s0_address wired straight through, which is safe
//  because the processor holds it while avs_s0_waitrequest is high.
//  avm_m0_read/avm_m0_write are the processor's request, gated to the cycles in
//  which a beat is due; avs_s0_waitrequest is high except in the completion
//  cycle, so while beats are stalled by avm_m0_waitrequest the processor waits
//  too. Reset is synchronous and active low.
// An unstalled write takes 2*CHIPS+2 cycles (18 for 8 chips) from the cycle the
// processor raises write to its completion cycle, a read 2*CHIPS+3 (19).
module master_wrapper
  import cdma_pkg::*;
#(
  parameter int unsigned ADDR_W   = 32,
  parameter int unsigned DATA_W   = 32,
  parameter int unsigned CHIPS    = 8,
  parameter code_src_e   CODE_SRC = CODE_WALSH,
  localparam int unsigned NB      = DATA_W / CHIPS,
  localparam int unsigned SUM_W   = $clog2(CHIPS) + 1,
  localparam int unsigned BUS_W   = NB * SUM_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // Avalon-MM slave toward the processor
  input  logic              avs_s0_read,
  input  logic              avs_s0_write,
  input  logic [ADDR_W-1:0] avs_s0_address,
  input  logic [DATA_W-1:0] avs_s0_writedata,
  output logic [DATA_W-1:0] avs_s0_readdata,
  output logic              avs_s0_waitrequest,
  // Avalon-MM master toward the CDMA bus
  output logic              avm_m0_read,
  output logic              avm_m0_write,
  output logic [ADDR_W-1:0] avm_m0_address,
  output logic [BUS_W-1:0]  avm_m0_writedata,
  input  logic [BUS_W-1:0]  avm_m0_readdata,
  input  logic              avm_m0_waitrequest
);

  localparam int unsigned SLOT_W = $clog2(CHIPS);

  typedef enum logic [2:0] {
    S_IDLE, S_WR_SEND, S_WR_DONE, S_RD_BEATS, S_RD_DECODE, S_RD_DONE
  } state_e;
  state_e state;

  logic [SLOT_W-1:0] rd_beat;
  logic [DATA_W-1:0] readdata_q;

  logic enc_in_valid, enc_in_ready, enc_out_valid, enc_out_ready, enc_out_last;
  logic dec_in_valid, dec_in_ready, dec_out_valid;
  logic [BUS_W-1:0]  enc_out_data;
  logic [DATA_W-1:0] dec_out_data;

  assign enc_in_valid  = (state == S_IDLE) && avs_s0_write;
  assign enc_out_ready = (state == S_WR_SEND) && !avm_m0_waitrequest;

  assign avm_m0_address   = avs_s0_address;
  assign avm_m0_write     = (state == S_WR_SEND) && enc_out_valid;
  assign avm_m0_writedata = enc_out_data;
  assign avm_m0_read      = (state == S_RD_BEATS);

  assign dec_in_valid = (state == S_RD_BEATS) && !avm_m0_waitrequest;

  assign avs_s0_waitrequest = !((state == S_WR_DONE) || (state == S_RD_DONE));
  assign avs_s0_readdata    = readdata_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      rd_beat    <= '0;
      readdata_q <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          rd_beat <= '0;
          if (avs_s0_write)     state <= S_WR_SEND;
          else if (avs_s0_read) state <= S_RD_BEATS;
        end
        S_WR_SEND:
          if (avm_m0_write && !avm_m0_waitrequest && enc_out_last) state <= S_WR_DONE;
        S_WR_DONE: state <= S_IDLE;
        S_RD_BEATS:
          if (!avm_m0_waitrequest) begin
            rd_beat <= rd_beat + 1'b1;
            if (rd_beat == SLOT_W'(CHIPS - 1)) state <= S_RD_DECODE;
          end
        S_RD_DECODE:
          if (dec_out_valid) begin
            readdata_q <= dec_out_data;
            state      <= S_RD_DONE;
          end
        S_RD_DONE: state <= S_IDLE;
        default:   state <= S_IDLE;
      endcase
    end
  end

  cdma_encoder #(.DATA_W(DATA_W), .CHIPS(CHIPS), .CODE_SRC(CODE_SRC)) u_encoder (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (enc_in_valid),
    .in_ready  (enc_in_ready),
    .in_data   (avs_s0_writedata),
    .out_valid (enc_out_valid),
    .out_ready (enc_out_ready),
    .out_data  (enc_out_data),
    .out_last  (enc_out_last)
  );

  cdma_decoder #(.DATA_W(DATA_W), .CHIPS(CHIPS), .CODE_SRC(CODE_SRC)) u_decoder (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (dec_in_valid),
    .in_ready  (dec_in_ready),
    .in_data   (avm_m0_readdata),
    .out_valid (dec_out_valid),
    .out_data  (dec_out_data)
  );

  // The encoder and decoder are idle whenever the wrapper starts a transfer.
  a_enc_ready: assert property (@(posedge clk) disable iff (!rst_n)
    enc_in_valid |-> enc_in_ready);
  a_dec_ready: assert property (@(posedge clk) disable iff (!rst_n)
    dec_in_valid |-> dec_in_ready);
  // Avalon-MM: a stalled request keeps its address and write data.
  a_m0_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (avm_m0_write || avm_m0_read) && avm_m0_waitrequest |=>
      $stable(avm_m0_address) && (!avm_m0_write || $stable(avm_m0_writedata)));
  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n)
    !(avm_m0_read && avm_m0_write));

endmodule
