// slave_wrapper: the slave-side custom component of the CDMA interconnect.
//
// Its Avalon-MM slave port s1 faces the CDMA bus (BUS_W data lines, 16 for the
// default sizes); its Avalon-MM master port m1 faces the slave IP core with
// plain 32-bit data. As in the paper's Fig. 5(b), coded writedata from the bus
// goes through a cdma_decoder and readdata from the slave IP through a
// cdma_encoder, while address, read and write are not coded. Signal names
// follow the paper's <prefix>_<interface>_<signal> convention.
//
// Sequencing (this design's choice; the paper gives none):
//  * write: CHIPS write beats are taken from s1 (avs_s1_waitrequest low while
//    beats are being received), the address of the first beat is latched, the
//    word is despread (CHIPS cycles) and written on m1, holding avm_m1_write
//    until avm_m1_waitrequest is low. Meanwhile s1 stalls any new request.
//  * read: the first read beat is stalled while the word is read on m1 and
//    spread (CHIPS cycles); then CHIPS read beats are answered, each in a cycle
//    where avs_s1_waitrequest is low, with beat k's chip sums on
//    avs_s1_readdata.
// The m1 address is the latched s1 address, because the bus master may have
// moved on by the time a posted write reaches m1. Reset is synchronous.
module slave_wrapper
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
  // Avalon-MM slave toward the CDMA bus
  input  logic              avs_s1_read,
  input  logic              avs_s1_write,
  input  logic [ADDR_W-1:0] avs_s1_address,
  input  logic [BUS_W-1:0]  avs_s1_writedata,
  output logic [BUS_W-1:0]  avs_s1_readdata,
  output logic              avs_s1_waitrequest,
  // Avalon-MM master toward the slave IP
  output logic              avm_m1_read,
  output logic              avm_m1_write,
  output logic [ADDR_W-1:0] avm_m1_address,
  output logic [DATA_W-1:0] avm_m1_writedata,
  input  logic [DATA_W-1:0] avm_m1_readdata,
  input  logic              avm_m1_waitrequest
);

  localparam int unsigned SLOT_W = $clog2(CHIPS);

  typedef enum logic [2:0] {
    S_IDLE, S_WR_RECV, S_WR_DECODE, S_WR_M1, S_RD_M1, S_RD_SEND
  } state_e;
  state_e state;

  logic [SLOT_W-1:0] wr_beat;
  logic [ADDR_W-1:0] addr_q;
  logic [DATA_W-1:0] wdata_q;
  logic              beat_in;

  logic enc_in_valid, enc_in_ready, enc_out_valid, enc_out_ready, enc_out_last;
  logic dec_in_ready, dec_out_valid;
  logic [BUS_W-1:0]  enc_out_data;
  logic [DATA_W-1:0] dec_out_data;

  // A write beat is taken in IDLE (the first) and in WR_RECV (the rest).
  assign beat_in = avs_s1_write &&
                   ((state == S_IDLE) || (state == S_WR_RECV)) && dec_in_ready;

  always_comb begin
    unique case (state)
      S_IDLE:    avs_s1_waitrequest = !beat_in;
      S_WR_RECV: avs_s1_waitrequest = !beat_in;
      S_RD_SEND: avs_s1_waitrequest = !enc_out_valid;
      default:   avs_s1_waitrequest = 1'b1;
    endcase
  end
  assign avs_s1_readdata = enc_out_data;

  assign enc_in_valid  = (state == S_RD_M1) && !avm_m1_waitrequest;
  assign enc_out_ready = (state == S_RD_SEND) && avs_s1_read;

  assign avm_m1_read      = (state == S_RD_M1);
  assign avm_m1_write     = (state == S_WR_M1);
  assign avm_m1_address   = addr_q;
  assign avm_m1_writedata = wdata_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      wr_beat <= '0;
      addr_q  <= '0;
      wdata_q <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          wr_beat <= '0;
          if (beat_in) begin
            addr_q  <= avs_s1_address;
            wr_beat <= SLOT_W'(1);
            state   <= S_WR_RECV;
          end else if (avs_s1_read) begin
            addr_q <= avs_s1_address;
            state  <= S_RD_M1;
          end
        end
        S_WR_RECV:
          if (beat_in) begin
            wr_beat <= wr_beat + 1'b1;
            if (wr_beat == SLOT_W'(CHIPS - 1)) state <= S_WR_DECODE;
          end
        S_WR_DECODE:
          if (dec_out_valid) begin
            wdata_q <= dec_out_data;
            state   <= S_WR_M1;
          end
        S_WR_M1:  if (!avm_m1_waitrequest) state <= S_IDLE;
        S_RD_M1:  if (!avm_m1_waitrequest) state <= S_RD_SEND;
        S_RD_SEND:
          if (enc_out_valid && enc_out_ready && enc_out_last) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  cdma_decoder #(.DATA_W(DATA_W), .CHIPS(CHIPS), .CODE_SRC(CODE_SRC)) u_decoder (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (beat_in),
    .in_ready  (dec_in_ready),
    .in_data   (avs_s1_writedata),
    .out_valid (dec_out_valid),
    .out_data  (dec_out_data)
  );

  cdma_encoder #(.DATA_W(DATA_W), .CHIPS(CHIPS), .CODE_SRC(CODE_SRC)) u_encoder (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (enc_in_valid),
    .in_ready  (enc_in_ready),
    .in_data   (avm_m1_readdata),
    .out_valid (enc_out_valid),
    .out_ready (enc_out_ready),
    .out_data  (enc_out_data),
    .out_last  (enc_out_last)
  );

  a_enc_ready: assert property (@(posedge clk) disable iff (!rst_n)
    enc_in_valid |-> enc_in_ready);
  // Avalon-MM: a stalled request on m1 keeps its address and data.
  a_m1_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (avm_m1_write || avm_m1_read) && avm_m1_waitrequest |=>
      $stable(avm_m1_address) && (!avm_m1_write || $stable(avm_m1_writedata)));
  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n)
    !(avm_m1_read && avm_m1_write));

endmodule
