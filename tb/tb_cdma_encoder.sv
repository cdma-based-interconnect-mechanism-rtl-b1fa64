// tb_cdma_encoder: checks the CDMA encoder at the paper's sizes (32-bit words,
// 8-chip codes, 16 bus lines).
//
//  * The word used in the paper's simulation, 10110101 repeated (bit 0 first),
//    must give the column sums printed there: 5,3,3,5,5,7,3,5 / 5,5,3,3,3,3,5,1
//    / 5,3,5,3,5,3,5,7 / 5,5,5,5,3,7,3,3 for batches 0..3.
//  * Random words, with random back-pressure on out_ready, must give the sums of
//    the independent reference model, beat by beat.
//  * A second encoder built with the LFSR code source must give the sums of
//    the reference LFSR model (seed (37*b mod 255)+1 for batch b).
//  * Timing without back-pressure: the first beat is offered 9 cycles after the
//    cycle in which the word is taken, the 8 beats are consecutive, and words
//    sent back to back are taken every 16 cycles.
module tb_cdma_encoder;
  import tb_cdma_ref_pkg::*;
  localparam int DATA_W = 32, CHIPS = 8, BUS_W = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, out_last;
  logic [DATA_W-1:0] in_data = '0;
  logic [BUS_W-1:0]  out_data;
  int checks = 0, failures = 0;
  int cycle = 0;
  bit stall_mode = 0;

  cdma_encoder #(.DATA_W(DATA_W), .CHIPS(CHIPS)) dut (.*);

  // Second encoder with the LFSR code source, driven identically.
  logic lf_in_ready, lf_out_valid, lf_out_last;
  logic [BUS_W-1:0] lf_out_data;
  cdma_encoder #(.DATA_W(DATA_W), .CHIPS(CHIPS), .CODE_SRC(cdma_pkg::CODE_LFSR)) dut_lfsr (
    .clk, .rst_n, .in_valid, .in_ready(lf_in_ready), .in_data, .out_valid(lf_out_valid),
    .out_ready, .out_data(lf_out_data), .out_last(lf_out_last));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #2000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Words taken, in order, with the cycle they were taken in.
  logic [DATA_W-1:0] sent_q [$];
  int                take_cycle_q [$];
  int                words_done = 0;

  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    sent_q.push_back(in_data);
    take_cycle_q.push_back(cycle);
  end

  // Back-pressure.
  always @(negedge clk) out_ready = stall_mode ? ($urandom_range(0, 2) != 0) : 1'b1;

  // Beat checker.
  int bn = 0;
  logic [BUS_W-1:0] first_beats [CHIPS];
  int sums [];
  int lsums [];
  int first_beat_cycle, prev_beat_cycle, prev_take = -1;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    logic [255:0] expb;
    if (bn == 0) begin
      encode({224'b0, sent_q[0]}, DATA_W, CHIPS, sums);
      encode_lfsr({224'b0, sent_q[0]}, DATA_W, lsums);
      first_beat_cycle = cycle;
      if (!stall_mode) begin
        checks++;
        if (cycle - take_cycle_q[0] != 9) begin
          failures++;
          $display("FAIL first beat %0d cycles after take, expected 9", cycle - take_cycle_q[0]);
        end
        if (prev_take >= 0) begin
          checks++;
          if (take_cycle_q[0] - prev_take != 16) begin
            failures++;
            $display("FAIL words taken %0d cycles apart, expected 16", take_cycle_q[0] - prev_take);
          end
        end
      end
    end else if (!stall_mode) begin
      checks++;
      if (cycle != prev_beat_cycle + 1) begin
        failures++;
        $display("FAIL beats not consecutive");
      end
    end
    prev_beat_cycle = cycle;
    if (words_done == 0) first_beats[bn] = out_data;
    expb = beat(sums, bn, DATA_W, CHIPS);
    checks++;
    if (out_data !== expb[BUS_W-1:0]) begin
      failures++;
      $display("FAIL word %h beat %0d: %h expected %h", sent_q[0], bn, out_data, expb[BUS_W-1:0]);
    end
    expb = beat(lsums, bn, DATA_W, CHIPS);
    checks++;
    if (!lf_out_valid || lf_out_data !== expb[BUS_W-1:0]) begin
      failures++;
      $display("FAIL LFSR codes, word %h beat %0d: %h expected %h", sent_q[0], bn, lf_out_data, expb[BUS_W-1:0]);
    end
    checks++;
    if (out_last !== (bn == CHIPS - 1)) begin
      failures++;
      $display("FAIL out_last at beat %0d", bn);
    end
    if (bn == CHIPS - 1) begin
      prev_take = take_cycle_q[0];
      void'(sent_q.pop_front());
      void'(take_cycle_q.pop_front());
      words_done++;
      bn = 0;
    end else bn++;
  end

  // Offers a word and returns just after the edge that takes it; in_valid
  // stays high so that consecutive calls send back to back.
  task automatic send(logic [DATA_W-1:0] w);
    bit taken = 0;
    in_valid = 1;
    in_data  = w;
    while (!taken) begin
      @(negedge clk); #2;
      taken = in_ready;
      @(posedge clk); #1;
    end
  endtask

  initial begin
    logic [DATA_W-1:0] paper_word;
    static int exp_sums [4][8] = '{'{5,3,3,5,5,7,3,5}, '{5,5,3,3,3,3,5,1},
                            '{5,3,5,3,5,3,5,7}, '{5,5,5,5,3,7,3,3}};
    static string s = "10110101101101011011010110110101";
    for (int i = 0; i < 32; i++) paper_word[i] = (s[i] == "1");
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // Paper example, checked against the printed sums.
    send(paper_word);
    in_valid = 0;
    wait (words_done == 1);
    for (int b = 0; b < 4; b++)
      for (int k = 0; k < 8; k++) begin
        checks++;
        if (int'(first_beats[k][4*b +: 4]) != exp_sums[b][k]) begin
          failures++;
          $display("FAIL paper word batch %0d sum %0d = %0d, expected %0d", b, k,
                   first_beats[k][4*b +: 4], exp_sums[b][k]);
        end
      end
    prev_take = -1;
    // Back-to-back random words, no back-pressure.
    for (int n = 0; n < 30; n++) send($urandom);
    in_valid = 0;
    wait (words_done == 31);
    // Random words with back-pressure and gaps.
    @(posedge clk);
    stall_mode = 1;
    for (int n = 0; n < 60; n++) begin
      in_valid = 0;
      repeat ($urandom_range(0, 3)) @(posedge clk);
      #1 send($urandom);
    end
    in_valid = 0;
    wait (words_done == 91);
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
