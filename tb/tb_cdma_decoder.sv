// tb_cdma_decoder: checks the CDMA decoder at the paper's sizes.
//
//  * The chip sums printed in the paper's decoder simulation
//    (53355735, 55333351, 53535357, 55553733 for batches 0..3) must decode to
//    the word used there, 10110101 repeated (bit 0 first).
//  * Random words, encoded by the independent reference model and sent with
//    random gaps between beats, must come back unchanged.
//  * Timing: out_valid rises 9 cycles after the cycle of the last beat (8
//    despread cycles, then the registered result), in_ready is low during
//    despreading and high again with out_valid.
module tb_cdma_decoder;
  import tb_cdma_ref_pkg::*;
  localparam int DATA_W = 32, CHIPS = 8, BUS_W = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid;
  logic [BUS_W-1:0]  in_data = '0;
  logic [DATA_W-1:0] out_data;
  int checks = 0, failures = 0;
  int cycle = 0;

  cdma_decoder #(.DATA_W(DATA_W), .CHIPS(CHIPS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #2000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [DATA_W-1:0] exp_q [$];
  int last_beat_cycle = 1000000;
  int words_done = 0;

  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (out_data !== exp_q[0]) begin
      failures++;
      $display("FAIL decoded %h, expected %h", out_data, exp_q[0]);
    end
    if (cycle - last_beat_cycle != 9) begin
      failures++;
      $display("FAIL out_valid %0d cycles after the last beat, expected 9", cycle - last_beat_cycle);
    end
    void'(exp_q.pop_front());
    words_done++;
  end

  // Sends the 8 beats of a set of chip sums; gaps between beats when `gaps`.
  task automatic send_sums(int sums[], bit gaps);
    for (int k = 0; k < CHIPS; k++) begin
      logic [255:0] bv = beat(sums, k, DATA_W, CHIPS);
      if (gaps) repeat ($urandom_range(0, 2)) @(posedge clk);
      #1;
      in_valid = 1;
      in_data  = bv[BUS_W-1:0];
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      @(posedge clk);
      if (k == CHIPS - 1) last_beat_cycle = cycle;
      #1 in_valid = 0;
    end
  endtask

  // Watches that no beat is taken while despreading.
  always @(posedge clk) if (rst_n && words_done < 81 && exp_q.size() > 0 &&
                           cycle > last_beat_cycle && cycle <= last_beat_cycle + 8) begin
    checks++;
    if (in_ready) begin
      failures++;
      $display("FAIL in_ready high while despreading");
    end
  end

  initial begin
    int sums [];
    static int paper [4][8] = '{'{5,3,3,5,5,7,3,5}, '{5,5,3,3,3,3,5,1},
                         '{5,3,5,3,5,3,5,7}, '{5,5,5,5,3,7,3,3}};
    logic [DATA_W-1:0] paper_word;
    static string s = "10110101101101011011010110110101";
    for (int i = 0; i < 32; i++) paper_word[i] = (s[i] == "1");
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    sums = new[32];
    for (int b = 0; b < 4; b++) for (int k = 0; k < 8; k++) sums[b*8 + k] = paper[b][k];
    exp_q.push_back(paper_word);
    send_sums(sums, 0);
    for (int n = 0; n < 80; n++) begin
      automatic logic [DATA_W-1:0] w = $urandom;
      if (n == 1) w = '0;
      if (n == 2) w = '1;
      encode({224'b0, w}, DATA_W, CHIPS, sums);
      exp_q.push_back(w);
      send_sums(sums, n >= 40);
    end
    wait (words_done == 81);
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
