// tb_chip_summer: checks the column-wise chip counter against a software count.
// Random chip vectors are added for 8 cycles between clears (with random idle
// cycles), and every sum is compared each cycle; clear together with add_en
// must restart the sums from the current chips.
module tb_chip_summer;
  localparam int CHIPS = 8, SUM_W = 4;
  logic clk = 0, rst_n = 0, clear = 0, add_en = 0;
  logic [CHIPS-1:0] chips = '0;
  logic [SUM_W-1:0] sums [CHIPS];
  int model [CHIPS];
  int checks = 0, failures = 0;

  chip_summer #(.CHIPS(CHIPS), .SUM_W(SUM_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int adds;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    foreach (model[k]) model[k] = 0;
    adds = 0;
    for (int n = 0; n < 1000; n++) begin
      clear  = (adds == CHIPS) || ($urandom_range(0, 40) == 0);
      add_en = clear ? ($urandom_range(0, 1) == 1) : ($urandom_range(0, 3) != 0);
      chips  = CHIPS'($urandom);
      @(posedge clk); #1;
      if (clear) begin
        foreach (model[k]) model[k] = 0;
        adds = 0;
      end
      if (add_en) begin
        foreach (model[k]) model[k] += chips[k];
        adds++;
      end
      for (int k = 0; k < CHIPS; k++) begin
        checks++;
        if (int'(sums[k]) != model[k]) begin
          failures++;
          if (failures < 10) $display("FAIL cycle %0d sum %0d = %0d, expected %0d", n, k, sums[k], model[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
