// tb_lfsr8: checks the 8-bit code LFSR against a register-by-register model.
//
// The model keeps registers r[1..8] as separate bits, shifts them one by one
// and feeds r1^r2^r3^r7 into r1. The test checks the reset seed, loading,
// holding when not stepped, random stepping, and the cycle length: from seed
// 8'h01 the register enters a cycle of 127 states (03 recurs after 127 steps).
module tb_lfsr8;
  logic clk = 0, rst_n = 0, load = 0, step = 0;
  logic [7:0] seed = '0, state;
  int checks = 0, failures = 0;
  bit r [1:8];

  lfsr8 #(.RESET_SEED(8'h01)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [7:0] pack();
    logic [7:0] v;
    for (int i = 1; i <= 8; i++) v[i-1] = r[i];
    return v;
  endfunction

  task automatic model_step();
    bit fb = r[1] ^ r[2] ^ r[3] ^ r[7];
    for (int i = 8; i >= 2; i--) r[i] = r[i-1];
    r[1] = fb;
  endtask

  task automatic check(string what);
    checks++;
    if (state !== pack()) begin
      failures++;
      $display("FAIL %s: state %h, expected %h", what, state, pack());
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int period;
    for (int i = 1; i <= 8; i++) r[i] = (i == 1);
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    check("reset seed");
    // Random stepping and holding.
    for (int n = 0; n < 400; n++) begin
      step = $urandom_range(0, 3) != 0;
      @(posedge clk); #1;
      if (step) model_step();
      check("step/hold");
    end
    // Loading a new seed.
    step = 0; load = 1; seed = 8'hA7;
    @(posedge clk); #1;
    load = 0;
    for (int i = 1; i <= 8; i++) r[i] = seed[i-1];
    check("load");
    // load has priority over step
    load = 1; step = 1; seed = 8'h3C;
    @(posedge clk); #1;
    load = 0;
    for (int i = 1; i <= 8; i++) r[i] = seed[i-1];
    check("load over step");
    // Period from seed 01.
    load = 1; seed = 8'h01; step = 0;
    @(posedge clk); #1;
    load = 0; step = 1;
    period = 0;
    @(posedge clk); #1;          // 01 -> 03, which lies on the cycle
    for (int n = 1; n <= 300; n++) begin
      @(posedge clk); #1;
      if (state == 8'h03) begin
        period = n;
        break;
      end
    end
    checks++;
    if (period != 127) begin
      failures++;
      $display("FAIL period %0d, expected 127", period);
    end
    // First states after seed 01, worked out by hand.
    load = 1; seed = 8'h01; step = 0;
    @(posedge clk); #1;
    load = 0; step = 1;
    foreach (exp_seq[i]) begin
      @(posedge clk); #1;
      checks++;
      if (state !== exp_seq[i]) begin
        failures++;
        $display("FAIL sequence %0d: %h expected %h", i, state, exp_seq[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected first states after seed 01.
  logic [7:0] exp_seq [4];
  initial begin
    // From 8'h01: taps r1,r2,r3,r7 = state[0],[1],[2],[6].
    // 01: fb = 1          -> 03
    // 03: fb = 1^1 = 0    -> 06
    // 06: fb = 0^1^1 = 0  -> 0C
    // 0C: fb = 0^0^1 = 1  -> 19
    exp_seq = '{8'h03, 8'h06, 8'h0C, 8'h19};
  end
endmodule
