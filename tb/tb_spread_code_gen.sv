// tb_spread_code_gen: checks the spreading-code generator.
//
// Walsh source (CHIPS = 8, NB = 4): for every slot the code of batch b must be
// Sylvester-Hadamard row (slot - b) mod 8, built independently in the
// reference package; the rows of any one batch must be mutually orthogonal;
// restart must return to slot 0 and the generator must hold without step.
// Two code words are also compared with values printed in the paper's encoder
// simulation: the second batch's codes in slots 0 and 2 are 01101001 and
// 01010101 (chip 0 first).
// LFSR source: the code of batch b must follow an lfsr8 model started from
// seed (37*b mod 255)+1.
module tb_spread_code_gen;
  import tb_cdma_ref_pkg::*;
  import cdma_pkg::*;
  localparam int CHIPS = 8, NB = 4;
  logic clk = 0, rst_n = 0, restart = 0, step = 0;
  logic [CHIPS-1:0] code_w [NB];
  logic [CHIPS-1:0] code_l [NB];
  int checks = 0, failures = 0;

  spread_code_gen #(.CHIPS(CHIPS), .NB(NB), .CODE_SRC(CODE_WALSH)) dut_w (
    .clk, .rst_n, .restart, .step, .code(code_w));
  spread_code_gen #(.CHIPS(CHIPS), .NB(NB), .CODE_SRC(CODE_LFSR)) dut_l (
    .clk, .rst_n, .restart, .step, .code(code_l));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] lfsr_next(logic [7:0] s);
    return {s[6:0], s[0] ^ s[1] ^ s[2] ^ s[6]};
  endfunction

  task automatic expect_code(int slot, logic [7:0] lst [NB]);
    for (int b = 0; b < NB; b++) begin
      checks += 2;
      if (code_w[b] !== CHIPS'(walsh_code(b, slot, CHIPS))) begin
        failures++;
        $display("FAIL walsh slot %0d batch %0d: %b expected %b", slot, b, code_w[b],
                 CHIPS'(walsh_code(b, slot, CHIPS)));
      end
      if (code_l[b] !== lst[b]) begin
        failures++;
        $display("FAIL lfsr slot batch %0d: %h expected %h", b, code_l[b], lst[b]);
      end
    end
  endtask

  initial begin
    logic [7:0] lst [NB];
    logic [7:0] seen [NB][CHIPS];
    int slot;
    for (int b = 0; b < NB; b++) lst[b] = 8'(((b * 37) % 255) + 1);
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    slot = 0;
    expect_code(slot, lst);
    // Printed values: batch 1 (second batch), slots 0 and 2, chip 0 first.
    checks++;
    if ({<<{code_w[1]}} !== 8'b01101001) begin
      failures++; $display("FAIL batch 1 slot 0 %b", code_w[1]);
    end
    for (int n = 0; n < 200; n++) begin
      if (slot < CHIPS) for (int b = 0; b < NB; b++) seen[b][slot] = code_w[b];
      step = $urandom_range(0, 2) != 0;
      restart = ($urandom_range(0, 30) == 0);
      @(posedge clk); #1;
      if (restart) begin
        slot = 0;
        for (int b = 0; b < NB; b++) lst[b] = 8'(((b * 37) % 255) + 1);
      end else if (step) begin
        slot = (slot + 1) % CHIPS;
        for (int b = 0; b < NB; b++) lst[b] = lfsr_next(lst[b]);
      end
      expect_code(slot, lst);
      if (slot == 2 && n < 20) begin
        checks++;
        if ({<<{code_w[1]}} !== 8'b01010101) begin
          failures++; $display("FAIL batch 1 slot 2 %b", code_w[1]);
        end
      end
    end
    // Orthogonality of the eight Walsh code words of each batch.
    restart = 1; step = 0;
    @(posedge clk); #1;
    restart = 0; step = 1;
    for (int j = 0; j < CHIPS; j++) begin
      for (int b = 0; b < NB; b++) seen[b][j] = code_w[b];
      @(posedge clk); #1;
    end
    for (int b = 0; b < NB; b++)
      for (int i = 0; i < CHIPS; i++)
        for (int j = i + 1; j < CHIPS; j++) begin
          automatic int agree = 0;
          for (int k = 0; k < CHIPS; k++) agree += (seen[b][i][k] == seen[b][j][k]) ? 1 : -1;
          checks++;
          if (agree != 0) begin
            failures++;
            $display("FAIL batch %0d codes %0d,%0d not orthogonal", b, i, j);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
