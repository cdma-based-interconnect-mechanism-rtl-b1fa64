// tb_table1_configs: builds the interconnect for every code length S and bus
// width N of the paper's Table 1 (S = 4, 8, 16, 32; N = 8 .. 256, S <= N) and
// checks, for each, that the coded bus has the number of lines the table gives,
// N/S * (log2(S) + 1), and that random writes and reads pass through intact.
module tb_table1_configs;
  localparam int NCFG = 17;
  bit done [NCFG];
  int checks_a [NCFG];
  int fails_a [NCFG];

  // {S, N, lines} from Table 1.
  tb_link_harness #(.CHIPS(4),  .DATA_W(8),   .EXP_LINES(6))   h0  (done[0],  checks_a[0],  fails_a[0]);
  tb_link_harness #(.CHIPS(4),  .DATA_W(16),  .EXP_LINES(12))  h1  (done[1],  checks_a[1],  fails_a[1]);
  tb_link_harness #(.CHIPS(4),  .DATA_W(64),  .EXP_LINES(48))  h2  (done[2],  checks_a[2],  fails_a[2]);
  tb_link_harness #(.CHIPS(4),  .DATA_W(128), .EXP_LINES(96))  h3  (done[3],  checks_a[3],  fails_a[3]);
  tb_link_harness #(.CHIPS(4),  .DATA_W(256), .EXP_LINES(192)) h4  (done[4],  checks_a[4],  fails_a[4]);
  tb_link_harness #(.CHIPS(8),  .DATA_W(8),   .EXP_LINES(4))   h5  (done[5],  checks_a[5],  fails_a[5]);
  tb_link_harness #(.CHIPS(8),  .DATA_W(16),  .EXP_LINES(8))   h6  (done[6],  checks_a[6],  fails_a[6]);
  tb_link_harness #(.CHIPS(8),  .DATA_W(64),  .EXP_LINES(32))  h7  (done[7],  checks_a[7],  fails_a[7]);
  tb_link_harness #(.CHIPS(8),  .DATA_W(128), .EXP_LINES(64))  h8  (done[8],  checks_a[8],  fails_a[8]);
  tb_link_harness #(.CHIPS(8),  .DATA_W(256), .EXP_LINES(128)) h9  (done[9],  checks_a[9],  fails_a[9]);
  tb_link_harness #(.CHIPS(16), .DATA_W(16),  .EXP_LINES(5))   h10 (done[10], checks_a[10], fails_a[10]);
  tb_link_harness #(.CHIPS(16), .DATA_W(64),  .EXP_LINES(20))  h11 (done[11], checks_a[11], fails_a[11]);
  tb_link_harness #(.CHIPS(16), .DATA_W(128), .EXP_LINES(40))  h12 (done[12], checks_a[12], fails_a[12]);
  tb_link_harness #(.CHIPS(16), .DATA_W(256), .EXP_LINES(80))  h13 (done[13], checks_a[13], fails_a[13]);
  tb_link_harness #(.CHIPS(32), .DATA_W(64),  .EXP_LINES(12))  h14 (done[14], checks_a[14], fails_a[14]);
  tb_link_harness #(.CHIPS(32), .DATA_W(128), .EXP_LINES(24))  h15 (done[15], checks_a[15], fails_a[15]);
  tb_link_harness #(.CHIPS(32), .DATA_W(256), .EXP_LINES(48))  h16 (done[16], checks_a[16], fails_a[16]);

  initial begin
    int checks = 0, failures = 0;
    bit all_done;
    fork
      begin
        #10000000;
        failures++;
        $display("FAIL watchdog");
      end
      begin
        do begin
          #1000;
          all_done = 1;
          foreach (done[i]) all_done &= done[i];
        end while (!all_done);
      end
    join_any
    foreach (done[i]) begin
      checks += checks_a[i];
      failures += fails_a[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
