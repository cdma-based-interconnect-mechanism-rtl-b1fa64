// tb_cdma_interconnect_top: end-to-end test of the CDMA interconnect at its
// default sizes (32-bit data, 8-chip codes, 16 coded lines per direction).
//
// The testbench plays the processor on s0; a memory model (tb_avalon_mem) is
// the slave IP on m1. It runs:
//  1. the word of the paper's simulation, 10110101 repeated (bit 0 first),
//     written once: the 8 write beats on the coded bus must carry the chip
//     sums printed in the paper (53355735, 55333351, 53535357, 55553733 for
//     batches 0..3, one digit per beat);
//  2. unstalled single writes and reads, whose latency at the processor must
//     be 18 cycles (write) and 29 cycles (read from an idle link);
//  3. random back-to-back traffic with wait states from the slave IP, checked
//     against a software memory.
// It counts each mechanism of the link and fails if one never happened:
// coded writes, coded reads, posted writes still in flight when the processor
// moved on, write beats stalled by the busy slave wrapper, and wait states
// from the slave IP. It also checks that the coded bus is 16 lines wide.
module tb_cdma_interconnect_top;
  import tb_cdma_ref_pkg::*;
  localparam int ADDR_W = 32, DATA_W = 32, CHIPS = 8, BUS_W = 16;
  logic clk = 0, rst_n = 0;
  logic              avs_s0_read = 0, avs_s0_write = 0;
  logic [ADDR_W-1:0] avs_s0_address = '0;
  logic [DATA_W-1:0] avs_s0_writedata = '0;
  logic [DATA_W-1:0] avs_s0_readdata;
  logic              avs_s0_waitrequest;
  logic              avm_m1_read, avm_m1_write;
  logic [ADDR_W-1:0] avm_m1_address;
  logic [DATA_W-1:0] avm_m1_writedata;
  logic [DATA_W-1:0] avm_m1_readdata;
  logic              avm_m1_waitrequest;
  logic              bus_read, bus_write, bus_waitrequest;
  logic [BUS_W-1:0]  bus_writedata, bus_readdata;
  logic              stall_en = 0;
  int stall_cycles, mem_writes, mem_reads;
  int checks = 0, failures = 0;
  int cycle = 0;

  cdma_interconnect_top dut (.*);

  tb_avalon_mem #(.ADDR_W(ADDR_W), .DATA_W(DATA_W), .WORDS(64)) u_mem (
    .clk, .rst_n, .stall_en,
    .read(avm_m1_read), .write(avm_m1_write), .address(avm_m1_address),
    .writedata(avm_m1_writedata), .readdata(avm_m1_readdata),
    .waitrequest(avm_m1_waitrequest), .stall_cycles, .writes(mem_writes), .reads(mem_reads));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #5000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_coded_writes = 0, n_coded_reads = 0, n_posted_inflight = 0;
  int n_bus_stall_cycles = 0;
  int wr_beats = 0, rd_beats = 0;
  logic [BUS_W-1:0] wr_beat_log [$];

  always @(posedge clk) if (rst_n) begin
    if (bus_write && !bus_waitrequest) begin
      wr_beat_log.push_back(bus_writedata);
      if (wr_beats == CHIPS - 1) n_coded_writes++;
      wr_beats = (wr_beats + 1) % CHIPS;
    end
    if (bus_read && !bus_waitrequest) begin
      if (rd_beats == CHIPS - 1) n_coded_reads++;
      rd_beats = (rd_beats + 1) % CHIPS;
    end
    // A write beat is only held off while the slave wrapper is still busy
    // with the previous transfer.
    if (bus_write && bus_waitrequest) n_bus_stall_cycles++;
  end

  // ---------------- processor ----------------
  task automatic cpu_xfer(bit wr, logic [ADDR_W-1:0] a, logic [DATA_W-1:0] d,
                          output logic [DATA_W-1:0] rd, output int cycles);
    int start;
    @(negedge clk);
    avs_s0_write = wr; avs_s0_read = !wr;
    avs_s0_address = a; avs_s0_writedata = d;
    start = cycle;
    #2;
    while (avs_s0_waitrequest) begin
      @(negedge clk); #2;
    end
    rd = avs_s0_readdata;
    cycles = cycle - start + 1;
    @(posedge clk); #1;
    avs_s0_write = 0; avs_s0_read = 0;
  endtask

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: %0d, expected %0d", what, got, exp);
    end
  endtask

  initial begin
    logic [DATA_W-1:0] model [64];
    logic [DATA_W-1:0] rd, paper_word;
    int cyc, writes_before;
    static int paper [4][8] = '{'{5,3,3,5,5,7,3,5}, '{5,5,3,3,3,3,5,1},
                         '{5,3,5,3,5,3,5,7}, '{5,5,5,5,3,7,3,3}};
    static string s = "10110101101101011011010110110101";
    for (int i = 0; i < 32; i++) paper_word[i] = (s[i] == "1");
    foreach (model[i]) model[i] = '0;
    expect_eq("coded bus width", $bits(bus_writedata), 16);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);

    // 1. The paper's word: beats on the bus and round trip.
    cpu_xfer(1, 32'h4, paper_word, rd, cyc);
    model[4] = paper_word;
    expect_eq("write latency", cyc, 18);
    for (int k = 0; k < CHIPS; k++)
      for (int b = 0; b < 4; b++)
        expect_eq($sformatf("paper word beat %0d batch %0d", k, b),
                  wr_beat_log[k][4*b +: 4], paper[b][k]);
    repeat (12) @(posedge clk);
    expect_eq("memory holds the paper word", (u_mem.mem[4] == paper_word), 1);

    // 2. Unstalled read latency from an idle link.
    cpu_xfer(0, 32'h4, '0, rd, cyc);
    expect_eq("read data", rd, paper_word);
    expect_eq("read latency", cyc, 29);

    // 3. Random back-to-back traffic with slave wait states part of the time.
    for (int n = 0; n < 300; n++) begin
      automatic bit wr = 1'($urandom_range(0, 1));
      automatic logic [ADDR_W-1:0] a = ADDR_W'($urandom_range(0, 63));
      automatic logic [DATA_W-1:0] d = $urandom;
      stall_en = (n % 100) >= 50;
      writes_before = mem_writes;
      cpu_xfer(wr, a, d, rd, cyc);
      if (wr) begin
        model[a[5:0]] = d;
        // Posted: the processor is released before the slave IP is written.
        if (mem_writes == writes_before) n_posted_inflight++;
      end else begin
        checks++;
        if (rd !== model[a[5:0]]) begin
          failures++;
          $display("FAIL read %h from %h, expected %h", rd, a, model[a[5:0]]);
        end
      end
    end
    repeat (40) @(posedge clk);
    for (int i = 0; i < 64; i++) expect_eq($sformatf("final memory word %0d", i), u_mem.mem[i], model[i]);

    $display("mechanisms: coded writes %0d, coded reads %0d, posted writes in flight %0d, stalled bus cycles %0d, slave wait states %0d",
             n_coded_writes, n_coded_reads, n_posted_inflight, n_bus_stall_cycles, stall_cycles);
    expect_eq("coded writes happened", n_coded_writes > 0, 1);
    expect_eq("coded reads happened", n_coded_reads > 0, 1);
    expect_eq("posted writes in flight happened", n_posted_inflight > 0, 1);
    expect_eq("bus stalls by the slave wrapper happened", n_bus_stall_cycles > 0, 1);
    expect_eq("slave IP wait states happened", stall_cycles > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
