// tb_slave_wrapper: checks the slave-side wrapper on its own.
//
// The testbench plays the coded-bus master on s1, encoding and decoding with
// the reference model, and a memory model (tb_avalon_mem) is the slave IP on
// m1. Random writes and reads go out back to back, so that a read often
// arrives while the previous posted write is still being despread. Checked:
// every read returns the last word written to that address, m1 sees the
// written address and word, and, without wait states on m1, the first read
// beat is answered 10 cycles after the read is raised and m1_write rises 10
// cycles after the last write beat.
module tb_slave_wrapper;
  import tb_cdma_ref_pkg::*;
  localparam int ADDR_W = 32, DATA_W = 32, CHIPS = 8, BUS_W = 16;
  logic clk = 0, rst_n = 0;
  logic              avs_s1_read = 0, avs_s1_write = 0;
  logic [ADDR_W-1:0] avs_s1_address = '0;
  logic [BUS_W-1:0]  avs_s1_writedata = '0;
  logic [BUS_W-1:0]  avs_s1_readdata;
  logic              avs_s1_waitrequest;
  logic              avm_m1_read, avm_m1_write;
  logic [ADDR_W-1:0] avm_m1_address;
  logic [DATA_W-1:0] avm_m1_writedata;
  logic [DATA_W-1:0] avm_m1_readdata;
  logic              avm_m1_waitrequest;
  logic              stall_en = 0;
  int stall_cycles, mem_writes, mem_reads;
  int checks = 0, failures = 0;
  int cycle = 0;
  int busy_waits = 0;    // cycles a bus request waited for the wrapper

  slave_wrapper #(.ADDR_W(ADDR_W), .DATA_W(DATA_W), .CHIPS(CHIPS)) dut (.*);

  tb_avalon_mem #(.ADDR_W(ADDR_W), .DATA_W(DATA_W), .WORDS(16)) u_mem (
    .clk, .rst_n, .stall_en,
    .read(avm_m1_read), .write(avm_m1_write), .address(avm_m1_address),
    .writedata(avm_m1_writedata), .readdata(avm_m1_readdata),
    .waitrequest(avm_m1_waitrequest), .stall_cycles, .writes(mem_writes), .reads(mem_reads));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #3000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // m1 monitor: the word written must be the one sent.
  logic [ADDR_W-1:0] exp_wr_addr [$];
  logic [DATA_W-1:0] exp_wr_data [$];
  int last_wr_beat_cycle = 0;
  int m1_write_start = -1;
  always @(posedge clk) if (rst_n) begin
    if (avm_m1_write && m1_write_start < 0) m1_write_start = cycle;
    if (avm_m1_write && !avm_m1_waitrequest) begin
      checks++;
      if (avm_m1_address !== exp_wr_addr[0] || avm_m1_writedata !== exp_wr_data[0]) begin
        failures++;
        $display("FAIL m1 write %h to %h, expected %h to %h", avm_m1_writedata,
                 avm_m1_address, exp_wr_data[0], exp_wr_addr[0]);
      end
      if (!stall_en) begin
        checks++;
        if (m1_write_start - last_wr_beat_cycle != 10) begin
          failures++;
          $display("FAIL m1 write %0d cycles after the last beat, expected 10",
                   m1_write_start - last_wr_beat_cycle);
        end
      end
      m1_write_start = -1;
      void'(exp_wr_addr.pop_front());
      void'(exp_wr_data.pop_front());
    end
  end

  // Write: 8 beats with write held high, each moving when waitrequest is low.
  task automatic bus_write(logic [ADDR_W-1:0] a, logic [DATA_W-1:0] d);
    int sums [];
    encode({224'b0, d}, DATA_W, CHIPS, sums);
    exp_wr_addr.push_back(a);
    exp_wr_data.push_back(d);
    for (int k = 0; k < CHIPS; k++) begin
      logic [255:0] bv = beat(sums, k, DATA_W, CHIPS);
      @(negedge clk);
      avs_s1_write = 1; avs_s1_address = a; avs_s1_writedata = bv[BUS_W-1:0];
      #2;
      while (avs_s1_waitrequest) begin
        busy_waits++;
        @(negedge clk); #2;
      end
      @(posedge clk);
      if (k == CHIPS - 1) last_wr_beat_cycle = cycle;
      #1;
    end
    avs_s1_write = 0;
  endtask

  // Read: 8 beats with read held high; returns the decoded word and the
  // number of cycles until the first beat was answered.
  task automatic bus_read(logic [ADDR_W-1:0] a, output logic [DATA_W-1:0] d,
                          output int first_wait);
    int sums [];
    int start;
    logic [255:0] dv;
    sums = new[32];
    @(negedge clk);
    avs_s1_read = 1; avs_s1_address = a;
    start = cycle;
    for (int k = 0; k < CHIPS; k++) begin
      #2;
      while (avs_s1_waitrequest) begin
        busy_waits++;
        @(negedge clk); #2;
      end
      if (k == 0) first_wait = cycle - start;
      for (int b = 0; b < 4; b++) sums[b*8 + k] = int'(avs_s1_readdata[4*b +: 4]);
      @(negedge clk);
    end
    avs_s1_read = 0;
    dv = decode(sums, DATA_W, CHIPS);
    d = dv[DATA_W-1:0];
  endtask

  initial begin
    logic [DATA_W-1:0] model [16];
    logic [DATA_W-1:0] rd;
    int fw;
    foreach (model[i]) model[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    for (int n = 0; n < 150; n++) begin
      automatic logic [ADDR_W-1:0] a = ADDR_W'($urandom_range(0, 15));
      stall_en = (n >= 60);
      if ($urandom_range(0, 1)) begin
        automatic logic [DATA_W-1:0] d = $urandom;
        bus_write(a, d);
        model[a] = d;
      end else begin
        automatic bit idle = (exp_wr_addr.size() == 0) && !stall_en;
        bus_read(a, rd, fw);
        checks++;
        if (rd !== model[a]) begin
          failures++;
          $display("FAIL read %h from %h, expected %h", rd, a, model[a]);
        end
        if (idle) begin
          checks++;
          if (fw != 10) begin
            failures++;
            $display("FAIL first read beat after %0d cycles, expected 10", fw);
          end
        end
      end
    end
    repeat (40) @(posedge clk);
    checks++;
    if (busy_waits == 0 || stall_cycles == 0) begin
      failures++;
      $display("FAIL no stall was exercised (%0d, %0d)", busy_waits, stall_cycles);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
