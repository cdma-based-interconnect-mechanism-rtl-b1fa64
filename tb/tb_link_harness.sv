// tb_link_harness: drives one cdma_interconnect_top of a given size with
// random writes and reads through a memory model and checks every read
// against a software memory. It also checks the coded bus width against
// EXP_LINES and raises `done` when finished. Used by tb_table1_configs.
module tb_link_harness #(
  parameter int DATA_W    = 32,
  parameter int CHIPS     = 8,
  parameter int EXP_LINES = 16,
  parameter int OPS       = 40
) (
  output bit done,
  output int checks,
  output int failures
);
  import tb_cdma_ref_pkg::*;
  localparam int ADDR_W = 32;
  localparam int BUS_W  = (DATA_W / CHIPS) * ($clog2(CHIPS) + 1);
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

  cdma_interconnect_top #(.ADDR_W(ADDR_W), .DATA_W(DATA_W), .CHIPS(CHIPS)) dut (.*);

  tb_avalon_mem #(.ADDR_W(ADDR_W), .DATA_W(DATA_W), .WORDS(8)) u_mem (
    .clk, .rst_n, .stall_en,
    .read(avm_m1_read), .write(avm_m1_write), .address(avm_m1_address),
    .writedata(avm_m1_writedata), .readdata(avm_m1_readdata),
    .waitrequest(avm_m1_waitrequest), .stall_cycles, .writes(mem_writes), .reads(mem_reads));

  always #5 clk = ~clk;

  function automatic logic [DATA_W-1:0] rand_word();
    logic [255:0] w;
    for (int i = 0; i < 256; i += 32) w[i +: 32] = $urandom;
    return w[DATA_W-1:0];
  endfunction

  task automatic cpu_xfer(bit wr, logic [ADDR_W-1:0] a, logic [DATA_W-1:0] d,
                          output logic [DATA_W-1:0] rd);
    @(negedge clk);
    avs_s0_write = wr; avs_s0_read = !wr;
    avs_s0_address = a; avs_s0_writedata = d;
    #2;
    while (avs_s0_waitrequest) begin
      @(negedge clk); #2;
    end
    rd = avs_s0_readdata;
    @(posedge clk); #1;
    avs_s0_write = 0; avs_s0_read = 0;
  endtask

  initial begin
    logic [DATA_W-1:0] model [8];
    logic [DATA_W-1:0] rd;
    done = 0; checks = 1; failures = 0;
    if (BUS_W != EXP_LINES) begin
      failures++;
      $display("FAIL S=%0d N=%0d: %0d coded lines, table says %0d", CHIPS, DATA_W, BUS_W, EXP_LINES);
    end
    foreach (model[i]) model[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    for (int n = 0; n < OPS; n++) begin
      automatic bit wr = (n < 8) || $urandom_range(0, 1);
      automatic logic [ADDR_W-1:0] a = ADDR_W'(n < 8 ? n : $urandom_range(0, 7));
      automatic logic [DATA_W-1:0] d = rand_word();
      stall_en = (n >= OPS / 2);
      cpu_xfer(wr, a, d, rd);
      if (wr) model[a[2:0]] = d;
      else begin
        checks++;
        if (rd !== model[a[2:0]]) begin
          failures++;
          $display("FAIL S=%0d N=%0d: read %h, expected %h", CHIPS, DATA_W, rd, model[a[2:0]]);
        end
      end
    end
    done = 1;
  end
endmodule
