// tb_master_wrapper: checks the processor-side wrapper on its own.
//
// The testbench plays the processor on s0 and a coded-bus slave on m0. The bus
// slave decodes the 8 write beats of each write with the reference model and
// keeps the word in a small memory; for a read it answers 8 read beats with
// the reference encoding of the stored word. It inserts random wait states.
// Checked: every write arrives with the right address and word, every read
// returns the stored word, at most one of read/write is high, and, without
// wait states, a write completes 18 cycles and a read 19 cycles after the
// processor raises its request (counting that cycle as the first).
module tb_master_wrapper;
  import tb_cdma_ref_pkg::*;
  localparam int ADDR_W = 32, DATA_W = 32, CHIPS = 8, BUS_W = 16;
  logic clk = 0, rst_n = 0;
  logic              avs_s0_read = 0, avs_s0_write = 0;
  logic [ADDR_W-1:0] avs_s0_address = '0;
  logic [DATA_W-1:0] avs_s0_writedata = '0;
  logic [DATA_W-1:0] avs_s0_readdata;
  logic              avs_s0_waitrequest;
  logic              avm_m0_read, avm_m0_write;
  logic [ADDR_W-1:0] avm_m0_address;
  logic [BUS_W-1:0]  avm_m0_writedata;
  logic [BUS_W-1:0]  avm_m0_readdata;
  logic              avm_m0_waitrequest = 1;
  int checks = 0, failures = 0;
  int cycle = 0;
  bit bus_stalls = 0;

  master_wrapper #(.ADDR_W(ADDR_W), .DATA_W(DATA_W), .CHIPS(CHIPS)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    #3000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- coded-bus slave model ----------------
  logic [DATA_W-1:0] mem [16];
  int wbeat = 0, rbeat = 0;
  int wsums [];
  int rsums [];
  logic [ADDR_W-1:0] last_wr_addr;
  logic [DATA_W-1:0] last_wr_data;
  int writes_seen = 0;

  always @(negedge clk) avm_m0_waitrequest = bus_stalls ? ($urandom_range(0, 2) == 0) : 1'b0;

  always_comb begin
    logic [255:0] bv;
    int s [];
    encode({224'b0, mem[avm_m0_address[3:0]]}, DATA_W, CHIPS, s);
    bv = beat(s, rbeat, DATA_W, CHIPS);
    avm_m0_readdata = bv[BUS_W-1:0];
  end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (avm_m0_read && avm_m0_write) begin
      failures++;
      $display("FAIL read and write together");
    end
    if (avm_m0_write && !avm_m0_waitrequest) begin
      if (wbeat == 0) wsums = new[32];
      for (int b = 0; b < 4; b++) wsums[b*8 + wbeat] = int'(avm_m0_writedata[4*b +: 4]);
      if (wbeat == CHIPS - 1) begin
        automatic logic [255:0] d = decode(wsums, DATA_W, CHIPS);
        mem[avm_m0_address[3:0]] <= d[DATA_W-1:0];
        last_wr_addr <= avm_m0_address;
        last_wr_data <= d[DATA_W-1:0];
        writes_seen <= writes_seen + 1;
        wbeat = 0;
      end else wbeat++;
    end
    if (avm_m0_read && !avm_m0_waitrequest) rbeat = (rbeat + 1) % CHIPS;
  end

  // ---------------- processor ----------------
  // Runs one transfer; returns the number of cycles from the request to the
  // completion cycle, both counted.
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

  initial begin
    logic [DATA_W-1:0] model [16];
    logic [DATA_W-1:0] rd;
    int cyc;
    foreach (mem[i]) begin mem[i] = '0; model[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    for (int n = 0; n < 120; n++) begin
      automatic bit wr = 1'($urandom_range(0, 1));
      automatic logic [ADDR_W-1:0] a = ADDR_W'($urandom_range(0, 15));
      automatic logic [DATA_W-1:0] d = $urandom;
      bus_stalls = (n >= 40);
      cpu_xfer(wr, a, d, rd, cyc);
      if (wr) begin
        model[a[3:0]] = d;
        @(posedge clk); #1;
        checks++;
        if (last_wr_addr !== a || last_wr_data !== d) begin
          failures++;
          $display("FAIL write %h to %h arrived as %h to %h", d, a, last_wr_data, last_wr_addr);
        end
      end else begin
        checks++;
        if (rd !== model[a[3:0]]) begin
          failures++;
          $display("FAIL read %h from %h, expected %h", rd, a, model[a[3:0]]);
        end
      end
      if (!bus_stalls) begin
        checks++;
        if (cyc != (wr ? 18 : 19)) begin
          failures++;
          $display("FAIL %s took %0d cycles, expected %0d", wr ? "write" : "read", cyc, wr ? 18 : 19);
        end
      end
      repeat ($urandom_range(0, 2)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
