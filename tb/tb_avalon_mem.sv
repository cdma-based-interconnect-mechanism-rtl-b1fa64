// tb_avalon_mem: behavioural model of a slave IP core for the testbenches: a
// small word-addressed memory with an Avalon-MM slave port (no read latency,
// readdata valid in the cycle waitrequest is low). When `stall_en` is high it
// holds each request for 1..3 wait states; `stall_cycles` counts the
// cycles in which it held a request. Address bits above the memory size are
// ignored. All words start at zero.
module tb_avalon_mem #(
  parameter int ADDR_W = 32,
  parameter int DATA_W = 32,
  parameter int WORDS  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              stall_en,
  input  logic              read,
  input  logic              write,
  input  logic [ADDR_W-1:0] address,
  input  logic [DATA_W-1:0] writedata,
  output logic [DATA_W-1:0] readdata,
  output logic              waitrequest,
  output int                stall_cycles,
  output int                writes,
  output int                reads
);
  logic [DATA_W-1:0] mem [WORDS];
  int wait_left = 0;
  bit in_xfer = 0;

  initial begin
    foreach (mem[i]) mem[i] = '0;
    stall_cycles = 0;
    writes = 0;
    reads = 0;
  end

  assign waitrequest = (read || write) && (wait_left != 0 || !in_xfer && stall_en);
  assign readdata    = mem[address % WORDS];

  // Non-blocking updates only, so that the DUT samples waitrequest as it was
  // before the edge.
  always @(posedge clk) if (rst_n) begin
    if (waitrequest) begin
      stall_cycles <= stall_cycles + 1;
      if (!in_xfer) begin
        in_xfer   <= 1;
        wait_left <= $urandom_range(0, 2);
      end else begin
        wait_left <= wait_left - 1;
      end
    end else if (read || write) begin
      if (write) mem[address % WORDS] <= writedata;
      writes  <= writes + int'(write);
      reads   <= reads + int'(read);
      in_xfer <= 0;
    end
  end
endmodule
