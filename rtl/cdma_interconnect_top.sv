// cdma_interconnect_top: one processor-to-slave link of the CDMA interconnect.
//
// A master_wrapper takes the processor's Avalon-MM requests on the s0 ports and
// drives the coded bus; a slave_wrapper receives the coded bus and replays the
// requests on the m1 ports toward the slave IP core. Between them the address,
// read, write and waitrequest lines are plain, while the two data directions
// carry CDMA chip sums: BUS_W = (DATA_W/CHIPS)*(clog2(CHIPS)+1) lines each, 16
// instead of 32 for the paper's 32-bit, 8-chip configuration (Table 1 of the
// paper gives the same count for other code lengths and widths).
//
// The processor and the slave IP are outside this module: their signals are
// the ports. The coded bus is also brought out (bus_*, except the address,
// which equals avs_s0_address) so that it can be observed; it is driven only
// from inside.
//
// Timing with a slave IP that never waits, counting the cycle in which the
// processor raises its request as the first: a write completes at the
// processor in 18 cycles (8 spread, 8 beats, 2 of handshaking) and is written
// on m1 in cycle 27, after despreading; a read from an idle link completes in
// 29 cycles (m1 read, 8 spread, 8 beats, 8 despread, handshaking). Wait states
// on m1 add to both. Reset is synchronous and active low.
module cdma_interconnect_top
  import cdma_pkg::*;
#(
  parameter int unsigned ADDR_W   = 32,
  parameter int unsigned DATA_W   = 32,
  parameter int unsigned CHIPS    = 8,
  parameter code_src_e   CODE_SRC = CODE_WALSH,
  localparam int unsigned NB      = DATA_W / CHIPS,
  localparam int unsigned SUM_W   = $clog2(CHIPS) + 1,
  localparam int unsigned BUS_W   = NB * SUM_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // processor side (Avalon-MM slave of the master wrapper)
  input  logic              avs_s0_read,
  input  logic              avs_s0_write,
  input  logic [ADDR_W-1:0] avs_s0_address,
  input  logic [DATA_W-1:0] avs_s0_writedata,
  output logic [DATA_W-1:0] avs_s0_readdata,
  output logic              avs_s0_waitrequest,
  // slave IP side (Avalon-MM master of the slave wrapper)
  output logic              avm_m1_read,
  output logic              avm_m1_write,
  output logic [ADDR_W-1:0] avm_m1_address,
  output logic [DATA_W-1:0] avm_m1_writedata,
  input  logic [DATA_W-1:0] avm_m1_readdata,
  input  logic              avm_m1_waitrequest,
  // the coded bus, for observation
  output logic              bus_read,
  output logic              bus_write,
  output logic [BUS_W-1:0]  bus_writedata,
  output logic [BUS_W-1:0]  bus_readdata,
  output logic              bus_waitrequest
);

  logic [ADDR_W-1:0] bus_address;   // the processor's address, passed uncoded

  master_wrapper #(
    .ADDR_W(ADDR_W), .DATA_W(DATA_W), .CHIPS(CHIPS), .CODE_SRC(CODE_SRC)
  ) u_master_wrapper (
    .clk                (clk),
    .rst_n              (rst_n),
    .avs_s0_read        (avs_s0_read),
    .avs_s0_write       (avs_s0_write),
    .avs_s0_address     (avs_s0_address),
    .avs_s0_writedata   (avs_s0_writedata),
    .avs_s0_readdata    (avs_s0_readdata),
    .avs_s0_waitrequest (avs_s0_waitrequest),
    .avm_m0_read        (bus_read),
    .avm_m0_write       (bus_write),
    .avm_m0_address     (bus_address),
    .avm_m0_writedata   (bus_writedata),
    .avm_m0_readdata    (bus_readdata),
    .avm_m0_waitrequest (bus_waitrequest)
  );

  slave_wrapper #(
    .ADDR_W(ADDR_W), .DATA_W(DATA_W), .CHIPS(CHIPS), .CODE_SRC(CODE_SRC)
  ) u_slave_wrapper (
    .clk                (clk),
    .rst_n              (rst_n),
    .avs_s1_read        (bus_read),
    .avs_s1_write       (bus_write),
    .avs_s1_address     (bus_address),
    .avs_s1_writedata   (bus_writedata),
    .avs_s1_readdata    (bus_readdata),
    .avs_s1_waitrequest (bus_waitrequest),
    .avm_m1_read        (avm_m1_read),
    .avm_m1_write       (avm_m1_write),
    .avm_m1_address     (avm_m1_address),
    .avm_m1_writedata   (avm_m1_writedata),
    .avm_m1_readdata    (avm_m1_readdata),
    .avm_m1_waitrequest (avm_m1_waitrequest)
  );

  // Every chip sum on the bus lies in 0..CHIPS.
  for (genvar b = 0; b < NB; b++) begin : g_chk
    a_wr_range: assert property (@(posedge clk) disable iff (!rst_n)
      bus_write |-> bus_writedata[b*SUM_W +: SUM_W] <= SUM_W'(CHIPS));
    a_rd_range: assert property (@(posedge clk) disable iff (!rst_n)
      bus_read && !bus_waitrequest |-> bus_readdata[b*SUM_W +: SUM_W] <= SUM_W'(CHIPS));
  end

endmodule
