// mem_block: one memory block of the scratchpad, DEPTH words of W bits.
//
// One write port and two read ports, all synchronous; reads are registered
// (data appear the clock after the address) and return the old word when
// the same address is written in the same cycle (read-before-write), which
// the in-place automorphism relies on. In the FPGA design a block is built
// from three 18-bit BRAMs (2K x 54) or from three 72-bit URAMs shared by
// four blocks (4K deep); here it is a plain array that a synthesis tool
// maps onto whatever RAM it has. Depth 4096 follows the URAM-based block (the scratchpad stacks four);
// the second read port is this implementation's choice (coefficient-wise
// operations read two operands per cycle).
module mem_block #(
  parameter int unsigned W     = 54,
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re_a,
  input  logic [AW-1:0] raddr_a,
  output logic [W-1:0]  rdata_a,
  input  logic          re_b,
  input  logic [AW-1:0] raddr_b,
  output logic [W-1:0]  rdata_b
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re_a) rdata_a <= mem[raddr_a];
    if (re_b) rdata_b <= mem[raddr_b];
    if (we)   mem[waddr] <= wdata;
  end
endmodule
