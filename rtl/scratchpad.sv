// scratchpad: d_p memory blocks that share their addresses, so that one
// access moves a whole row of d_p coefficients of a polynomial limb.
//
// Coefficient k of a limb stored in slot s sits in block (k mod d_p), row
// s*ROWS + k/d_p, with ROWS = N/d_p (row-major order; NTT-domain limbs are
// kept in bit-reversed order, as the NTT produces them). Row-wide ports:
// one write and two registered reads (see mem_block). Sharing the address
// among all blocks that are accessed alike follows the design; a single
// address space for all limbs with two read ports is this implementation's
// simplification of the design's several memory groups.
module scratchpad #(
  parameter int unsigned W     = 54,
  parameter int unsigned DP    = 256,
  parameter int unsigned DEPTH = 16384,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  we,
  input  logic [AW-1:0]         waddr,
  input  logic [DP-1:0][W-1:0]  wdata,
  input  logic                  re_a,
  input  logic [AW-1:0]         raddr_a,
  output logic [DP-1:0][W-1:0]  rdata_a,
  input  logic                  re_b,
  input  logic [AW-1:0]         raddr_b,
  output logic [DP-1:0][W-1:0]  rdata_b
);
  for (genvar j = 0; j < DP; j++) begin : g_blk
    mem_block #(.W(W), .DEPTH(DEPTH)) u_blk (
      .clk, .we, .waddr, .wdata(wdata[j]),
      .re_a, .raddr_a, .rdata_a(rdata_a[j]),
      .re_b, .raddr_b, .rdata_b(rdata_b[j])
    );
  end
endmodule
