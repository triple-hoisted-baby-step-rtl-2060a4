// pe_array: d_p processing elements working in lock step.
//
// All PEs share the select bits, the accumulator controls and the modulus
// (every lane works on the same RNS limb); each lane has its own a0, a1 and
// twiddle/constant input. A broadcast constant is formed by the caller by
// driving the same value on every tf lane. The array size d_p = 256 is the
// value used for the largest parameter set; the structure (one PE per
// coefficient processed in parallel) follows the design, the shared-modulus
// wiring is this implementation's choice. Combinational apart from the
// per-PE accumulator registers.
module pe_array
  import helt_pkg::*;
#(
  parameter int unsigned W  = W_DEF,
  parameter int unsigned DP = 256
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  pe_ctrl_t               ctrl,
  input  logic                   acc_en,
  input  logic                   acc_clr,
  input  logic [W-1:0]           q,
  input  logic [W:0]             mu,
  input  logic [DP-1:0][W-1:0]   a0,
  input  logic [DP-1:0][W-1:0]   a1,
  input  logic [DP-1:0][W-1:0]   tf,
  output logic [DP-1:0][W-1:0]   out0,
  output logic [DP-1:0][W-1:0]   out1
);
  for (genvar p = 0; p < DP; p++) begin : g_pe
    pe #(.W(W)) u_pe (
      .clk, .rst_n, .ctrl, .acc_en, .acc_clr, .q, .mu,
      .a0(a0[p]), .a1(a1[p]), .tf(tf[p]), .out0(out0[p]), .out1(out1[p])
    );
  end
endmodule
