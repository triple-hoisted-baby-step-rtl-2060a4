// pe: one processing element of the HE linear-transform accelerator.
//
// Datapath: two modular adders (upper: sum, lower: difference), two x1/2
// units, one modular multiplier and an accumulator register D, steered by
// the nine select bits s0..s8 (helt_pkg::pe_ctrl_t). With the select values
// of the PE configuration table the element computes, for inputs a0, a1 and
// a twiddle factor or constant tf/c:
//   NTT       out0 = a0 + a1*tf        out1 = a0 - a1*tf
//   INTT      out0 = (a0 + a1)/2       out1 = ((a0 - a1)/2)*tf
//   CWPM      out0 = a0*a1             CWPA  out0 = a0 + a1
//   CM        out0 = c*a0              CWPA-CM out0 = c*(a0 - a1)
//   CM-ACC    out0 = D + c*a0          CWPM-ACC out0 = D + a0*a1
// In the accumulate modes D takes the upper-adder result every cycle that
// acc_en is high, so one product is accumulated per clock.
//
// The mode list, the formulas, the element set (two adders, two halvers, a
// multiplier, D) and the select-bit table follow the design. Which multiplexer
// input each select value picks was worked out here so that every row of the
// table yields its documented formula. Own choices: acc_clr makes the upper
// adder see 0 instead of D for the first term of a sum; everything is
// combinational except D, so results are valid in the cycle the operands are.
// The multiplier operand taps the difference a0 - a1 through a separate
// subtractor rather than the lower adder output, so that the multiplier ->
// lower adder -> multiplier path (never active in the same mode) is not a
// structural combinational loop.
module pe
  import helt_pkg::*;
#(
  parameter int unsigned W = W_DEF
) (
  input  logic          clk,
  input  logic          rst_n,
  input  pe_ctrl_t      ctrl,
  input  logic          acc_en,    // load D with the upper-adder result
  input  logic          acc_clr,   // upper adder uses 0 in place of D
  input  logic [W-1:0]  q,
  input  logic [W:0]    mu,
  input  logic [W-1:0]  a0,
  input  logic [W-1:0]  a1,
  input  logic [W-1:0]  tf,        // twiddle factor or constant
  output logic [W-1:0]  out0,
  output logic [W-1:0]  out1
);
  logic [W-1:0] acc_q;
  logic [W-1:0] diff, diff_h;          // a0 - a1 and its half (multiplier taps)
  logic [W-1:0] mx, my, prod;
  logic [W-1:0] up_a, up_b, up_s, up_h;
  logic [W-1:0] lo_b, lo_s;

  mod_add  #(.W(W)) u_diff  (.a(a0), .b(a1), .q(q), .sub(1'b1), .y(diff));
  mod_half #(.W(W)) u_dhalf (.a(diff), .q(q), .y(diff_h));

  always_comb begin
    unique case (ctrl.s34)
      2'b00:   mx = a1;
      2'b01:   mx = diff_h;
      2'b10:   mx = a0;
      default: mx = diff;
    endcase
    my = ctrl.s5 ? a1 : tf;
  end

  mod_mul #(.W(W)) u_mul (.a(mx), .b(my), .q(q), .mu(mu), .y(prod));

  always_comb begin
    up_a = ctrl.s1 ? a0 : (acc_clr ? '0 : acc_q);
    up_b = ctrl.s2 ? a1 : prod;
    lo_b = ctrl.s0 ? prod : a1;
  end

  mod_add  #(.W(W)) u_up    (.a(up_a), .b(up_b), .q(q), .sub(1'b0), .y(up_s));
  mod_half #(.W(W)) u_uhalf (.a(up_s), .q(q), .y(up_h));
  mod_add  #(.W(W)) u_lo    (.a(a0),   .b(lo_b), .q(q), .sub(1'b1), .y(lo_s));

  always_comb begin
    unique case (ctrl.s78)
      2'b00:   out0 = up_s;
      2'b01:   out0 = prod;
      default: out0 = up_h;
    endcase
    out1 = ctrl.s6 ? lo_s : prod;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      acc_q <= '0;
    else if (acc_en) acc_q <= up_s;
  end
endmodule
