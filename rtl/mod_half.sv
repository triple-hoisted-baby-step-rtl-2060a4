// mod_half: combinational modular halving, y = a * 2^-1 mod q for odd q.
// An even a is shifted right; an odd a has q added first (a + q is even
// and below 2q, so the shifted value is below q). This is the "x 1/2" unit
// of the PE; its insides are this implementation's choice.
module mod_half #(
  parameter int unsigned W = 54
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] q,
  output logic [W-1:0] y
);
  logic [W:0] s;
  always_comb begin
    s = a[0] ? ({1'b0, a} + {1'b0, q}) : {1'b0, a};
    y = s[W:1];
  end
endmodule
