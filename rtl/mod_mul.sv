// mod_mul: combinational modular multiplier, y = a * b mod q, by Barrett
// reduction. The full 2W-bit product x is multiplied by the precomputed
// mu = floor(2^(2W) / q); the top bits of that give a quotient estimate at
// most two below the true one, so r = x - qhat*q < 3q and at most two
// subtractions of q finish the reduction.
//
// Requirements: 2^(W-1) < q < 2^W (mu then fits in W+1 bits) and a, b < q.
// The design refers to published modular multipliers without fixing one;
// Barrett with a host-supplied mu is this implementation's choice. The
// register file stores mu next to each modulus. No pipeline registers: the
// multiplier is one combinational stage.
module mod_mul #(
  parameter int unsigned W = 54
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] q,
  input  logic [W:0]   mu,
  output logic [W-1:0] y
);
  logic [2*W-1:0]   x;
  logic [3*W:0]     xm;
  logic [W:0]       qhat;
  logic [2*W+1:0]   qq;
  logic [W+1:0]     r, r1, r2;
  always_comb begin
    x    = a * b;
    xm   = x * mu;
    qhat = xm[3*W:2*W];
    qq   = qhat * q;
    r    = x[W+1:0] - qq[W+1:0];          // true remainder < 3q < 2^(W+2)
    r1   = r - {2'b00, q};
    r2   = r - {1'b0, q, 1'b0};
    if (r >= {1'b0, q, 1'b0})   y = r2[W-1:0];
    else if (r >= {2'b00, q})   y = r1[W-1:0];
    else                        y = r[W-1:0];
  end
endmodule
