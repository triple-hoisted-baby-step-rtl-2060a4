// ntt_router: lane routing between two memory rows and the PE array for one
// (I)NTT butterfly stage with pair distance t = 2^lgt.
//
// Coefficients are stored row-major, d_p per row. When t >= d_p the two
// partners of every butterfly are in the same block of two different rows,
// so rows A and B feed a0 and a1 lane by lane. When t < d_p both partners are
// in one row; the controller then reads two adjacent rows, and butterfly b
// takes positions base and base+t of the 2*d_p concatenated coefficients,
// base = (b div t)*2t + (b mod t). The scatter side applies the inverse
// mapping to the PE outputs. This replaces a permutation network for the
// (I)NTT by fixed address-pattern wiring, as the design proposes; the exact
// multiplexing is this implementation's. Purely combinational.
//
// Lint may flag the all-zero fill of the d_p-word row vectors as a suspiciously
// long replication; the fill is intended (defaults before the loops assign).
module ntt_router #(
  parameter int unsigned W  = 54,
  parameter int unsigned DP = 256,
  parameter int unsigned LGN = 16,
  localparam int unsigned LGD = $clog2(DP),
  localparam int unsigned LGT = $clog2(LGN)
) (
  input  logic [LGT-1:0]        lgt,
  input  logic [DP-1:0][W-1:0]  row_a,
  input  logic [DP-1:0][W-1:0]  row_b,
  output logic [DP-1:0][W-1:0]  a0,
  output logic [DP-1:0][W-1:0]  a1,
  input  logic [DP-1:0][W-1:0]  out0,
  input  logic [DP-1:0][W-1:0]  out1,
  output logic [DP-1:0][W-1:0]  wrow_a,
  output logic [DP-1:0][W-1:0]  wrow_b
);
  logic [2*DP-1:0][W-1:0] v, wv;

  function automatic int unsigned base_of(input int unsigned b, input int unsigned lt);
    return ((b >> lt) << (lt + 1)) | (b & ((1 << lt) - 1));
  endfunction

  // gather: memory rows -> butterfly operands
  always_comb begin
    v = {row_b, row_a};
    if (32'(lgt) >= LGD) begin
      a0 = row_a;
      a1 = row_b;
    end else begin
      for (int b = 0; b < DP; b++) begin
        a0[b] = v[base_of(b, 32'(lgt))];
        a1[b] = v[base_of(b, 32'(lgt)) + (1 << lgt)];
      end
    end
  end

  // scatter: butterfly results -> memory rows
  always_comb begin
    wv = '0;
    if (32'(lgt) >= LGD) begin
      wrow_a = out0;
      wrow_b = out1;
    end else begin
      for (int b = 0; b < DP; b++) begin
        wv[base_of(b, 32'(lgt))]              = out0[b];
        wv[base_of(b, 32'(lgt)) + (1 << lgt)] = out1[b];
      end
      wrow_a = wv[DP-1:0];
      wrow_b = wv[2*DP-1:DP];
    end
  end
endmodule
