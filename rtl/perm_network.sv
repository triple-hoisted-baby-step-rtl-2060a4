// perm_network: d_p-input switching network of the automorphism unit.
//
// Moves the word on input lane j to output lane dst[j] (j' in the design's
// notation). It has log2(d_p) stages of d_p two-way multiplexers, i.e. d_p
// log2(d_p) multiplexers, the count the design gives for its single
// network. Internally the lanes are renumbered in bit-reversed order
// (b = bitrev(j)); stage s then exchanges the two words of each pair whose
// positions differ only in bit s, and a pair is crossed when the word in
// the lower position is addressed to a position with bit s set
// (destination-tag self-routing, so the switch settings come straight from
// j' and need no separate routing table).
//
// The automorphism permutation in bit-reversed lane order is
// b -> (g_r * b + t) mod d_p with g_r odd; bit s of the result depends only on
// bit s and lower bits of b, which is exactly the class of permutations this
// network passes without conflicts. An assertion flags any other
// permutation while check is high. The design names a Benes network controlled by j'; using its
// self-routing half is this implementation's choice. Purely combinational.
//
// Lint may flag the all-zero fill of the d_p-word row vectors as a suspiciously
// long replication; the fill is intended (defaults before the loops assign).
module perm_network #(
  parameter int unsigned W  = 54,
  parameter int unsigned DP = 256,
  localparam int unsigned LG = $clog2(DP)
) (
  input  logic                  check,  // dst is a live permutation: assert routability
  input  logic [DP-1:0][W-1:0]  din,
  input  logic [DP-1:0][LG-1:0] dst,   // output lane of each input lane
  output logic [DP-1:0][W-1:0]  dout
);
  function automatic logic [LG-1:0] brev(input logic [LG-1:0] x);
    for (int k = 0; k < LG; k++) brev[k] = x[LG-1-k];
  endfunction

  logic [DP-1:0][W-1:0]  d;
  logic [DP-1:0][LG-1:0] tag;
  logic                  xsw;

  always_comb begin
    xsw  = 1'b0;
    dout = '0;
    for (int p = 0; p < DP; p++) begin
      d[brev(LG'(p))]   = din[p];
      tag[brev(LG'(p))] = brev(dst[p]);
    end
    for (int s = 0; s < LG; s++) begin
      for (int p = 0; p < DP; p++) begin
        if (((p >> s) & 1) == 0) begin
          // Both words of a pair must leave the stage on different sides.
          assert (!check || tag[p][s] != tag[p + (1 << s)][s])
            else $error("perm_network: permutation not routable at stage %0d", s);
          xsw = tag[p][s];
          if (xsw) begin
            {d[p], d[p + (1 << s)]}     = {d[p + (1 << s)], d[p]};
            {tag[p], tag[p + (1 << s)]} = {tag[p + (1 << s)], tag[p]};
          end
        end
      end
    end
    for (int p = 0; p < DP; p++) dout[brev(LG'(p))] = d[p];
  end
endmodule
