// prio_enc2: two-layer priority encoder over NBITS request bits.
//
// Returns the index of the lowest set bit of req and whether any is set.
// Layer one splits req into groups of G bits and finds the lowest set bit
// of each group; layer two picks the lowest group that has one. The design
// asks for a two-layer priority encoder to find the next unprocessed memory
// row; the grouping is this implementation's choice (G defaults to 16).
// Purely combinational.
module prio_enc2 #(
  parameter int unsigned NBITS = 256,
  parameter int unsigned G     = 16,
  localparam int unsigned LGN  = (NBITS > 1) ? $clog2(NBITS) : 1,
  localparam int unsigned NG   = (NBITS + G - 1) / G,
  localparam int unsigned LGG  = (G > 1) ? $clog2(G) : 1
) (
  input  logic [NBITS-1:0] req,
  output logic             found,
  output logic [LGN-1:0]   idx
);
  logic [NG-1:0]          g_any;
  logic [NG-1:0][LGG-1:0] g_idx;

  always_comb begin
    for (int g = 0; g < NG; g++) begin
      g_any[g] = 1'b0;
      g_idx[g] = '0;
      for (int k = G - 1; k >= 0; k--) begin
        if (g * G + k < NBITS && req[g * G + k]) begin
          g_any[g] = 1'b1;
          g_idx[g] = LGG'(k);
        end
      end
    end
    found = 1'b0;
    idx   = '0;
    for (int g = NG - 1; g >= 0; g--) begin
      if (g_any[g]) begin
        found = 1'b1;
        idx   = LGN'(g * G) + LGN'(g_idx[g]);
      end
    end
  end
endmodule
