// tb_perm_network: feeds the network with the lane permutation of random
// automorphisms (j -> bitrev((g*bitrev(j) + t) mod d_p), g odd) and checks
// that every input word arrives on its destination lane.
module tb_perm_network;
  import tb_ref_pkg::*;
  localparam int W = 12, DP = 32, LG = 5;
  logic [DP-1:0][W-1:0]  din, dout;
  logic [DP-1:0][LG-1:0] dst;
  int checks = 0, failures = 0;

  perm_network #(.W(W), .DP(DP)) dut (.check(1'b1), .din, .dst, .dout);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 200; it++) begin
      int unsigned g, t;
      g = ($urandom % 1024) * 2 + 1;
      t = $urandom % DP;
      if (it == 0) begin g = 1; t = 0; end
      for (int j = 0; j < DP; j++) begin
        din[j] = W'($urandom);
        dst[j] = LG'(brev(((g * brev(j, LG)) + t) % DP, LG));
      end
      #1;
      for (int j = 0; j < DP; j++) begin
        checks++;
        if (dout[dst[j]] != din[j]) begin
          failures++;
          if (failures < 5) $display("FAIL g=%0d t=%0d lane %0d", g, t, j);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
