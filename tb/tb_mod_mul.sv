// tb_mod_mul: checks the Barrett multiplier at the full 54-bit width
// against a wide-integer reference, with random and extreme operands.
module tb_mod_mul;
  import tb_ref_pkg::*;
  localparam int W = 54;
  logic [W-1:0] a, b, q, y;
  logic [W:0]   mu;
  int checks = 0, failures = 0;

  mod_mul #(.W(W)) dut (.a, .b, .q, .mu, .y);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [W-1:0] qq, input logic [W-1:0] aa, input logic [W-1:0] bb);
    u128 e;
    q = qq; mu = (W+1)'(barrett_mu(128'(qq), W)); a = aa; b = bb;
    #1;
    e = mulm(128'(aa), 128'(bb), 128'(qq));
    checks++;
    if (128'(y) != e) begin
      failures++;
      if (failures < 10) $display("FAIL q=%h a=%h b=%h y=%h exp=%h", qq, aa, bb, y, e);
    end
  endtask

  initial begin
    logic [W-1:0] qs [3];
    qs[0] = 54'h3fffffffd60001;     // NTT-friendly prime used by the full-size test
    qs[1] = 54'h20000000000001 + 54'd2;   // just above 2^53
    qs[2] = 54'h3fffffffffffff;
    foreach (qs[i]) begin
      check(qs[i], qs[i] - 1, qs[i] - 1);
      check(qs[i], 0, qs[i] - 1);
      check(qs[i], 1, qs[i] - 1);
      for (int k = 0; k < 20000; k++)
        check(qs[i], W'({$urandom, $urandom} % 64'(qs[i])), W'({$urandom, $urandom} % 64'(qs[i])));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
