// tb_pe_array: four-lane PE array; checks that every lane computes its own
// butterfly from its own operands and twiddle, and that the accumulators of
// all lanes run in parallel.
module tb_pe_array;
  import helt_pkg::*;
  import tb_ref_pkg::*;
  localparam int W = 17, DP = 4;
  localparam logic [W-1:0] Q = 17'd65537;
  logic clk = 0, rst_n = 0;
  pe_ctrl_t ctrl;
  logic acc_en, acc_clr;
  logic [W-1:0] q;
  logic [W:0] mu;
  logic [DP-1:0][W-1:0] a0, a1, tf, out0, out1;
  int checks = 0, failures = 0;

  pe_array #(.W(W), .DP(DP)) dut (.clk, .rst_n, .ctrl, .acc_en, .acc_clr, .q, .mu, .a0, .a1, .tf, .out0, .out1);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    u128 acc [DP];
    q = Q; mu = (W+1)'(barrett_mu(128'(Q), W));
    acc_en = 0; acc_clr = 0; ctrl = pe_ctrl_of(PE_NTT);
    a0 = '0; a1 = '0; tf = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 50; k++) begin
      @(negedge clk);
      for (int p = 0; p < DP; p++) begin
        a0[p] = W'($urandom % 65537); a1[p] = W'($urandom % 65537); tf[p] = W'($urandom % 65537);
      end
      ctrl = pe_ctrl_of(PE_NTT); #1;
      for (int p = 0; p < DP; p++) begin
        checks += 2;
        if (128'(out0[p]) != addm(a0[p], mulm(a1[p], tf[p], Q), Q)) failures++;
        if (128'(out1[p]) != subm(a0[p], mulm(a1[p], tf[p], Q), Q)) failures++;
      end
    end
    for (int k = 0; k < 6; k++) begin
      @(negedge clk);
      ctrl = pe_ctrl_of(PE_CWPM_ACC); acc_en = 1; acc_clr = (k == 0);
      for (int p = 0; p < DP; p++) begin
        a0[p] = W'($urandom % 65537); a1[p] = W'($urandom % 65537);
        acc[p] = (k == 0 ? 0 : acc[p]);
        acc[p] = addm(acc[p], mulm(a0[p], a1[p], Q), Q);
      end
      #1;
      for (int p = 0; p < DP; p++) begin
        checks++;
        if (128'(out0[p]) != acc[p]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
