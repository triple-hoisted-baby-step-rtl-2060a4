// tb_pe: drives one PE through all eight modes with the select bits of the
// configuration table and compares every output with the mode's formula,
// computed with wide-integer arithmetic. The accumulate modes are checked
// over runs of consecutive cycles (one product accumulated per clock).
module tb_pe;
  import helt_pkg::*;
  import tb_ref_pkg::*;
  localparam int W = 17;
  localparam logic [W-1:0] Q = 17'd65537;

  logic clk = 0, rst_n = 0;
  pe_ctrl_t ctrl;
  logic acc_en, acc_clr;
  logic [W-1:0] q, a0, a1, tf, out0, out1;
  logic [W:0] mu;
  int checks = 0, failures = 0;
  u128 half;

  pe #(.W(W)) dut (.clk, .rst_n, .ctrl, .acc_en, .acc_clr, .q, .mu, .a0, .a1, .tf, .out0, .out1);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input logic [W-1:0] got, input u128 exp);
    checks++;
    if (128'(got) != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s a0=%0d a1=%0d tf=%0d got=%0d exp=%0d", what, a0, a1, tf, got, exp);
    end
  endtask

  function automatic logic [W-1:0] rnd();
    return W'($urandom % 32'(Q));
  endfunction

  initial begin
    u128 acc;
    q = Q; mu = (W+1)'(barrett_mu(128'(Q), W));
    half = invm(2, 128'(Q));
    acc_en = 0; acc_clr = 0; a0 = 0; a1 = 0; tf = 0;
    ctrl = pe_ctrl_of(PE_NTT);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 200; k++) begin
      @(negedge clk);
      a0 = rnd(); a1 = rnd(); tf = rnd();
      if (k < 4) begin a0 = Q - 1; a1 = Q - 1; tf = Q - 1; end
      ctrl = pe_ctrl_of(PE_NTT); #1;
      chk("NTT0", out0, addm(a0, mulm(a1, tf, Q), Q));
      chk("NTT1", out1, subm(a0, mulm(a1, tf, Q), Q));
      ctrl = pe_ctrl_of(PE_INTT); #1;
      chk("INTT0", out0, mulm(addm(a0, a1, Q), half, Q));
      chk("INTT1", out1, mulm(mulm(subm(a0, a1, Q), half, Q), tf, Q));
      ctrl = pe_ctrl_of(PE_CWPM); #1;
      chk("CWPM", out0, mulm(a0, a1, Q));
      ctrl = pe_ctrl_of(PE_CWPA); #1;
      chk("CWPA", out0, addm(a0, a1, Q));
      ctrl = pe_ctrl_of(PE_CM); #1;
      chk("CM", out0, mulm(tf, a0, Q));
      ctrl = pe_ctrl_of(PE_CWPA_CM); #1;
      chk("CWPA_CM", out0, mulm(tf, subm(a0, a1, Q), Q));
    end
    // accumulate modes: runs of 1..8 terms
    for (int run = 0; run < 40; run++) begin
      pe_mode_e m;
      int len;
      m = run[0] ? PE_CWPM_ACC : PE_CM_ACC;
      len = 1 + (run % 8);
      acc = 0;
      for (int k = 0; k < len; k++) begin
        @(negedge clk);
        ctrl = pe_ctrl_of(m);
        a0 = rnd(); a1 = rnd(); tf = rnd();
        acc_en = 1; acc_clr = (k == 0);
        acc = addm(acc, (m == PE_CM_ACC) ? mulm(tf, a0, Q) : mulm(a0, a1, Q), Q);
        #1;
        chk(m == PE_CM_ACC ? "CM_ACC" : "CWPM_ACC", out0, acc);
      end
      @(negedge clk);
      acc_en = 0; acc_clr = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
