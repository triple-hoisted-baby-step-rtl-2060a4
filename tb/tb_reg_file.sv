// tb_reg_file: writes moduli, Barrett constants and constants, reads them
// back by index, and checks the PE result holding rows.
module tb_reg_file;
  localparam int W = 20, DP = 4, NMOD = 8, NCONST = 16;
  logic clk = 0, rst_n = 0;
  logic mod_we = 0, const_we = 0, hold_we = 0;
  logic [2:0] mod_waddr, mod_idx;
  logic [W-1:0] mod_wq, q, const_wdata, cval;
  logic [W:0] mod_wmu, mu;
  logic [3:0] const_waddr, const_idx;
  logic [DP-1:0][W-1:0] hold0_d, hold1_d, hold0, hold1;
  logic [W-1:0] mq [NMOD];
  logic [W:0] mm [NMOD];
  logic [W-1:0] cc [NCONST];
  int checks = 0, failures = 0;

  reg_file #(.W(W), .DP(DP), .NMOD(NMOD), .NCONST(NCONST)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mod_idx = 0; const_idx = 0; hold0_d = '0; hold1_d = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < NMOD; k++) begin
      @(negedge clk); mod_we = 1; mod_waddr = 3'(k);
      mod_wq = W'($urandom); mod_wmu = (W+1)'($urandom);
      mq[k] = mod_wq; mm[k] = mod_wmu;
    end
    for (int k = 0; k < NCONST; k++) begin
      @(negedge clk); mod_we = 0; const_we = 1; const_waddr = 4'(k);
      const_wdata = W'($urandom); cc[k] = const_wdata;
    end
    @(negedge clk); const_we = 0;
    for (int k = 0; k < 40; k++) begin
      mod_idx = 3'($urandom); const_idx = 4'($urandom);
      #1;
      checks += 3;
      if (q != mq[mod_idx]) failures++;
      if (mu != mm[mod_idx]) failures++;
      if (cval != cc[const_idx]) failures++;
    end
    for (int k = 0; k < 10; k++) begin
      logic [DP-1:0][W-1:0] e0, e1;
      @(negedge clk);
      for (int j = 0; j < DP; j++) begin hold0_d[j] = W'($urandom); hold1_d[j] = W'($urandom); end
      e0 = hold0_d; e1 = hold1_d; hold_we = 1;
      @(negedge clk); hold_we = 0; hold0_d = '0; hold1_d = '0;
      @(negedge clk);
      checks += 2;
      if (hold0 != e0) failures++;
      if (hold1 != e1) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
