// tb_scratchpad: writes random rows to a small scratchpad, reads them back
// on both ports against a model, and checks read-before-write on a
// simultaneous read and write of the same row.
module tb_scratchpad;
  localparam int W = 10, DP = 4, DEPTH = 16;
  logic clk = 0, we = 0, re_a = 0, re_b = 0;
  logic [3:0] waddr, raddr_a, raddr_b;
  logic [DP-1:0][W-1:0] wdata, rdata_a, rdata_b;
  logic [DP-1:0][W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  scratchpad #(.W(W), .DP(DP), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = 4'(a);
      for (int j = 0; j < DP; j++) wdata[j] = W'($urandom);
      model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 100; k++) begin
      logic [3:0] x, y;
      x = 4'($urandom); y = 4'($urandom);
      @(negedge clk); re_a = 1; re_b = 1; raddr_a = x; raddr_b = y;
      we = k[0]; waddr = x;
      for (int j = 0; j < DP; j++) wdata[j] = W'($urandom);
      @(negedge clk); re_a = 0; re_b = 0; we = 0;
      checks += 2;
      if (rdata_a != model[x]) failures++;    // old contents despite the write
      if (rdata_b != ((y == x && k[0]) ? model[y] : model[y])) failures++;
      if (k[0]) model[x] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
