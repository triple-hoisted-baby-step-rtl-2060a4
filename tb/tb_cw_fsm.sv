// tb_cw_fsm: runs the coefficient-wise controller in a plain mode and in an
// accumulate mode with three terms over an 8-row limb, and checks the read
// addresses of both ports, the accumulator clear, the constant offset, the
// write address and timing, and the rate of one term per clock.
module tb_cw_fsm;
  import helt_pkg::*;
  localparam int N = 64, DP = 8, AW = 8, ROWS = 8;
  logic clk = 0, rst_n = 0, start = 0;
  pe_mode_e mode;
  logic [AW-1:0] base_a, base_b, base_d, raddr_a, raddr_b, waddr;
  logic [7:0] nterms, const_off;
  logic busy, done, re, pe_valid, acc_clr, we;
  int checks = 0, failures = 0;

  cw_fsm #(.N(N), .DP(DP), .AW(AW)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 2; t++) begin
      int K, cycles, writes;
      int pr, pk;
      bit pv;
      mode = t ? PE_CWPM_ACC : PE_CWPM;
      K = t ? 3 : 1;
      @(negedge clk); start = 1; base_a = 8'd16; base_b = 8'd64; base_d = 8'd120; nterms = 8'd3;
      @(negedge clk); start = 0;
      cycles = 0; writes = 0; pv = 0; pr = 0; pk = 0;
      for (int r = 0; r < ROWS; r++)
        for (int k = 0; k < K; k++) begin
          chk(re && raddr_a == 8'(16 + k * ROWS + r) && raddr_b == 8'(64 + k * ROWS + r), "read addr");
          chk(pe_valid == pv, "pe_valid");
          if (pv) begin
            chk(acc_clr == (pk == 0) && int'(const_off) == pk, "acc ctl");
            chk(we == (pk == K - 1), "we");
            if (we) begin chk(waddr == 8'(120 + pr), "waddr"); writes++; end
          end
          pv = 1; pr = r; pk = k;
          @(negedge clk); cycles++;
        end
      chk(pe_valid && we && waddr == 8'(120 + ROWS - 1), "last write");
      writes++;
      @(negedge clk); cycles++;
      chk(done, "done");
      chk(cycles == K * ROWS + 1, "one term per clock");
      chk(writes == ROWS, "writes");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
