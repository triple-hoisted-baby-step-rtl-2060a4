// tb_ntt_fsm: follows the (I)NTT controller through a complete transform
// (N = 64, d_p = 8) and checks, pair by pair, the row addresses (the rows
// with bit log2(h) clear, in ascending order, and their partners h rows
// up), the butterfly distance, the twiddle row address, the read/compute/
// write sequence and the total cycle count 4*log2(N)*N/(2 d_p).
module tb_ntt_fsm;
  localparam int N = 64, DP = 8, AW = 8, TAW = 8, ROWS = 8, LGN = 6, LGD = 3;
  logic clk = 0, rst_n = 0, start = 0, inverse = 0;
  logic [AW-1:0] base, raddr_a, raddr_b, waddr;
  logic [TAW-1:0] tw_base, tw_addr;
  logic busy, done, inv_q, re, hold_we, we, wsel;
  logic [2:0] lgt;
  int checks = 0, failures = 0;

  ntt_fsm #(.N(N), .DP(DP), .AW(AW), .TAW(TAW)) dut (.*);
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
    for (int mode = 0; mode < 2; mode++) begin
      int cycles;
      @(negedge clk); start = 1; inverse = mode[0]; base = 8'd40; tw_base = 8'd100;
      @(negedge clk); start = 0;
      cycles = 0;
      for (int s = 0; s < LGN; s++) begin
        int lt, h, p;
        lt = mode ? s : LGN - 1 - s;
        h = (lt >= LGD) ? (1 << (lt - LGD)) : 1;
        p = 0;
        for (int r = 0; r < ROWS; r++) begin
          if ((r & h) != 0) continue;
          // RD
          chk(re && !we && raddr_a == 8'(40 + r) && raddr_b == 8'(40 + r + h), "rd rows");
          chk(int'(lgt) == lt, "lgt");
          chk(tw_addr == 8'(100 + s * ROWS / 2 + p), "tw addr");
          @(negedge clk); cycles++;
          chk(hold_we && !we, "ex");
          @(negedge clk); cycles++;
          chk(we && !wsel && waddr == 8'(40 + r), "wr0");
          @(negedge clk); cycles++;
          chk(we && wsel && waddr == 8'(40 + r + h), "wr1");
          @(negedge clk); cycles++;
          p++;
        end
      end
      chk(done && !busy, "done after 4*log2N*ROWS/2 cycles");
      chk(cycles == 4 * LGN * ROWS / 2, "cycle count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
