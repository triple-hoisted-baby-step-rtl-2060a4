// tb_auto_unit: runs the in-place automorphism on a 64-coefficient limb held
// in an 8-lane row memory modelled here (registered, read-before-write) and
// compares the result with the index map l -> ((g(2l+1) mod 2N) - 1)/2
// applied to the bit-reversed storage. Also checks the cycle count: one row
// per clock plus one cycle per chain restart.
module tb_auto_unit;
  import tb_ref_pkg::*;
  localparam int W = 16, DP = 8, N = 64, ROWS = N / DP, LGR = 3, LGD = 3, LGN = 6;
  logic clk = 0, rst_n = 0, start = 0, busy, done, rd_en, wr_en;
  logic [31:0] galois;
  logic [LGR-1:0] rd_row, wr_row;
  logic [DP-1:0][W-1:0] rd_data, wr_data;
  logic [DP-1:0][W-1:0] mem [ROWS];
  int checks = 0, failures = 0;

  auto_unit #(.W(W), .DP(DP), .N(N)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_row];
    if (wr_en) mem[wr_row] <= wr_data;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] coef [N];
    logic [W-1:0] expc [N];
    int cycles, g, restarts;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      g = int'(powm(5, r, 2 * N));
      if (r >= 16) g = 2 * N - int'(powm(5, r, 2 * N));   // conjugation-type elements
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < DP; j++) begin
          mem[i][j] = W'($urandom);
          coef[brev(i * DP + j, LGN)] = mem[i][j];
        end
      for (int l = 0; l < N; l++) expc[((g * (2 * l + 1)) % (2 * N) - 1) / 2] = coef[l];
      @(negedge clk); galois = g; start = 1;
      @(negedge clk); start = 0;
      cycles = 1; restarts = 0;
      while (!done) begin
        if (rd_en && wr_en && rd_row != wr_row) restarts++;
        @(negedge clk); cycles++;
      end
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < DP; j++) begin
          checks++;
          if (mem[i][j] != expc[brev(i * DP + j, LGN)]) begin
            failures++;
            if (failures < 5) $display("FAIL g=%0d row %0d lane %0d", g, i, j);
          end
        end
      checks++;
      if (cycles > ROWS + restarts + 2) begin
        failures++;
        $display("FAIL g=%0d took %0d cycles, restarts %0d", g, cycles, restarts);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
