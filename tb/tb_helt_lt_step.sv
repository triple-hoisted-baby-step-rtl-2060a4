// tb_helt_lt_step: one limb of a baby-step/giant-step plaintext-matrix step
// of the linear transform, on the accelerator at its default size
// (N = 2^16, d_p = 256, 54-bit prime q = 0x3fffffffd60001).
//
// In the NTT domain, for one RNS limb a and NB plaintext diagonals f_i:
//   1. copy a into NB slots (CM with the constant 1) and rotate copy i by
//      phi_i (automorphism with galois element 5^-i mod 2N);
//   2. u = sum_i phi_i(a) * f_i  (one CWPM-ACC command, NB terms);
//   3. rotate u by the giant step phi_NB;
//   4. c = c + phi_NB(u)  (CWPA into a running sum).
// The expected values come from a software model of the same steps that
// applies the index map l -> ((g(2l+1) mod 2N) - 1)/2 on the bit-reversed
// storage directly. Every coefficient of u, phi_NB(u) and c is checked, and
// so are the cycle counts of the CWPM-ACC (one term row per clock) and of
// each automorphism (one row per clock plus chain restarts).
module tb_helt_lt_step;
  import helt_pkg::*;
  import tb_ref_pkg::*;
  localparam int W = 54, N = 65536, DP = 256, ROWS = 256, LGN = 16;
  localparam int NB = 4;                       // baby steps in this test
  localparam logic [W-1:0] Q = 54'h3fffffffd60001;
  localparam int S_A = 0, S_ROT = 1, S_DIAG = 8, S_U = 16, S_C = 20, S_OUT = 21;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, cmd_done;
  cmd_t cmd;
  logic host_we = 0, host_re = 0, tw_we = 0, mod_we = 0, const_we = 0;
  logic [13:0] host_waddr = '0, host_raddr = '0;
  logic [11:0] tw_waddr = '0;
  logic [DP-1:0][W-1:0] host_wdata = '0, host_rdata, tw_wdata = '0;
  logic [5:0] mod_waddr = '0;
  logic [W-1:0] mod_wq = '0, const_wdata = '0;
  logic [W:0] mod_wmu = '0;
  logic [7:0] const_waddr = '0;
  logic [31:0] n_cmd [4];
  logic [31:0] n_auto_chain;

  helt_accel dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] a [N], c [N], res [N], u [N], tmp [N];
  logic [W-1:0] f [NB][N];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  task automatic load_slot(input int slot, input logic [W-1:0] v [N]);
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); host_we = 1; host_waddr = 14'(slot * ROWS + r);
      for (int j = 0; j < DP; j++) host_wdata[j] = v[r * DP + j];
    end
    @(negedge clk); host_we = 0;
  endtask

  task automatic read_slot(input int slot, output logic [W-1:0] v [N]);
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); host_re = 1; host_raddr = 14'(slot * ROWS + r);
      @(negedge clk); host_re = 0;
      for (int j = 0; j < DP; j++) v[r * DP + j] = host_rdata[j];
    end
  endtask

  task automatic run(input cmd_t cc, output int cycles);
    @(negedge clk); cmd = cc; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    cycles = 1;
    while (!cmd_done) begin @(negedge clk); cycles++; end
  endtask

  function automatic cmd_t mk(op_e op, pe_mode_e mode, int sa, int sb, int sd, int nt, int ci, int g);
    cmd_t x;
    x = '0; x.op = op; x.mode = mode; x.slot_a = 8'(sa); x.slot_b = 8'(sb); x.slot_d = 8'(sd);
    x.nterms = 8'(nt); x.mod_idx = 6'd1; x.const_idx = 8'(ci); x.galois = 32'(g);
    return x;
  endfunction

  // Model of the automorphism on the stored (bit-reversed) limb.
  task automatic model_auto(input int g, input logic [W-1:0] src [N], output logic [W-1:0] dst [N]);
    for (int p = 0; p < N; p++) begin
      int l, lp;
      l = int'(brev(p, LGN));
      lp = int'(((64'(g) * 64'(2 * l + 1)) % 64'(2 * N) - 1) / 2);
      dst[brev(lp, LGN)] = src[p];
    end
  endtask

  initial begin
    int cyc, g, chains0;
    int g5inv;
    u128 acc;
    cmd = '0;
    g5inv = int'(powm(5, (N / 2) - 1, 2 * N));   // 5 has order N/2 mod 2N
    chk((64'(g5inv) * 5) % (2 * N) == 1, "inverse of 5 mod 2N");
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); mod_we = 1; mod_waddr = 6'd1; mod_wq = Q; mod_wmu = (W+1)'(barrett_mu(128'(Q), W));
    @(negedge clk); mod_we = 0; const_we = 1; const_waddr = 8'd0; const_wdata = 1;
    @(negedge clk); const_we = 0;

    for (int k = 0; k < N; k++) begin
      a[k] = W'(128'({$urandom, $urandom}) % 128'(Q));
      c[k] = W'(128'({$urandom, $urandom}) % 128'(Q));
      for (int i = 0; i < NB; i++) f[i][k] = W'(128'({$urandom, $urandom}) % 128'(Q));
    end
    load_slot(S_A, a);
    load_slot(S_C, c);
    for (int i = 0; i < NB; i++) load_slot(S_DIAG + i, f[i]);

    // baby steps: copy and rotate
    chains0 = int'(n_auto_chain);
    g = 1;
    for (int i = 0; i < NB; i++) begin
      run(mk(OP_CW, PE_CM, S_A, 0, S_ROT + i, 1, 0, 0), cyc);
      chk(cyc <= ROWS + 6, "copy latency");
      run(mk(OP_AUTO, PE_NTT, S_ROT + i, 0, 0, 1, 0, g), cyc);
      chk(cyc <= 2 * ROWS + 4, "automorphism latency");
      g = int'((64'(g) * 64'(g5inv)) % 64'(2 * N));
    end
    chk(int'(n_auto_chain) - chains0 >= NB, "automorphism chains counted");

    // u = sum_i phi_i(a) * f_i
    run(mk(OP_CW, PE_CWPM_ACC, S_ROT, S_DIAG, S_U, NB, 0, 0), cyc);
    chk(cyc <= NB * ROWS + 6, "CWPM-ACC one term row per clock");
    chk(cyc >= NB * ROWS, "CWPM-ACC covers every term row");
    for (int k = 0; k < N; k++) u[k] = 0;
    g = 1;
    for (int i = 0; i < NB; i++) begin
      model_auto(g, a, tmp);
      for (int k = 0; k < N; k++) begin
        acc = mulm(128'(tmp[k]), 128'(f[i][k]), 128'(Q));
        u[k] = W'(addm(128'(u[k]), acc, 128'(Q)));
      end
      g = int'((64'(g) * 64'(g5inv)) % 64'(2 * N));
    end
    read_slot(S_U, res);
    for (int k = 0; k < N; k++) chk(res[k] == u[k], "baby-step inner product");

    // giant step rotation and running sum
    run(mk(OP_AUTO, PE_NTT, S_U, 0, 0, 1, 0, g), cyc);
    chk(cyc <= 2 * ROWS + 4, "giant-step automorphism latency");
    model_auto(g, u, tmp);
    read_slot(S_U, res);
    for (int k = 0; k < N; k++) chk(res[k] == tmp[k], "giant-step rotation");
    run(mk(OP_CW, PE_CWPA, S_U, S_C, S_OUT, 1, 0, 0), cyc);
    read_slot(S_OUT, res);
    for (int k = 0; k < N; k++)
      chk(128'(res[k]) == addm(128'(tmp[k]), 128'(c[k]), 128'(Q)), "running sum");

    chk(n_cmd[OP_AUTO] == NB + 1, "automorphism commands counted");
    chk(n_cmd[OP_CW] == NB + 2, "coefficient-wise commands counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
