// tb_helt_accel: end-to-end test of the accelerator at a reduced size
// (N = 64, d_p = 8, 17-bit words, q = 65537, psi = 3^((q-1)/2N)).
//
// Loads two random limbs and the twiddle tables through the host ports and
// runs: forward NTT (checked against direct evaluation a(psi^(2 bitrev(k)+1))
// at every stored position), a coefficient-wise product followed by an
// inverse NTT (checked against the negacyclic convolution computed in the
// testbench), automorphisms followed by an inverse NTT (checked against
// b(x^(g^-1 mod 2N)), since the unit moves row i to row i'), and every
// coefficient-wise mode including both accumulate modes with two terms.
// It counts how often each mechanism ran (each operation, each PE mode,
// in-row and cross-row butterfly stages, chain restarts of the
// automorphism, accumulation over several terms) and fails any that never
// happened. Command latencies are checked against the controller formulas.
module tb_helt_accel;
  import helt_pkg::*;
  import tb_ref_pkg::*;
  localparam int W = 17, N = 64, DP = 8, DEPTH = 64, TW_DEPTH = 64, NMOD = 4, NCONST = 16;
  localparam int ROWS = N / DP, LGN = 6, LGD = 3, AW = 6, TAW = 6;
  localparam logic [W-1:0] Q = 17'd65537;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, cmd_done;
  cmd_t cmd;
  logic host_we = 0, host_re = 0, tw_we = 0, mod_we = 0, const_we = 0;
  logic [AW-1:0] host_waddr = '0, host_raddr = '0;
  logic [TAW-1:0] tw_waddr = '0;
  logic [DP-1:0][W-1:0] host_wdata = '0, host_rdata, tw_wdata = '0;
  logic [1:0] mod_waddr = '0;
  logic [W-1:0] mod_wq = '0, const_wdata = '0;
  logic [W:0] mod_wmu = '0;
  logic [3:0] const_waddr = '0;
  logic [31:0] n_cmd [4];
  logic [31:0] n_auto_chain;

  helt_accel #(.W(W), .N(N), .DP(DP), .DEPTH(DEPTH), .TW_DEPTH(TW_DEPTH),
               .NMOD(NMOD), .NCONST(NCONST)) dut (.*);

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_mode [8];
  int n_inrow = 0, n_xrow = 0, n_acc_multi = 0;
  always @(posedge clk) if (rst_n && dut.u_ntt_fsm.re) begin
    if (int'(dut.u_ntt_fsm.lgt) < LGD) n_inrow++; else n_xrow++;
  end

  u128 psi, psiinv, c [NCONST];
  logic [W-1:0] pa [N], pb [N], res [N];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  task automatic load_slot(input int slot, input logic [W-1:0] v [N]);
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); host_we = 1; host_waddr = AW'(slot * ROWS + r);
      for (int j = 0; j < DP; j++) host_wdata[j] = v[r * DP + j];
    end
    @(negedge clk); host_we = 0;
  endtask

  task automatic read_slot(input int slot, output logic [W-1:0] v [N]);
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); host_re = 1; host_raddr = AW'(slot * ROWS + r);
      @(negedge clk); host_re = 0;
      for (int j = 0; j < DP; j++) v[r * DP + j] = host_rdata[j];
    end
  endtask

  function automatic u128 psi_pow(int e, bit inv);
    return powm(inv ? psiinv : psi, 128'(e), 128'(Q));
  endfunction

  task automatic load_twiddles(input int tw_slot, input bit inv);
    for (int s = 0; s < LGN; s++) begin
      int lt, t, h, m;
      lt = inv ? s : LGN - 1 - s;
      t = 1 << lt; m = N / (2 * t);
      h = (lt >= LGD) ? t / DP : 1;
      for (int p = 0; p < ROWS / 2; p++) begin
        int r0;
        r0 = (p / h) * 2 * h + p % h;
        @(negedge clk); tw_we = 1; tw_waddr = TAW'(tw_slot * ROWS + s * ROWS / 2 + p);
        for (int b = 0; b < DP; b++) begin
          int j;
          j = (lt >= LGD) ? r0 * DP + b : r0 * DP + (((b >> lt) << (lt + 1)) | (b & (t - 1)));
          tw_wdata[b] = W'(psi_pow(brev(m + j / (2 * t), LGN), inv));
        end
      end
    end
    @(negedge clk); tw_we = 0;
  endtask

  task automatic run(input cmd_t cc, output int cycles);
    @(negedge clk); cmd = cc; cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    cycles = 1;
    while (!cmd_done) begin @(negedge clk); cycles++; end
    if (cc.op == OP_CW) n_mode[cc.mode]++;
    if (cc.op == OP_NTT) n_mode[PE_NTT]++;
    if (cc.op == OP_INTT) n_mode[PE_INTT]++;
    if (cc.op == OP_CW && (cc.mode == PE_CM_ACC || cc.mode == PE_CWPM_ACC) && cc.nterms > 1) n_acc_multi++;
  endtask

  function automatic cmd_t mk(op_e op, pe_mode_e mode, int a, int b, int d, int nt, int tw, int ci, int g);
    cmd_t x;
    x = '0; x.op = op; x.mode = mode; x.slot_a = 8'(a); x.slot_b = 8'(b); x.slot_d = 8'(d);
    x.nterms = 8'(nt); x.tw_slot = 8'(tw); x.mod_idx = 6'd0; x.const_idx = 8'(ci); x.galois = 32'(g);
    return x;
  endfunction

  function automatic void rand_poly(output logic [W-1:0] v [N]);
    for (int k = 0; k < N; k++) v[k] = W'($urandom % 65537);
  endfunction

  initial begin
    int cyc;
    int chains_before;
    logic [W-1:0] v0 [N], v1 [N], v2 [N], v3 [N];
    psi = powm(3, (65537 - 1) / (2 * N), 128'(Q));
    psiinv = invm(psi, 128'(Q));
    cmd = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // register file
    @(negedge clk); mod_we = 1; mod_waddr = 0; mod_wq = Q; mod_wmu = (W+1)'(barrett_mu(128'(Q), W));
    for (int k = 0; k < NCONST; k++) begin
      @(negedge clk); mod_we = 0; const_we = 1; const_waddr = 4'(k);
      c[k] = 128'($urandom % 65537); const_wdata = W'(c[k]);
    end
    @(negedge clk); const_we = 0;
    load_twiddles(0, 0);
    load_twiddles(3, 1);
    rand_poly(pa); rand_poly(pb);
    load_slot(0, pa); load_slot(1, pb);

    // ---- forward NTT against direct evaluation ----
    run(mk(OP_NTT, PE_NTT, 0, 0, 0, 0, 0, 0, 0), cyc);
    chk(cyc <= 4 * LGN * ROWS / 2 + 4, "NTT latency");
    read_slot(0, res);
    for (int k = 0; k < N; k++) begin
      u128 x, e, acc;
      x = psi_pow(2 * brev(k, LGN) + 1, 0);
      acc = 0; e = 1;
      for (int i = 0; i < N; i++) begin acc = addm(acc, mulm(128'(pa[i]), e, Q), Q); e = mulm(e, x, Q); end
      chk(128'(res[k]) == acc, $sformatf("NTT pos %0d", k));
    end
    run(mk(OP_NTT, PE_NTT, 1, 0, 0, 0, 0, 0, 0), cyc);

    // ---- CWPM in NTT domain + INTT = negacyclic product ----
    run(mk(OP_CW, PE_CWPM, 0, 1, 2, 1, 0, 0, 0), cyc);
    chk(cyc <= ROWS + 4, "CWPM latency");
    run(mk(OP_INTT, PE_INTT, 2, 0, 0, 0, 3, 0, 0), cyc);
    read_slot(2, res);
    for (int k = 0; k < N; k++) begin
      u128 acc;
      acc = 0;
      for (int i = 0; i < N; i++) begin
        int j;
        j = k - i;
        if (j >= 0) acc = addm(acc, mulm(128'(pa[i]), 128'(pb[j]), Q), Q);
        else        acc = subm(acc, mulm(128'(pa[i]), 128'(pb[j + N]), Q), Q);
      end
      chk(128'(res[k]) == acc, $sformatf("conv coef %0d", k));
    end

    // ---- automorphisms: NTT(b) in slot 1; apply g, INTT, compare b(x^ginv) ----
    chains_before = int'(n_auto_chain);
    for (int it = 0; it < 3; it++) begin
      int g, ginv;
      logic [W-1:0] expb [N];
      g = int'(powm(5, 128'(1 + 2 * it), 2 * N));
      ginv = 0;
      for (int x = 1; x < 2 * N; x += 2) if ((x * g) % (2 * N) == 1) ginv = x;
      load_slot(1, pb);
      run(mk(OP_NTT, PE_NTT, 1, 0, 0, 0, 0, 0, 0), cyc);
      run(mk(OP_AUTO, PE_NTT, 1, 0, 0, 0, 0, 0, g), cyc);
      chk(cyc <= ROWS + ROWS + 4, "automorphism latency");
      run(mk(OP_INTT, PE_INTT, 1, 0, 0, 0, 3, 0, 0), cyc);
      read_slot(1, res);
      for (int i = 0; i < N; i++) begin
        int e;
        e = (i * ginv) % (2 * N);
        if (e < N) expb[e] = pb[i];
        else       expb[e - N] = W'(subm(0, 128'(pb[i]), Q));
      end
      for (int k = 0; k < N; k++) chk(res[k] == expb[k], $sformatf("auto g=%0d coef %0d", g, k));
    end
    chk(int'(n_auto_chain) - chains_before > 3, "automorphism needed chain restarts");

    // ---- coefficient-wise modes ----
    rand_poly(v0); rand_poly(v1); rand_poly(v2); rand_poly(v3);
    load_slot(4, v0); load_slot(5, v1); load_slot(6, v2); load_slot(7, v3);
    run(mk(OP_CW, PE_CWPA, 4, 5, 3, 1, 0, 0, 0), cyc);
    read_slot(3, res);
    for (int k = 0; k < N; k++) chk(128'(res[k]) == addm(v0[k], v1[k], Q), "CWPA");
    run(mk(OP_CW, PE_CM, 4, 5, 3, 1, 0, 5, 0), cyc);
    read_slot(3, res);
    for (int k = 0; k < N; k++) chk(128'(res[k]) == mulm(c[5], v0[k], Q), "CM");
    run(mk(OP_CW, PE_CWPA_CM, 4, 5, 3, 1, 0, 7, 0), cyc);
    read_slot(3, res);
    for (int k = 0; k < N; k++) chk(128'(res[k]) == mulm(c[7], subm(v0[k], v1[k], Q), Q), "CWPA-CM");
    run(mk(OP_CW, PE_CM_ACC, 4, 5, 3, 2, 0, 9, 0), cyc);
    chk(cyc <= 2 * ROWS + 4, "CM-ACC latency");
    read_slot(3, res);
    for (int k = 0; k < N; k++) chk(128'(res[k]) == addm(mulm(c[9], v0[k], Q), mulm(c[10], v1[k], Q), Q), "CM-ACC");
    run(mk(OP_CW, PE_CWPM_ACC, 4, 6, 3, 2, 0, 0, 0), cyc);
    read_slot(3, res);
    for (int k = 0; k < N; k++) chk(128'(res[k]) == addm(mulm(v0[k], v2[k], Q), mulm(v1[k], v3[k], Q), Q), "CWPM-ACC");

    // ---- every mechanism happened ----
    for (int m = 0; m < 8; m++) chk(n_mode[m] > 0, $sformatf("PE mode %0d never used", m));
    chk(n_inrow > 0, "in-row butterfly stage never ran");
    chk(n_xrow > 0, "cross-row butterfly stage never ran");
    chk(n_acc_multi > 0, "multi-term accumulation never ran");
    for (int o = 0; o < 4; o++) chk(n_cmd[o] > 0, $sformatf("op %0d never ran", o));
    $display("mechanisms: modes %0d %0d %0d %0d %0d %0d %0d %0d inrow=%0d xrow=%0d chains=%0d accmulti=%0d",
             n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_mode[4], n_mode[5], n_mode[6], n_mode[7],
             n_inrow, n_xrow, int'(n_auto_chain) - chains_before, n_acc_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
