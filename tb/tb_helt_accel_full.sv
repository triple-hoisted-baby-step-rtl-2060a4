// tb_helt_accel_full: the accelerator at its default size (N = 2^16,
// d_p = 256, 54-bit words, q = 0x3fffffffd60001, a prime with
// q = 1 mod 2^17, psi = 3^((q-1)/2^17)).
//
// Generates the forward and inverse twiddle tables and a random limb, then
// runs: forward NTT (16 positions checked against direct evaluation and the
// latency against 4*16*128 cycles), an automorphism with g = 5 (every
// coefficient checked against the index map), the automorphism with
// g^-1 mod 2N (must restore the NTT result), an inverse NTT (must restore
// the limb) and a two-term CM-ACC basis-conversion step (every coefficient
// checked).
module tb_helt_accel_full;
  import helt_pkg::*;
  import tb_ref_pkg::*;
  localparam int W = 54, N = 65536, DP = 256, ROWS = 256, LGN = 16, LGD = 8;
  localparam logic [W-1:0] Q = 54'h3fffffffd60001;

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
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] pw  [2 * N];    // psi^e
  logic [W-1:0] pwi [2 * N];    // psi^-e
  logic [W-1:0] a [N], A [N], res [N], b [N];

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

  task automatic load_twiddles(input int tw_slot, input bit inv);
    for (int s = 0; s < LGN; s++) begin
      int lt, t, h, m;
      lt = inv ? s : LGN - 1 - s;
      t = 1 << lt; m = N / (2 * t);
      h = (lt >= LGD) ? t / DP : 1;
      for (int p = 0; p < ROWS / 2; p++) begin
        int r0;
        r0 = (p / h) * 2 * h + p % h;
        @(negedge clk); tw_we = 1; tw_waddr = 12'(tw_slot * ROWS + s * ROWS / 2 + p);
        for (int bb = 0; bb < DP; bb++) begin
          int j, e;
          j = (lt >= LGD) ? r0 * DP + bb : r0 * DP + (((bb >> lt) << (lt + 1)) | (bb & (t - 1)));
          e = int'(brev(m + j / (2 * t), LGN));
          tw_wdata[bb] = inv ? pwi[e] : pw[e];
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
  endtask

  function automatic cmd_t mk(op_e op, pe_mode_e mode, int sa, int sb, int sd, int nt, int tw, int ci, int g);
    cmd_t x;
    x = '0; x.op = op; x.mode = mode; x.slot_a = 8'(sa); x.slot_b = 8'(sb); x.slot_d = 8'(sd);
    x.nterms = 8'(nt); x.tw_slot = 8'(tw); x.mod_idx = 6'd3; x.const_idx = 8'(ci); x.galois = 32'(g);
    return x;
  endfunction

  initial begin
    int cyc, g, ginv;
    u128 psi, psii, c0, c1;
    psi  = powm(3, (128'(Q) - 1) / (2 * N), 128'(Q));
    psii = invm(psi, 128'(Q));
    pw[0] = 1; pwi[0] = 1;
    for (int e = 1; e < 2 * N; e++) begin
      pw[e]  = W'(mulm(128'(pw[e - 1]), psi, 128'(Q)));
      pwi[e] = W'(mulm(128'(pwi[e - 1]), psii, 128'(Q)));
    end
    chk(pw[N] == Q - 1, "psi is a primitive 2N-th root");
    cmd = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); mod_we = 1; mod_waddr = 6'd3; mod_wq = Q; mod_wmu = (W+1)'(barrett_mu(128'(Q), W));
    c0 = 128'({$urandom, $urandom}) % 128'(Q); c1 = 128'({$urandom, $urandom}) % 128'(Q);
    @(negedge clk); mod_we = 0; const_we = 1; const_waddr = 8'd20; const_wdata = W'(c0);
    @(negedge clk); const_waddr = 8'd21; const_wdata = W'(c1);
    @(negedge clk); const_we = 0;
    load_twiddles(0, 0);
    load_twiddles(8, 1);
    for (int k = 0; k < N; k++) begin
      a[k] = W'(128'({$urandom, $urandom}) % 128'(Q));
      b[k] = W'(128'({$urandom, $urandom}) % 128'(Q));
    end
    load_slot(0, a);

    run(mk(OP_NTT, PE_NTT, 0, 0, 0, 0, 0, 0, 0), cyc);
    chk(cyc <= 4 * LGN * ROWS / 2 + 4, "NTT latency");
    $display("NTT took %0d cycles", cyc);
    read_slot(0, A);
    for (int it = 0; it < 16; it++) begin
      int k;
      u128 acc;
      int e, step;
      k = (it < 2) ? it * (N - 1) : int'($urandom % N);
      step = 2 * int'(brev(k, LGN)) + 1;
      acc = 0; e = 0;
      for (int i = 0; i < N; i++) begin
        acc = addm(acc, mulm(128'(a[i]), 128'(pw[e]), 128'(Q)), 128'(Q));
        e = (e + step) % (2 * N);
      end
      chk(128'(A[k]) == acc, $sformatf("NTT position %0d", k));
    end

    g = 5;
    ginv = int'(powm(5, (1 << 15) - 1, 2 * N));     // 5 has order N/2 mod 2N
    chk((g * ginv) % (2 * N) == 1, "inverse Galois element");
    run(mk(OP_AUTO, PE_NTT, 0, 0, 0, 0, 0, 0, g), cyc);
    chk(cyc <= 2 * ROWS + 4, "automorphism latency");
    read_slot(0, res);
    for (int i = 0; i < ROWS; i++)
      for (int j = 0; j < DP; j++) begin
        int l, lp;
        l = int'(brev(i * DP + j, LGN));
        lp = ((g * (2 * l + 1)) % (2 * N) - 1) / 2;
        chk(res[brev(lp, LGN)] == A[i * DP + j], "automorphism map");
      end
    run(mk(OP_AUTO, PE_NTT, 0, 0, 0, 0, 0, 0, ginv), cyc);
    read_slot(0, res);
    for (int k = 0; k < N; k++) chk(res[k] == A[k], "automorphism round trip");
    run(mk(OP_INTT, PE_INTT, 0, 0, 0, 0, 8, 0, 0), cyc);
    read_slot(0, res);
    for (int k = 0; k < N; k++) chk(res[k] == a[k], "NTT/INTT round trip");

    load_slot(1, b);
    run(mk(OP_CW, PE_CM_ACC, 0, 0, 63, 2, 0, 20, 0), cyc);
    chk(cyc <= 2 * ROWS + 4, "CM-ACC latency");
    read_slot(63, res);
    for (int k = 0; k < N; k++)
      chk(128'(res[k]) == addm(mulm(c0, 128'(a[k]), 128'(Q)), mulm(c1, 128'(b[k]), 128'(Q)), 128'(Q)), "CM-ACC");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
