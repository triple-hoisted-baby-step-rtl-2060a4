// helt_accel: accelerator for the homomorphic linear transform (HE-LT) of
// CKKS ciphertexts with the triple-hoisted baby-step giant-step algorithm.
//
// Blocks: a d_p-lane PE array, the permutation circuit for automorphisms
// (auto_unit with its perm_network), a data scratchpad and a twiddle
// scratchpad made of d_p address-sharing memory blocks, a register file
// (moduli, constants, PE result rows) and a control unit of three FSMs
// (top_fsm, ntt_fsm, cw_fsm). Off-chip memory (HBM behind 32 AXI channels)
// is outside this module: its place is taken by row-wide host load/store
// ports that may be used while no command runs.
//
// Each command works on one RNS limb stored in a slot of N/d_p rows:
// NTT/INTT in place, a coefficient-wise operation (CWPM, CWPA, CM, CWPA-CM,
// CM-ACC, CWPM-ACC) from slots A/B to slot D, or an automorphism phi_r in
// place. Basis conversion, ModUp/ModDown, rescaling, key-switching inner
// products and the plaintext-matrix products of the six data-path phases
// are composed from these commands by the issuer.
//
// Defaults are the largest parameter set of the design: N = 2^16, d_p = 256,
// 54-bit words, L+1+alpha = 44 moduli. The data scratchpad has 16384 rows
// per lane (64 limbs): the 768 ultra RAMs reported for this parameter set
// make 1024 memory blocks of 4K x 54, i.e. four 4K-deep groups of 256 blocks.
// The block RAM part of the FPGA memory is not modelled. The 4096-row
// twiddle scratchpad (forward and inverse tables of one modulus) is this
// implementation's size.
module helt_accel
  import helt_pkg::*;
#(
  parameter int unsigned W        = W_DEF,
  parameter int unsigned N        = 65536,
  parameter int unsigned DP       = 256,
  parameter int unsigned DEPTH    = 16384,
  parameter int unsigned TW_DEPTH = 4096,
  parameter int unsigned NMOD     = 44,
  parameter int unsigned NCONST   = 256,
  localparam int unsigned AW      = $clog2(DEPTH),
  localparam int unsigned TAW     = $clog2(TW_DEPTH),
  localparam int unsigned MAW     = $clog2(NMOD),
  localparam int unsigned CAW     = $clog2(NCONST),
  localparam int unsigned ROWS    = N / DP,
  localparam int unsigned LGN     = $clog2(N),
  localparam int unsigned LGR     = $clog2(ROWS),
  localparam int unsigned LGT     = $clog2(LGN)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // command interface
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  cmd_t                  cmd,
  output logic                  cmd_done,
  // host access to the data scratchpad (only while cmd_ready)
  input  logic                  host_we,
  input  logic [AW-1:0]         host_waddr,
  input  logic [DP-1:0][W-1:0]  host_wdata,
  input  logic                  host_re,
  input  logic [AW-1:0]         host_raddr,
  output logic [DP-1:0][W-1:0]  host_rdata,   // the cycle after host_re
  // host access to the twiddle scratchpad
  input  logic                  tw_we,
  input  logic [TAW-1:0]        tw_waddr,
  input  logic [DP-1:0][W-1:0]  tw_wdata,
  // host access to the register file
  input  logic                  mod_we,
  input  logic [MAW-1:0]        mod_waddr,
  input  logic [W-1:0]          mod_wq,
  input  logic [W:0]            mod_wmu,
  input  logic                  const_we,
  input  logic [CAW-1:0]        const_waddr,
  input  logic [W-1:0]          const_wdata,
  // activity counters: completed commands per op_e, automorphism chains
  output logic [31:0]           n_cmd [4],
  output logic [31:0]           n_auto_chain
);
  // ---------------- control unit ----------------
  cmd_t           cur;
  op_e            owner;
  logic           active;
  logic           ntt_start, cw_start, auto_start;
  logic           ntt_done, cw_done, auto_done;
  logic [AW-1:0]  phys_a, phys_b, phys_d;
  logic [TAW-1:0] phys_tw;

  top_fsm #(.N(N), .DP(DP), .AW(AW), .TAW(TAW)) u_top_fsm (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .done(cmd_done),
    .cur, .owner, .active, .ntt_start, .cw_start, .auto_start,
    .phys_a, .phys_b, .phys_d, .phys_tw,
    .ntt_done, .cw_done, .auto_done, .n_cmd
  );

  logic            ntt_busy, ntt_inv, ntt_re, ntt_hold_we, ntt_we, ntt_wsel;
  logic [LGT-1:0]  ntt_lgt;
  logic [AW-1:0]   ntt_ra, ntt_rb, ntt_wa;
  logic [TAW-1:0]  ntt_twa;

  ntt_fsm #(.N(N), .DP(DP), .AW(AW), .TAW(TAW)) u_ntt_fsm (
    .clk, .rst_n, .start(ntt_start), .inverse(cur.op == OP_INTT),
    .base(phys_a), .tw_base(phys_tw), .busy(ntt_busy), .done(ntt_done),
    .inv_q(ntt_inv), .lgt(ntt_lgt), .re(ntt_re), .raddr_a(ntt_ra), .raddr_b(ntt_rb),
    .tw_addr(ntt_twa), .hold_we(ntt_hold_we), .we(ntt_we), .waddr(ntt_wa), .wsel(ntt_wsel)
  );

  logic            cw_busy, cw_re, cw_pe_valid, cw_acc_clr, cw_we;
  logic [7:0]      cw_const_off;
  logic [AW-1:0]   cw_ra, cw_rb, cw_wa;

  cw_fsm #(.N(N), .DP(DP), .AW(AW)) u_cw_fsm (
    .clk, .rst_n, .start(cw_start), .mode(cur.mode),
    .base_a(phys_a), .base_b(phys_b), .base_d(phys_d), .nterms(cur.nterms),
    .busy(cw_busy), .done(cw_done), .re(cw_re), .raddr_a(cw_ra), .raddr_b(cw_rb),
    .pe_valid(cw_pe_valid), .acc_clr(cw_acc_clr), .const_off(cw_const_off),
    .we(cw_we), .waddr(cw_wa)
  );

  // ---------------- memories ----------------
  logic                  sp_we, sp_re_a, sp_re_b;
  logic [AW-1:0]         sp_wa, sp_ra, sp_rb;
  logic [DP-1:0][W-1:0]  sp_wd, sp_rd_a, sp_rd_b;
  logic [DP-1:0][W-1:0]  tw_rd, tw_unused;

  scratchpad #(.W(W), .DP(DP), .DEPTH(DEPTH)) u_spad (
    .clk, .we(sp_we), .waddr(sp_wa), .wdata(sp_wd),
    .re_a(sp_re_a), .raddr_a(sp_ra), .rdata_a(sp_rd_a),
    .re_b(sp_re_b), .raddr_b(sp_rb), .rdata_b(sp_rd_b)
  );

  scratchpad #(.W(W), .DP(DP), .DEPTH(TW_DEPTH)) u_twpad (
    .clk, .we(tw_we && !active), .waddr(tw_waddr), .wdata(tw_wdata),
    .re_a(ntt_re), .raddr_a(ntt_twa), .rdata_a(tw_rd),
    .re_b(1'b0), .raddr_b('0), .rdata_b(tw_unused)
  );

  assign host_rdata = sp_rd_a;

  // ---------------- register file ----------------
  logic [W-1:0]          q, cval;
  logic [W:0]            mu;
  logic [DP-1:0][W-1:0]  hold0, hold1, route_wa, route_wb;

  reg_file #(.W(W), .DP(DP), .NMOD(NMOD), .NCONST(NCONST)) u_rf (
    .clk, .rst_n,
    .mod_we(mod_we && !active), .mod_waddr, .mod_wq, .mod_wmu,
    .const_we(const_we && !active), .const_waddr, .const_wdata,
    .mod_idx(MAW'(cur.mod_idx)), .q, .mu,
    .const_idx(CAW'(cur.const_idx + cw_const_off)), .cval,
    .hold_we(ntt_hold_we), .hold0_d(route_wa), .hold1_d(route_wb), .hold0, .hold1
  );

  // ---------------- permutation circuit ----------------
  logic                  au_busy, au_rd_en, au_wr_en;
  logic [LGR-1:0]        au_rd_row, au_wr_row;
  logic [DP-1:0][W-1:0]  au_wd;

  auto_unit #(.W(W), .DP(DP), .N(N)) u_auto (
    .clk, .rst_n, .start(auto_start), .galois(cur.galois),
    .busy(au_busy), .done(auto_done),
    .rd_en(au_rd_en), .rd_row(au_rd_row), .rd_data(sp_rd_a),
    .wr_en(au_wr_en), .wr_row(au_wr_row), .wr_data(au_wd)
  );

  // ---------------- PE array ----------------
  pe_ctrl_t              ctrl;
  logic [DP-1:0][W-1:0]  pa0, pa1, ptf, pout0, pout1, ra0, ra1;

  ntt_router #(.W(W), .DP(DP), .LGN(LGN)) u_router (
    .lgt(ntt_lgt), .row_a(sp_rd_a), .row_b(sp_rd_b), .a0(ra0), .a1(ra1),
    .out0(pout0), .out1(pout1), .wrow_a(route_wa), .wrow_b(route_wb)
  );

  always_comb begin
    if (owner == OP_NTT || owner == OP_INTT) begin
      ctrl = pe_ctrl_of(ntt_inv ? PE_INTT : PE_NTT);
      pa0  = ra0;
      pa1  = ra1;
      ptf  = tw_rd;
    end else begin
      ctrl = pe_ctrl_of(cur.mode);
      pa0  = sp_rd_a;
      pa1  = sp_rd_b;
      ptf  = {DP{cval}};
    end
  end

  pe_array #(.W(W), .DP(DP)) u_pes (
    .clk, .rst_n, .ctrl, .acc_en(cw_pe_valid && owner == OP_CW), .acc_clr(cw_acc_clr),
    .q, .mu, .a0(pa0), .a1(pa1), .tf(ptf), .out0(pout0), .out1(pout1)
  );

  // ---------------- memory port arbitration ----------------
  always_comb begin
    sp_we   = 1'b0;
    sp_wa   = host_waddr;
    sp_wd   = host_wdata;
    sp_re_a = 1'b0;
    sp_ra   = host_raddr;
    sp_re_b = 1'b0;
    sp_rb   = '0;
    if (!active) begin
      sp_we   = host_we;
      sp_re_a = host_re;
    end else begin
      unique case (owner)
        OP_NTT, OP_INTT: begin
          sp_re_a = ntt_re;  sp_ra = ntt_ra;
          sp_re_b = ntt_re;  sp_rb = ntt_rb;
          sp_we   = ntt_we;  sp_wa = ntt_wa;
          sp_wd   = ntt_wsel ? hold1 : hold0;
        end
        OP_CW: begin
          sp_re_a = cw_re;   sp_ra = cw_ra;
          sp_re_b = cw_re;   sp_rb = cw_rb;
          sp_we   = cw_we;   sp_wa = cw_wa;
          sp_wd   = pout0;
        end
        default: begin
          sp_re_a = au_rd_en; sp_ra = phys_a + AW'(au_rd_row);
          sp_we   = au_wr_en; sp_wa = phys_a + AW'(au_wr_row);
          sp_wd   = au_wd;
        end
      endcase
    end
  end

  // Count automorphism chains (restarts from the priority encoder).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                    n_auto_chain <= '0;
    else if (auto_start || (au_busy && au_rd_en && au_wr_en && au_rd_row != au_wr_row))
                                                   n_auto_chain <= n_auto_chain + 1;
  end

  // The busy flags of the engines are observed through top_fsm's done.
  logic unused_busy;
  assign unused_busy = ntt_busy ^ cw_busy;
endmodule
