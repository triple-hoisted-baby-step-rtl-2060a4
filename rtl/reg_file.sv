// reg_file: register file of the accelerator.
//
// Holds, per RNS modulus (q_j and p_i, NMOD = L+1+alpha = 44 entries for the
// largest parameter set), the modulus and its Barrett constant
// mu = floor(2^(2W)/q), plus NCONST W-bit constants (P mod q_j, P^-1,
// qhat_j^-1, qhat_j mod p_i and the like). These are written by the host and
// read combinationally by index. It also holds two d_p-wide rows of PE
// results between computing and writing back, as the (I)NTT produces two
// rows per step and the memory takes one row per cycle.
//
// What it stores follows the design; the table sizes NCONST, the host write
// port and the Barrett constant are this implementation's choices.
//
// Lint may flag the all-zero fill of the d_p-word row vectors as a suspiciously
// long replication; the fill is intended (reset value of the held rows).
module reg_file #(
  parameter int unsigned W      = 54,
  parameter int unsigned DP     = 256,
  parameter int unsigned NMOD   = 44,
  parameter int unsigned NCONST = 256,
  localparam int unsigned MAW   = $clog2(NMOD),
  localparam int unsigned CAW   = $clog2(NCONST)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host writes
  input  logic                  mod_we,
  input  logic [MAW-1:0]        mod_waddr,
  input  logic [W-1:0]          mod_wq,
  input  logic [W:0]            mod_wmu,
  input  logic                  const_we,
  input  logic [CAW-1:0]        const_waddr,
  input  logic [W-1:0]          const_wdata,
  // reads
  input  logic [MAW-1:0]        mod_idx,
  output logic [W-1:0]          q,
  output logic [W:0]            mu,
  input  logic [CAW-1:0]        const_idx,
  output logic [W-1:0]          cval,
  // PE result holding registers
  input  logic                  hold_we,
  input  logic [DP-1:0][W-1:0]  hold0_d,
  input  logic [DP-1:0][W-1:0]  hold1_d,
  output logic [DP-1:0][W-1:0]  hold0,
  output logic [DP-1:0][W-1:0]  hold1
);
  logic [W-1:0] q_tab  [NMOD];
  logic [W:0]   mu_tab [NMOD];
  logic [W-1:0] c_tab  [NCONST];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NMOD; k++) begin
        q_tab[k]  <= '0;
        mu_tab[k] <= '0;
      end
      for (int k = 0; k < NCONST; k++) c_tab[k] <= '0;
      hold0 <= '0;
      hold1 <= '0;
    end else begin
      if (mod_we) begin
        q_tab[mod_waddr]  <= mod_wq;
        mu_tab[mod_waddr] <= mod_wmu;
      end
      if (const_we) c_tab[const_waddr] <= const_wdata;
      if (hold_we) begin
        hold0 <= hold0_d;
        hold1 <= hold1_d;
      end
    end
  end

  assign q    = q_tab[mod_idx];
  assign mu   = mu_tab[mod_idx];
  assign cval = c_tab[const_idx];
endmodule
