// cw_fsm: the CWPM/PA/PA-PM/CM(-ACC) finite state machine.
//
// Sequences a coefficient-wise operation over the ROWS = N/d_p rows of a
// limb. For row r and term k (k < nterms, nterms forced to 1 outside the
// accumulate modes) it reads row base_a + k*ROWS + r on port A and row
// base_b + k*ROWS + r on port B; one cycle later the PE array sees the data
// with constant index const_base + k, accumulates it (acc_clr on the first
// term), and on the last term the result is written to row base_d + r.
// Reads and writes overlap, so the unit issues one term per clock:
// nterms*ROWS + 1 cycles per operation. This covers basis conversion
// (CM-ACC over the input limbs with constants qhat_j^-1 / qhat_j), the
// switching-key inner product (CWPM-ACC over the beta digits), the
// plaintext-matrix products and plain CWPM/CWPA/CM/CWPA-CM.
//
// Which operations this FSM serves follows the design; the operand layout
// (terms in consecutive slots), the one-term-per-cycle pipeline and the
// handshake are this implementation's choices.
module cw_fsm
  import helt_pkg::*;
#(
  parameter int unsigned N     = 65536,
  parameter int unsigned DP    = 256,
  parameter int unsigned AW    = 12,
  localparam int unsigned ROWS = N / DP,
  localparam int unsigned LGR  = $clog2(ROWS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  pe_mode_e        mode,
  input  logic [AW-1:0]   base_a,
  input  logic [AW-1:0]   base_b,
  input  logic [AW-1:0]   base_d,
  input  logic [7:0]      nterms,
  output logic            busy,
  output logic            done,
  output logic            re,
  output logic [AW-1:0]   raddr_a,
  output logic [AW-1:0]   raddr_b,
  output logic            pe_valid,   // PE array has operands this cycle
  output logic            acc_clr,
  output logic [7:0]      const_off,  // term index k of the operands at the PE
  output logic            we,
  output logic [AW-1:0]   waddr
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_LAST} st_e;
  st_e st;

  logic [AW-1:0]  ba_q, bb_q, bd_q;
  logic [7:0]     nt_q;
  logic [LGR-1:0] r;
  logic [7:0]     k;
  // second (PE) stage
  logic [LGR-1:0] r2;
  logic [7:0]     k2;
  logic           v2;

  logic acc_mode;
  assign acc_mode = (mode == PE_CM_ACC) || (mode == PE_CWPM_ACC);

  assign busy    = (st != S_IDLE);
  assign re      = (st == S_RUN);
  assign raddr_a = ba_q + AW'(32'(k) * ROWS) + AW'(r);
  assign raddr_b = bb_q + AW'(32'(k) * ROWS) + AW'(r);
  assign pe_valid  = v2;
  assign acc_clr   = (k2 == 8'd0);
  assign const_off = k2;
  assign we        = v2 && (k2 == nt_q - 8'd1);
  assign waddr     = bd_q + AW'(r2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      ba_q <= '0; bb_q <= '0; bd_q <= '0; nt_q <= 8'd1;
      r <= '0; k <= '0; r2 <= '0; k2 <= '0; v2 <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      v2   <= (st == S_RUN);
      r2   <= r;
      k2   <= k;
      unique case (st)
        S_IDLE: if (start) begin
          st   <= S_RUN;
          ba_q <= base_a;
          bb_q <= base_b;
          bd_q <= base_d;
          nt_q <= (acc_mode && nterms != 8'd0) ? nterms : 8'd1;
          r    <= '0;
          k    <= '0;
        end
        S_RUN: begin
          if (k == nt_q - 8'd1) begin
            k <= '0;
            if (32'(r) == ROWS - 1) st <= S_LAST;
            else r <= r + 1'b1;
          end else begin
            k <= k + 1'b1;
          end
        end
        S_LAST: begin
          st   <= S_IDLE;
          done <= 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
