// ntt_fsm: the (I)NTT finite state machine.
//
// Runs an in-place negacyclic NTT (Cooley-Tukey butterflies, natural-order
// input, bit-reversed output) or inverse NTT (Gentleman-Sande butterflies
// with a halving in every stage, bit-reversed input, natural output, so the
// 1/N factor comes for free) over one limb of ROWS = N/d_p rows. Each of the
// log2(N) stages walks ROWS/2 row pairs; for pair p and row distance
// h = max(t/d_p, 1): r0 = (p div h)*2h + (p mod h), r1 = r0 + h.
// Per pair it spends four cycles: RD (read r0 and r1 and the twiddle row),
// EX (PE array computes, results captured in the register file), WR0 and
// WR1 (write the two rows back). An NTT therefore takes 4*log2(N)*N/(2 d_p)
// cycles plus two.
//
// Twiddle factors come from a twiddle memory holding one d_p-wide row per
// (stage, pair), at tw_base + stage*ROWS/2 + p, lane b holding the twiddle of
// butterfly b. That pre-expanded layout (log2(N)*N/2 words instead of N) and
// the unpipelined four-cycle step are this implementation's choices; the
// design states only that this FSM generates coefficient and twiddle
// addresses every cycle and that no permutation network is used for the NTT.
module ntt_fsm #(
  parameter int unsigned N     = 65536,
  parameter int unsigned DP    = 256,
  parameter int unsigned AW    = 12,     // data scratchpad address width
  parameter int unsigned TAW   = 12,     // twiddle scratchpad address width
  localparam int unsigned ROWS = N / DP,
  localparam int unsigned LGN  = $clog2(N),
  localparam int unsigned LGR  = $clog2(ROWS),
  localparam int unsigned LGD  = $clog2(DP),
  localparam int unsigned LGT  = $clog2(LGN)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            inverse,
  input  logic [AW-1:0]   base,      // first row of the limb
  input  logic [TAW-1:0]  tw_base,   // first row of the twiddle table
  output logic            busy,
  output logic            done,
  output logic            inv_q,     // mode of the running transform
  output logic [LGT-1:0]  lgt,       // log2 of the butterfly distance t
  output logic            re,        // read rows (ports A and B) and twiddles
  output logic [AW-1:0]   raddr_a,
  output logic [AW-1:0]   raddr_b,
  output logic [TAW-1:0]  tw_addr,
  output logic            hold_we,   // capture PE outputs
  output logic            we,
  output logic [AW-1:0]   waddr,
  output logic            wsel       // 0: write held row A, 1: held row B
);
  typedef enum logic [2:0] {S_IDLE, S_RD, S_EX, S_WR0, S_WR1} st_e;
  st_e st;

  logic [LGT-1:0]   sidx;
  logic [LGR-2:0]   p;
  logic [AW-1:0]    base_q;
  logic [TAW-1:0]   twb_q;

  logic [LGT-1:0]   lgh;
  logic [LGR-1:0]   r0, r1;

  always_comb begin
    lgt = inv_q ? sidx : LGT'(LGN - 1 - 32'(sidx));
    lgh = (32'(lgt) >= LGD) ? LGT'(32'(lgt) - LGD) : '0;
    r0  = LGR'(((32'(p) >> lgh) << (lgh + 1)) | (32'(p) & ((32'd1 << lgh) - 1)));
    r1  = r0 + LGR'(32'd1 << lgh);
  end

  assign busy    = (st != S_IDLE);
  assign re      = (st == S_RD);
  assign raddr_a = base_q + AW'(r0);
  assign raddr_b = base_q + AW'(r1);
  assign tw_addr = twb_q + TAW'(32'(sidx) * (ROWS / 2)) + TAW'(p);
  assign hold_we = (st == S_EX);
  assign we      = (st == S_WR0) || (st == S_WR1);
  assign wsel    = (st == S_WR1);
  assign waddr   = (st == S_WR1) ? raddr_b : raddr_a;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      sidx   <= '0;
      p      <= '0;
      base_q <= '0;
      twb_q  <= '0;
      inv_q  <= 1'b0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          st     <= S_RD;
          sidx   <= '0;
          p      <= '0;
          base_q <= base;
          twb_q  <= tw_base;
          inv_q  <= inverse;
        end
        S_RD:  st <= S_EX;
        S_EX:  st <= S_WR0;
        S_WR0: st <= S_WR1;
        S_WR1: begin
          if (32'(p) == ROWS / 2 - 1) begin
            p <= '0;
            if (32'(sidx) == LGN - 1) begin
              st   <= S_IDLE;
              done <= 1'b1;
            end else begin
              sidx <= sidx + 1'b1;
              st   <= S_RD;
            end
          end else begin
            p  <= p + 1'b1;
            st <= S_RD;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
