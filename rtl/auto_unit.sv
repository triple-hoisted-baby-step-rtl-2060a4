// auto_unit: in-place automorphism phi_r of one NTT-domain polynomial limb.
//
// The limb occupies ROWS = N/d_p rows of d_p memory blocks; row i, block j
// holds coefficient A[bitrev(i*d_p + j)]. The automorphism sends index l to
// ((g_r(2l+1) mod 2N) - 1)/2. Writing the stored index as b*N/d_p + a with
// a = bitrev(i), b = bitrev(j), and [g_r*a + (g_r-1)/2] mod N = t*N/d_p + u,
// every coefficient of row i lands in row i' = bitrev(u), on lane
// j' = bitrev((g_r*b + t) mod d_p). So a whole row maps onto a whole row and
// the permutation within the row is done by one perm_network.
// Direction: the value found at index l moves to index l'. With the
// NTT ordering used here (index l holds the evaluation at psi^(2l+1)) the
// limb b(X) becomes b(X^(g_r^-1)); for the rotation phi_r, b(X) -> b(X^(5^r)),
// supply galois = 5^(-r) mod 2N.
//
// Operation (one row per clock after the first read): the row last read,
// row i, is permuted and written to row i' while row i' is read in the same
// cycle (the memory returns the old contents, read-before-write). Then row
// i' becomes the current row. Each row has a flag, set when it is read;
// when i' is already flagged the chain has closed, and a two-layer priority
// encoder (prio_enc2) supplies the lowest unflagged row to start the next
// chain. The unit finishes when every flag is set, after ROWS+1 cycles plus
// one read per extra chain start that does not coincide with a write.
//
// The row/lane mapping, the in-place write, the per-row flags and the
// priority encoder follow the design. Own choices: one-cycle read latency,
// the start/done handshake, the starting row 0, and computing i' and j'
// on the fly (the design allows on-the-fly or a lookup table).
module auto_unit #(
  parameter int unsigned W  = 54,
  parameter int unsigned DP = 256,
  parameter int unsigned N  = 65536,
  localparam int unsigned ROWS = N / DP,
  localparam int unsigned LGR  = $clog2(ROWS),
  localparam int unsigned LGD  = $clog2(DP),
  localparam int unsigned LGN  = $clog2(N)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [31:0]           galois,   // odd Galois element g_r (see below)
  output logic                  busy,
  output logic                  done,     // one-cycle pulse at the end
  // row port into the scratchpad slot being permuted
  output logic                  rd_en,
  output logic [LGR-1:0]        rd_row,
  input  logic [DP-1:0][W-1:0]  rd_data,  // valid the cycle after rd_en
  output logic                  wr_en,
  output logic [LGR-1:0]        wr_row,
  output logic [DP-1:0][W-1:0]  wr_data
);
  typedef enum logic [1:0] {S_IDLE, S_RUN} st_e;
  st_e st;

  logic [LGN:0]     g_q;                // g_r mod 2N
  logic [LGR-1:0]   cur_row;
  logic [ROWS-1:0]  flags;

  function automatic logic [LGR-1:0] brev_r(input logic [LGR-1:0] x);
    for (int k = 0; k < LGR; k++) brev_r[k] = x[LGR-1-k];
  endfunction
  function automatic logic [LGD-1:0] brev_d(input logic [LGD-1:0] x);
    for (int k = 0; k < LGD; k++) brev_d[k] = x[LGD-1-k];
  endfunction

  // Row mapping for the current row.
  logic [LGN+LGR:0]     ga;
  logic [LGN-1:0]       x;
  logic [LGD-1:0]       t;
  logic [LGR-1:0]       u, nxt_row;
  logic [DP-1:0][LGD-1:0] dst;

  always_comb begin
    ga      = g_q * brev_r(cur_row);
    x       = LGN'(ga) + LGN'(g_q >> 1);          // (g_r - 1)/2 = g_r >> 1 for odd g_r
    t       = x[LGN-1 -: LGD];
    u       = x[LGR-1:0];
    nxt_row = brev_r(u);
    for (int j = 0; j < DP; j++) begin
      logic [LGN+LGD:0] gb;
      gb     = g_q * brev_d(LGD'(j));
      dst[j] = brev_d(LGD'(gb) + t);
    end
  end

  perm_network #(.W(W), .DP(DP)) u_perm (.check(st == S_RUN), .din(rd_data), .dst(dst), .dout(wr_data));

  logic          free_found;
  logic [LGR-1:0] free_row;
  prio_enc2 #(.NBITS(ROWS), .G(16)) u_pe2 (.req(~flags), .found(free_found), .idx(free_row));

  logic nxt_seen;
  assign nxt_seen = flags[nxt_row];

  always_comb begin
    rd_en  = 1'b0;
    rd_row = '0;
    wr_en  = 1'b0;
    wr_row = nxt_row;
    if (st == S_IDLE) begin
      rd_en  = start;
      rd_row = '0;
    end else begin
      wr_en = 1'b1;
      if (!nxt_seen) begin
        rd_en  = 1'b1;
        rd_row = nxt_row;
      end else begin
        rd_en  = free_found;
        rd_row = free_row;
      end
    end
  end

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      g_q     <= '0;
      cur_row <= '0;
      flags   <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          st      <= S_RUN;
          g_q     <= galois[LGN:0];
          cur_row <= '0;
          flags   <= ROWS'(1);
        end
        S_RUN: begin
          if (rd_en) begin
            cur_row        <= rd_row;
            flags[rd_row]  <= 1'b1;
          end else begin
            st   <= S_IDLE;
            done <= 1'b1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
