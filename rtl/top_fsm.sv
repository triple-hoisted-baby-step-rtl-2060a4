// top_fsm: top-level controller of the accelerator.
//
// Accepts one command at a time (valid/ready), turns its slot numbers
// (virtual addresses) into physical scratchpad rows (slot * N/d_p), starts
// the engine the command needs (ntt_fsm for NTT/INTT, cw_fsm for the
// coefficient-wise modes, auto_unit for an automorphism), gives that engine
// the memory ports and the PE array, and reports completion with a
// one-cycle done pulse. It also counts completed commands per operation.
//
// A linear transform is run as a stream of such commands that follows the
// six-phase memory-optimised data path (the host, or a sequencer in front of
// this FSM, issues them and moves data to and from off-chip memory). The
// address translation and engine selection follow the design; the command
// format and the host-driven sequencing are this implementation's choices.
// Slot bases are multiples of N/d_p, so the low log2(N/d_p) bits of the
// physical row outputs are constant zero; the engines add the row offset.
module top_fsm
  import helt_pkg::*;
#(
  parameter int unsigned N     = 65536,
  parameter int unsigned DP    = 256,
  parameter int unsigned AW    = 12,
  parameter int unsigned TAW   = 12,
  localparam int unsigned ROWS = N / DP
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  cmd_t            cmd,
  output logic            done,
  output cmd_t            cur,          // command being executed
  output op_e             owner,        // engine owning the datapath
  output logic            active,
  // engine starts and physical addresses
  output logic            ntt_start,
  output logic            cw_start,
  output logic            auto_start,
  output logic [AW-1:0]   phys_a,
  output logic [AW-1:0]   phys_b,
  output logic [AW-1:0]   phys_d,
  output logic [TAW-1:0]  phys_tw,
  input  logic            ntt_done,
  input  logic            cw_done,
  input  logic            auto_done,
  output logic [31:0]     n_cmd [4]
);
  typedef enum logic [1:0] {S_IDLE, S_START, S_WAIT} st_e;
  st_e st;

  assign cmd_ready = (st == S_IDLE);
  assign active    = (st != S_IDLE);
  assign owner     = cur.op;
  assign phys_a    = AW'(32'(cur.slot_a) * ROWS);
  assign phys_b    = AW'(32'(cur.slot_b) * ROWS);
  assign phys_d    = AW'(32'(cur.slot_d) * ROWS);
  assign phys_tw   = TAW'(32'(cur.tw_slot) * ROWS);
  assign ntt_start  = (st == S_START) && (cur.op == OP_NTT || cur.op == OP_INTT);
  assign cw_start   = (st == S_START) && (cur.op == OP_CW);
  assign auto_start = (st == S_START) && (cur.op == OP_AUTO);

  logic eng_done;
  always_comb begin
    unique case (cur.op)
      OP_NTT, OP_INTT: eng_done = ntt_done;
      OP_CW:           eng_done = cw_done;
      default:         eng_done = auto_done;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      cur  <= '0;
      done <= 1'b0;
      for (int k = 0; k < 4; k++) n_cmd[k] <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE:  if (cmd_valid) begin
          cur <= cmd;
          st  <= S_START;
        end
        S_START: st <= S_WAIT;
        S_WAIT:  if (eng_done) begin
          st   <= S_IDLE;
          done <= 1'b1;
          n_cmd[cur.op] <= n_cmd[cur.op] + 1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
