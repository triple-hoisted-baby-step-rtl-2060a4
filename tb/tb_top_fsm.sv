// tb_top_fsm: issues commands of every operation type to the top controller
// with a simple engine model that finishes after a fixed delay, and checks
// the ready/done handshake, which engine is started, the slot-to-row
// translation and the per-operation command counters.
module tb_top_fsm;
  import helt_pkg::*;
  localparam int N = 64, DP = 8, AW = 8, TAW = 8, ROWS = 8;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, done, active;
  cmd_t cmd, cur;
  op_e owner;
  logic ntt_start, cw_start, auto_start, ntt_done = 0, cw_done = 0, auto_done = 0;
  logic [AW-1:0] phys_a, phys_b, phys_d;
  logic [TAW-1:0] phys_tw;
  logic [31:0] n_cmd [4];
  int checks = 0, failures = 0;

  top_fsm #(.N(N), .DP(DP), .AW(AW), .TAW(TAW)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    int cnt [4] = '{0, 0, 0, 0};
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 24; it++) begin
      op_e op;
      int lat;
      op = op_e'(it % 4);
      cmd = '0; cmd.op = op; cmd.slot_a = 8'(it % 5); cmd.slot_b = 8'(3); cmd.slot_d = 8'(7);
      cmd.tw_slot = 8'(2);
      @(negedge clk);
      chk(cmd_ready, "ready when idle");
      cmd_valid = 1;
      @(negedge clk); cmd_valid = 0;
      chk(!cmd_ready && active, "busy");
      chk(ntt_start == (op == OP_NTT || op == OP_INTT) && cw_start == (op == OP_CW) && auto_start == (op == OP_AUTO), "start");
      chk(phys_a == 8'((it % 5) * ROWS) && phys_b == 8'(3 * ROWS) && phys_d == 8'(7 * ROWS) && phys_tw == 8'(2 * ROWS), "phys");
      lat = 1 + it % 3;
      repeat (lat) @(negedge clk);
      chk(!done && !cmd_ready, "waits for engine");
      case (op)
        OP_NTT, OP_INTT: ntt_done = 1;
        OP_CW: cw_done = 1;
        default: auto_done = 1;
      endcase
      @(negedge clk); ntt_done = 0; cw_done = 0; auto_done = 0;
      chk(done && cmd_ready, "done pulse");
      cnt[op]++;
      chk(n_cmd[op] == 32'(cnt[op]), "counter");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
