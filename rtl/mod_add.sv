// mod_add: combinational modular adder/subtractor, y = (a + b) mod q or
// y = (a - b) mod q. Operands must already be reduced (a, b < q). One
// W+1-bit add followed by one conditional correction by q. The design
// only asks for modular adders; this two-step form is this implementation's
// choice. Purely combinational, no latency.
module mod_add #(
  parameter int unsigned W = 54
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] q,
  input  logic         sub,   // 1: a - b, 0: a + b
  output logic [W-1:0] y
);
  logic [W:0] s, t;
  always_comb begin
    if (sub) begin
      s = {1'b0, a} - {1'b0, b};
      t = s + {1'b0, q};
      y = s[W] ? t[W-1:0] : s[W-1:0];      // borrow: add q back
    end else begin
      s = {1'b0, a} + {1'b0, b};
      t = s - {1'b0, q};
      y = t[W] ? s[W-1:0] : t[W-1:0];      // no borrow: s >= q
    end
  end
endmodule
