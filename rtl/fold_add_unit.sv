// fold_add_unit: one folded adder-delay unit (an adder followed by a register).
//
// Folding maps two additions of the unfolded filter onto one physical adder.
// The operands of each addition arrive on their own input pair (a0/b0 for
// time slot INST0, a1/b1 for INST1); `sel` picks the pair, the adder sums it
// and the register captures the sum at the clock edge when `en` is high.
// With `en` low the register holds, so an idle unit does not toggle.
//
// Timing: q shows the sum one clock after the cycle in which its operands and
// `sel` were presented (the single pipeline register P_u = 1 of the folding
// equations). Operands are W-bit signed; the sum wraps in W bits, so the
// caller sizes W to hold every sum it asks for.
//
// The structure (two input selections, adder, register) follows the folded
// architecture; the clock enable and the asynchronous reset are this
// design's own choices.
module fold_add_unit
  import lpf_pkg::*;
#(
  parameter int unsigned W = DATA_W_DEFAULT + 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  inst_e               sel,
  input  logic signed [W-1:0] a0,
  input  logic signed [W-1:0] b0,
  input  logic signed [W-1:0] a1,
  input  logic signed [W-1:0] b1,
  output logic signed [W-1:0] q
);

  logic signed [W-1:0] op_a, op_b, sum;

  always_comb begin
    op_a = (sel == INST1) ? a1 : a0;
    op_b = (sel == INST1) ? b1 : b0;
    sum  = op_a + op_b;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  q <= '0;
    else if (en) q <= sum;
  end

endmodule
