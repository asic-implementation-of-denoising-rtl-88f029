// tb_fold_add_unit: self-checking test of one folded adder-delay unit.
//
// Drives random operands on both instance pairs with random select and
// enable, and checks after each clock that the register holds the sum of
// the selected pair (wrapped to W bits) when enabled, and its old value when
// not. Also checks the value after reset and the one-clock latency.
module tb_fold_add_unit;
  import lpf_pkg::*;

  localparam int unsigned W = 17;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  inst_e sel = INST0;
  logic signed [W-1:0] a0 = '0, b0 = '0, a1 = '0, b1 = '0, q;
  int checks = 0, failures = 0;

  fold_add_unit #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic signed [W-1:0] exp, input string what);
    checks++;
    if (q !== exp) begin
      failures++;
      $display("FAIL %s: q=%0d expected %0d", what, q, exp);
    end
  endtask

  logic signed [W-1:0] expect_q;
  logic signed [W-1:0] q_prev;

  initial begin
    repeat (2) @(posedge clk);
    #1 check('0, "reset");
    rst_n = 1'b1;
    expect_q = '0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      a0 = W'($urandom); b0 = W'($urandom);
      a1 = W'($urandom); b1 = W'($urandom);
      sel = ($urandom % 2) ? INST1 : INST0;
      en  = ($urandom % 4) != 0;
      if (en) expect_q = (sel == INST1) ? W'(a1 + b1) : W'(a0 + b0);
      q_prev = q;
      #1 checks++;
      if (q !== q_prev) begin failures++; $display("FAIL q changed ahead of the edge"); end
      @(posedge clk); #1;
      check(expect_q, en ? "sum" : "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
