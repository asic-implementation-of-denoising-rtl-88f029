// tb_fold_ctrl: self-checking test of the folding time-slot controller.
//
// Offers samples with a random x_valid pattern and keeps, for every accepted
// sample, the cycle it was accepted in. From that list the test works out
// which unit must work in which instance in each cycle (s+1: unit 1 inst 0,
// s+2: unit 1 inst 1, s+2..s+3: r2 loads, s+3: unit 2 inst 0, s+4: unit 2
// inst 1, s+5: output switch) and compares every control output each cycle.
// It also checks that x_ready refuses a sample in the cycle after each
// acceptance, and that back-to-back acceptances every two cycles occur.
module tb_fold_ctrl;
  import lpf_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, x_valid = 1'b0;
  logic x_ready, shift, u1_en, r2_en, u2_en, out_load;
  inst_e u1_sel, u2_sel;
  int checks = 0, failures = 0;
  int cyc = 0;
  bit acc_at [int];           // cycles in which a sample was accepted
  int n_back_to_back = 0, n_refused = 0, n_accept = 0;
  int last_acc = -100;

  fold_ctrl dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL cycle %0d %s=%0b expected %0b", cyc, what, got, exp);
    end
  endtask

  function automatic bit acc(int c);
    return acc_at.exists(c);
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < 4000; i++) begin
      // drive at the falling edge, sample outputs before the rising edge
      x_valid = (i < 3500) && (($urandom % 4) != 0);
      #1;
      chk(x_ready, !acc(cyc - 1), "x_ready");
      chk(shift, x_valid && !acc(cyc - 1), "shift");
      chk(u1_en, acc(cyc - 1) || acc(cyc - 2), "u1_en");
      if (u1_en) chk(u1_sel == INST1, acc(cyc - 2), "u1_sel");
      chk(r2_en, acc(cyc - 2) || acc(cyc - 3), "r2_en");
      chk(u2_en, acc(cyc - 3) || acc(cyc - 4), "u2_en");
      if (u2_en) chk(u2_sel == INST1, acc(cyc - 4), "u2_sel");
      chk(out_load, acc(cyc - 5), "out_load");
      if (x_valid && !x_ready) n_refused++;
      if (shift) begin
        acc_at[cyc] = 1'b1;
        n_accept++;
        if (cyc - last_acc == FOLD_N) n_back_to_back++;
        last_acc = cyc;
      end
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (n_back_to_back == 0 || n_refused == 0 || n_accept < 100) begin
      failures++;
      $display("FAIL coverage: back_to_back=%0d refused=%0d accepted=%0d",
               n_back_to_back, n_refused, n_accept);
    end
    $display("accepted=%0d back_to_back=%0d refused=%0d", n_accept, n_back_to_back, n_refused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
