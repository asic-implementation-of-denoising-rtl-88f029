// tb_sample_delay_line: self-checking test of the input delay line.
//
// Shifts random samples in with a random shift enable and compares every tap
// with a queue-based model of the last DEPTH shifted-in samples (zeros after
// reset). Cycles without `shift` must leave every tap unchanged.
module tb_sample_delay_line;
  import lpf_pkg::*;

  localparam int unsigned W = 16, DEPTH = 4;

  logic clk = 1'b0, rst_n = 1'b0, shift = 1'b0;
  logic signed [W-1:0] din = '0;
  logic signed [W-1:0] tap [DEPTH];
  int checks = 0, failures = 0;
  logic signed [W-1:0] model [DEPTH];

  sample_delay_line #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(input string what);
    for (int k = 0; k < DEPTH; k++) begin
      checks++;
      if (tap[k] !== model[k]) begin
        failures++;
        $display("FAIL %s tap[%0d]=%0d expected %0d", what, k, tap[k], model[k]);
      end
    end
  endtask

  initial begin
    for (int k = 0; k < DEPTH; k++) model[k] = '0;
    repeat (2) @(posedge clk);
    #1 compare("reset");
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      din   = W'($urandom);
      shift = ($urandom % 3) != 0;
      if (shift) begin
        for (int k = DEPTH - 1; k > 0; k--) model[k] = model[k-1];
        model[0] = din;
      end
      @(posedge clk); #1;
      compare(shift ? "shift" : "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
