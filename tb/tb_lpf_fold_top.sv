// tb_lpf_fold_top: end-to-end test of the folded low-pass filter at its
// default parameters.
//
// A random source offers samples with random gaps (and long stretches of
// back-to-back offers); a reference model computes, for every accepted
// sample, y[n] = floor((x[n]+x[n-3])/8) + floor((x[n-1]+x[n-2])/4)
// + floor((x[n-1]+x[n-2])/8) from its own copy of the sample history. Each
// y_valid must come exactly six clocks after its acceptance and carry that
// value; y_out must not move between results. Stretches of full-scale
// samples exercise the extremes of the sum width, and a reset in mid-run
// must clear the history. Each mechanism (full-rate acceptance, refused
// offer, idle gap, output hold, full-scale input, mid-run reset) is counted
// and must occur at least once.
module tb_lpf_fold_top;
  import lpf_pkg::*;

  localparam int unsigned W = DATA_W_DEFAULT;
  localparam int unsigned LAT = 6;

  logic clk = 1'b0, rst_n = 1'b0, x_valid = 1'b0;
  logic x_ready, y_valid;
  logic signed [W-1:0] x_in = '0;
  logic signed [W:0]   y_out;

  lpf_fold_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  int n_full_rate = 0, n_refused = 0, n_gap = 0, n_hold = 0, n_fullscale = 0,
      n_reset = 0, n_results = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model
  longint hist [4];                 // x[n], x[n-1], x[n-2], x[n-3]
  longint exp_val [int];            // expected y, keyed by the cycle it is due
  int last_acc = -100;
  logic signed [W:0] y_prev;

  function automatic longint fdiv(longint a, int sh);
    return a >>> sh;                // floor division by 2**sh
  endfunction

  function automatic longint ref_y();
    longint s0 = hist[0] + hist[3];
    longint s1 = hist[1] + hist[2];
    return fdiv(s0, 3) + fdiv(s1, 2) + fdiv(s1, 3);
  endfunction

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL cycle %0d: %s", cyc, msg);
    end
  endtask

  task automatic clear_model();
    foreach (hist[k]) hist[k] = 0;
    exp_val.delete();
  endtask

  int mode;
  logic signed [W-1:0] sample;

  initial begin
    clear_model();
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    y_prev = '0;
    for (int i = 0; i < 60000; i++) begin
      // --- mid-run reset, once ---
      if (i == 30000) begin
        rst_n = 1'b0;
        #1 chk(y_out == 0 && !y_valid, "reset clears the output");
        clear_model();
        n_reset++;
        last_acc = -100;
        @(negedge clk) rst_n = 1'b1;
        cyc++;
        y_prev = '0;
      end
      // --- stimulus for this cycle ---
      mode = (i / 500) % 4;          // 0: sparse, 1: full rate, 2: random, 3: full scale
      case (mode)
        0:       x_valid = ($urandom % 5) == 0;
        1:       x_valid = 1'b1;
        default: x_valid = ($urandom % 2) == 0;
      endcase
      if (mode == 3) sample = (($urandom % 2) != 0) ? W'(-(2**(W-1))) : W'(2**(W-1) - 1);
      else           sample = W'($urandom);
      x_in = x_valid ? sample : W'($urandom);
      #1;
      // --- outputs in this cycle ---
      if (y_valid) begin
        chk(exp_val.exists(cyc), $sformatf("unexpected y_valid"));
        if (exp_val.exists(cyc)) begin
          chk(longint'(y_out) == exp_val[cyc],
              $sformatf("y_out=%0d expected %0d", y_out, exp_val[cyc]));
          exp_val.delete(cyc);
        end
        n_results++;
      end else begin
        chk(!exp_val.exists(cyc), "missing y_valid at the expected latency");
        chk(y_out == y_prev, "y_out moved without y_valid");
        if (cyc > 0) n_hold++;
      end
      y_prev = y_out;
      // --- handshake ---
      if (x_valid && !x_ready) n_refused++;
      if (!x_valid) n_gap++;
      if (x_valid && x_ready) begin
        for (int k = 3; k > 0; k--) hist[k] = hist[k-1];
        hist[0] = longint'(x_in);
        exp_val[cyc + LAT] = ref_y();
        if (cyc - last_acc == FOLD_N) n_full_rate++;
        if (mode == 3) n_fullscale++;
        last_acc = cyc;
      end
      chk(x_ready == (cyc - last_acc != 1),
          "x_ready must drop only in the cycle after an acceptance");
      @(negedge clk);
      cyc++;
    end
    // drain
    x_valid = 1'b0;
    repeat (LAT + 2) begin
      #1;
      if (y_valid && exp_val.exists(cyc)) begin
        chk(longint'(y_out) == exp_val[cyc], "y_out during drain");
        exp_val.delete(cyc);
        n_results++;
      end
      @(negedge clk);
      cyc++;
    end
    chk(exp_val.size() == 0, "results left outstanding");
    $display("results=%0d full_rate=%0d refused=%0d gaps=%0d holds=%0d fullscale=%0d resets=%0d",
             n_results, n_full_rate, n_refused, n_gap, n_hold, n_fullscale, n_reset);
    chk(n_full_rate > 0, "full-rate acceptance never happened");
    chk(n_refused > 0,   "refused offer never happened");
    chk(n_gap > 0,       "idle gap never happened");
    chk(n_hold > 0,      "output hold never happened");
    chk(n_fullscale > 0, "full-scale input never happened");
    chk(n_reset > 0,     "mid-run reset never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
