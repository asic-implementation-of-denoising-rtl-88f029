// tb_lpf_ecg_workload: frequency-response workload for the folded low-pass
// filter, at the ECG sampling rate of 360 samples/s.
//
// The filter runs at its default width and is fed one sample every
// CLKS_PER_SAMPLE clocks, as it would be behind an ECG converter with a clock
// much faster than the sample rate. For each test tone (5 Hz inside the P/T
// band, 45 Hz at the top of the QRS band, 60 Hz mains interference and 150 Hz
// muscle/motion noise) it streams 720 samples of a sine of amplitude 20000
// and measures the output amplitude after the start-up transient by
// correlating the output with a sine and a cosine of the tone's frequency. The expected
// gain of the 1/8 (1, 3, 3, 1) filter is |cos(pi f / fs)|^3; measured and
// expected amplitude must agree within 1 % and a few codes of truncation error.
// Every output is also compared with a bit-exact reference of the shifts.
module tb_lpf_ecg_workload;
  import lpf_pkg::*;

  localparam int unsigned W = DATA_W_DEFAULT;
  localparam int unsigned CLKS_PER_SAMPLE = 8;
  localparam real FS = 360.0;
  localparam real AMP = 20000.0;
  localparam int NSAMP = 720;
  localparam real PI = 3.14159265358979;
  // amplitude window: after the transient, a whole number of periods of
  // every tone (648 samples = 9 x 72 = 81 x 8 = 108 x 6 = 54 x 12)
  localparam int WIN_START = 36;
  localparam int WIN_LEN = 648;

  logic clk = 1'b0, rst_n = 1'b0, x_valid = 1'b0;
  logic x_ready, y_valid;
  logic signed [W-1:0] x_in = '0;
  logic signed [W:0]   y_out;

  lpf_fold_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint hist [4];
  longint exp_q [$];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bit-exact reference check of every result
  always @(posedge clk) begin
    if (rst_n && y_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL unexpected result");
      end else begin
        longint e;
        e = exp_q.pop_front();
        if (longint'(y_out) != e) begin
          failures++;
          $display("FAIL y_out=%0d expected %0d", y_out, e);
        end
      end
    end
  end

  real freqs [4] = '{5.0, 45.0, 60.0, 150.0};
  real peak, acc_s, acc_c, gain_exp, amp_exp;
  longint s0, s1;

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    foreach (freqs[f]) begin
      foreach (hist[k]) hist[k] = 0;
      acc_s = 0.0;
      acc_c = 0.0;
      for (int n = 0; n < NSAMP; n++) begin
        @(negedge clk);
        x_in = W'($rtoi(AMP * $sin(2.0 * PI * freqs[f] * n / FS)));
        x_valid = 1'b1;
        @(negedge clk);                      // offered while x_ready is high
        x_valid = 1'b0;
        for (int k = 3; k > 0; k--) hist[k] = hist[k-1];
        hist[0] = longint'(x_in);
        s0 = hist[0] + hist[3];
        s1 = hist[1] + hist[2];
        exp_q.push_back((s0 >>> 3) + (s1 >>> 2) + (s1 >>> 3));
        repeat (CLKS_PER_SAMPLE - 2) @(negedge clk);
        // y_out holds the result of the previous sample by now
        if (n >= WIN_START && n < WIN_START + WIN_LEN) begin
          acc_s += $itor(y_out) * $sin(2.0 * PI * freqs[f] * n / FS);
          acc_c += $itor(y_out) * $cos(2.0 * PI * freqs[f] * n / FS);
        end
      end
      peak = 2.0 / WIN_LEN * $sqrt(acc_s * acc_s + acc_c * acc_c);
      gain_exp = $cos(PI * freqs[f] / FS);
      gain_exp = gain_exp * gain_exp * gain_exp;
      amp_exp  = AMP * gain_exp;
      checks++;
      if (peak > amp_exp * 1.01 + 4.0 || peak < amp_exp * 0.99 - 4.0) begin
        failures++;
        $display("FAIL %0.1f Hz: amplitude %0.1f expected %0.1f", freqs[f], peak, amp_exp);
      end
      $display("%6.1f Hz: gain measured %0.4f expected %0.4f", freqs[f], peak / AMP, gain_exp);
      // hold reset between tones so each starts from a clear history
      @(negedge clk) rst_n = 1'b0;
      exp_q.delete();
      @(negedge clk) rst_n = 1'b1;
    end
    checks++;
    if (exp_q.size() > 1) begin failures++; $display("FAIL results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
