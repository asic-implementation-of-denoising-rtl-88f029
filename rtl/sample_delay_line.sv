// sample_delay_line: shift register that holds the most recent input samples.
//
// On every clock edge with `shift` high, tap[0] takes `din` and every other
// tap takes its neighbour: tap[k] then holds x[n-k], where x[n] is the sample
// just accepted. The line moves once per sample, not once per clock, so a
// delay here is one sample period of the filter, as in the unfolded filter.
// Reset clears the line, so the filter starts from an all-zero history.
//
// tap[0] is the registered input sample that the folded adder uses in its
// second time slot; taps 1..3 are the three delay elements of the filter.
// Depth and width are parameters; the shift-once-per-sample enable and the
// reset are this design's own choices.
module sample_delay_line
  import lpf_pkg::*;
#(
  parameter int unsigned W     = DATA_W_DEFAULT,
  parameter int unsigned DEPTH = N_TAPS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                shift,
  input  logic signed [W-1:0] din,
  output logic signed [W-1:0] tap [DEPTH]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < DEPTH; k++) tap[k] <= '0;
    end else if (shift) begin
      tap[0] <= din;
      for (int k = 1; k < DEPTH; k++) tap[k] <= tap[k-1];
    end
  end

endmodule
