// lpf_fold_top: folded low-pass filter for ECG denoising (top level).
//
// Function: y[n] = ((x[n]+x[n-3]) >>> 3) + ((x[n-1]+x[n-2]) >> 2)
//                + ((x[n-1]+x[n-2]) >>> 3),
// the 1/8 (1, 3, 3, 1) quadratic-spline low-pass filter of a dyadic wavelet
// filter bank, written with shifts so that no multiplier is needed. All
// shifts are arithmetic: samples are two's-complement.
//
// Structure (folding factor 2): the four additions of the filter, A1 and A0
// on the sums of input pairs and A2, A3 on the shifted sums, share two
// adder-delay units. Unit 1 computes A1 in instance 0 and A0 in instance 1;
// its result passes through one register (r2) and the fixed shifts into
// unit 2, which computes A2 in instance 0 and A3 = A2 + (A0>>>3) in instance
// 1, feeding its own output back. In instance 2 an output switch copies the
// finished sample into y_out, which holds it until the next one. Input
// samples sit in a four-register delay line that shifts once per sample
// (tap 0 is the accepted sample x[n], taps 1..3 are x[n-1]..x[n-3]).
//
// Interface and timing: a sample on x_in is accepted in a cycle with x_valid
// and x_ready high. x_ready drops for one cycle after each acceptance, so the
// filter takes at most one sample every two clocks. y_valid pulses for one
// cycle, six clocks after the acceptance, with y_out = y[n]; y_out then holds.
// Reset (rst_n low, asynchronous) clears the history to zero.
//
// The data path (operand pairs of each instance, shift amounts, one register
// between the units, feedback of unit 2, switch at instance 2) follows the
// folded architecture. This design's own choices: the 16-bit sample width,
// DATA_W+1-bit sums (wide enough for every sum, so nothing wraps), sharing the
// x[n-1] register between both adder inputs, the valid/ready handshake, the
// registered input sample and the held output register.
module lpf_fold_top
  import lpf_pkg::*;
#(
  parameter int unsigned DATA_W = DATA_W_DEFAULT
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   x_valid,
  output logic                   x_ready,
  input  logic signed [DATA_W-1:0] x_in,
  output logic                   y_valid,
  output logic signed [DATA_W:0]   y_out
);

  localparam int unsigned SW = DATA_W + 1;   // width of every sum

  // ---------------- control ----------------
  logic  shift, u1_en, r2_en, u2_en, out_load;
  inst_e u1_sel, u2_sel;

  fold_ctrl u_ctrl (
    .clk, .rst_n, .x_valid, .x_ready,
    .shift, .u1_en, .u1_sel, .r2_en, .u2_en, .u2_sel, .out_load
  );

  // ---------------- input delay line ----------------
  logic signed [DATA_W-1:0] tap [N_TAPS];

  sample_delay_line #(.W(DATA_W), .DEPTH(N_TAPS)) u_line (
    .clk, .rst_n, .shift, .din(x_in), .tap
  );

  // ---------------- adder unit 1: S1 = {A1, A0} ----------------
  logic signed [SW-1:0] u1_q;

  fold_add_unit #(.W(SW)) u_add1 (
    .clk, .rst_n, .en(u1_en), .sel(u1_sel),
    .a0(SW'(tap[1])),   // instance 0: x[n-1]
    .b0(SW'(tap[2])),   //             x[n-2]
    .a1(SW'(tap[0])),   // instance 1: x[n]
    .b1(SW'(tap[3])),   //             x[n-3]
    .q (u1_q)
  );

  // ---------------- register between the units ----------------
  logic signed [SW-1:0] r2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     r2 <= '0;
    else if (r2_en) r2 <= u1_q;
  end

  // Fixed scaling branches (wiring only).
  logic signed [SW-1:0] r2_sh2, r2_sh3;
  assign r2_sh2 = r2 >>> SH_QUARTER;
  assign r2_sh3 = r2 >>> SH_EIGHTH;

  // ---------------- adder unit 2: S2 = {A2, A3} ----------------
  logic signed [SW-1:0] u2_q;

  fold_add_unit #(.W(SW)) u_add2 (
    .clk, .rst_n, .en(u2_en), .sel(u2_sel),
    .a0(r2_sh2),        // instance 0: A1 >> 2
    .b0(r2_sh3),        //             A1 >>> 3
    .a1(r2_sh3),        // instance 1: A0 >>> 3
    .b1(u2_q),          //             A2 (own output)
    .q (u2_q)
  );

  // ---------------- output switch (instance 2) ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_out   <= '0;
      y_valid <= 1'b0;
    end else begin
      y_valid <= out_load;
      if (out_load) y_out <= u2_q;
    end
  end

endmodule
