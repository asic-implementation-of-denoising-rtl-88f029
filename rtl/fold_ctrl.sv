// fold_ctrl: time-slot controller of the two-fold folded low-pass filter.
//
// Each accepted sample travels down a five-stage token pipeline; the stage a
// token sits in names the time slot of the schedule that the folding
// equations fix (D_F(A1->A2) = 1, D_F(A2->A3) = 0, D_F(A0->A3) = 1):
//
//   cycle s   : sample accepted; input delay line shifts (shift)
//   cycle s+1 : adder unit 1, instance 0: A1 = x[n-1] + x[n-2]
//   cycle s+2 : adder unit 1, instance 1: A0 = x[n]   + x[n-3]
//   cycle s+3 : adder unit 2, instance 0: A2 = A1>>2  + A1>>>3
//   cycle s+4 : adder unit 2, instance 1: A3 = A2     + A0>>>3
//   cycle s+5 : instance 2: output switch closes, y_out takes A3
//
// The register between the two adder units (r2) loads in cycles s+2 and s+3,
// which gives A1 and A0 the one extra delay each that the folding equations
// ask for. A new sample can be accepted every FOLD_N = 2 cycles: x_ready is
// low in the cycle after an acceptance, when adder unit 1 is still needed for
// instance 1 of the previous sample. Back-to-back samples overlap: while
// unit 2 finishes sample n, unit 1 already works on sample n+1.
//
// The slot order follows the folding sets S1 = {A1, A0}, S2 = {A2, A3}; the
// valid/ready handshake and the token pipeline are this design's own choices.
module fold_ctrl
  import lpf_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  x_valid,
  output logic  x_ready,
  output logic  shift,     // accept the sample: shift the input delay line
  output logic  u1_en,     // adder unit 1 works this cycle
  output inst_e u1_sel,    // ... in this instance
  output logic  r2_en,     // register between the units loads
  output logic  u2_en,     // adder unit 2 works this cycle
  output inst_e u2_sel,    // ... in this instance
  output logic  out_load   // instance 2: output switch closes
);

  // tok[k] is high k+1 cycles after an acceptance.
  logic [4:0] tok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tok <= '0;
    else        tok <= {tok[3:0], shift};
  end

  always_comb begin
    x_ready  = !tok[0];
    shift    = x_valid && x_ready;
    u1_en    = tok[0] || tok[1];
    u1_sel   = tok[1] ? INST1 : INST0;
    r2_en    = tok[1] || tok[2];
    u2_en    = tok[2] || tok[3];
    u2_sel   = tok[3] ? INST1 : INST0;
    out_load = tok[4];
  end

  // Each folded unit serves at most one instance per cycle.
  a_unit1_single : assert property (@(posedge clk) disable iff (!rst_n)
                                    !(tok[0] && tok[1]));
  a_unit2_single : assert property (@(posedge clk) disable iff (!rst_n)
                                    !(tok[2] && tok[3]));

endmodule
