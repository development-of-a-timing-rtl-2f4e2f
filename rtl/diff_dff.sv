// diff_dff: one differential sampling flip-flop of the fully digital TDC.
//
// On the rising edge of STOP the flip-flop compares its true input D with its
// complementary input D_N and stores the result: Q becomes 1 only when the pair
// is clearly in the "1" polarity (D = 1 and D_N = 0). Both other combinations,
// including the short window in which the two inputs are equal because one of
// them has already switched and the other has not, resolve to 0.
//
// Interface: d, d_n (data pair), stop (sampling clock), q (registered output).
// Timing: q changes only on posedge stop; no reset.
//
// That the TDC uses differential flip-flops clocked by STOP, each reading one
// node of the ring and the matching node of the auxiliary chain, follows the
// published design. The resolution rule for equal inputs is this design's
// own choice (the circuit of the flip-flop is not published).
module diff_dff (
  input  logic d,
  input  logic d_n,
  input  logic stop,
  output logic q
);
  timeunit 1ps; timeprecision 1fs;

  always_ff @(posedge stop) q <= d & ~d_n;
endmodule
