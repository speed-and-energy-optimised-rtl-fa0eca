// c_element: 2-input Muller C-element.
//
// The output copies the inputs when both agree (both 1 -> 1, both 0 -> 0) and keeps
// its value while they differ. The C-element is the only state-holding gate of the
// design. It is the register of a pipeline stage, it builds the completion-detector
// trees, and it synchronises signals inside the adder cells. The same element serves
// RTZ and RTO handshaking, since the element is its own dual.
//
// It is written the way the paper builds it: an AO222 gate whose output is fed back
// to two of its inputs, q = ab + aq + bq. Tools therefore report a combinational loop
// through q in every instance. That loop is the storage of the element and is
// intended. Synthesis should map it to a C-element cell or keep the AO222 feedback
// intact. The active-low reset rst_n, which forces q to RESET_VAL, is this design's
// addition so that register banks start in the spacer; instances inside the adder
// tie it high, since they settle as soon as the spacer reaches them.
//
// Timing: no clock. q changes in the same step as the inputs that cause it.
module c_element #(
  parameter logic RESET_VAL = 1'b0
) (
  input  logic a,
  input  logic b,
  input  logic rst_n,
  output logic q
);

  // AO222 with its output fed back: q = ab + aq + bq, then the reset.
  logic hold;

  assign hold = (a & b) | (a & q) | (b & q);
  assign q    = rst_n ? hold : RESET_VAL;

endmodule
