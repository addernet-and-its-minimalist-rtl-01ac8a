// adder_kernel: one AdderNet kernel, |a - b| of two signed DW-bit values.
//
// Built as the paper's "2A" kernel: two subtractors run in parallel, one
// forming a - b and one b - a, and a multiplexer picks whichever is positive,
// steered by the sign of a - b. The paper prefers this form to a
// comparator-then-subtractor kernel because its delay is shorter.
//
// Interface: a, b signed DW bits (feature and weight in the same shared
// quantisation scale); y = |a - b| as an unsigned DW-bit value, which always
// fits because two DW-bit signed numbers differ by at most 2^DW - 1.
// Timing: purely combinational.
module adder_kernel #(
  parameter int unsigned DW = 16
) (
  input  logic signed [DW-1:0] a,
  input  logic signed [DW-1:0] b,
  output logic        [DW-1:0] y
);
  logic signed [DW:0] a_minus_b;
  logic signed [DW:0] b_minus_a;

  always_comb begin
    a_minus_b = {a[DW-1], a} - {b[DW-1], b};
    b_minus_a = {b[DW-1], b} - {a[DW-1], a};  // bit DW unused: only taken when a - b < 0
    // "> 0 ?" select: the sign bit of a - b steers the multiplexer
    y = a_minus_b[DW] ? b_minus_a[DW-1:0] : a_minus_b[DW-1:0];
  end
endmodule
