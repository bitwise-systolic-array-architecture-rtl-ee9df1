// bitwise_pe: one bitwise processing element of the BitSys array.
//
// Computes the sub-partial product of one activation bit (in_0) and one weight bit (in_1).
//   TYPE_I = 1 (diagonal elements, region I): pattern=1 selects XNOR (1-bit / BNN mode, where
//            '0' means -1 and '1' means +1), pattern=0 selects AND (2/4/8-bit modes).
//   TYPE_I = 0 (regions II-IV): result = in_0 & in_1 when pattern=1, else 0 (masked out).
// result_valid = in_0_valid & in_1_valid, so that an XNOR of two empty inputs (which is 1) is
// not accumulated downstream. The element is purely combinational: six inputs (two data, two
// valids, pattern, and on an FPGA a constant 1) and two outputs, so it fits one dual-output
// six-input LUT. The placement of XNOR elements on the diagonal follows the paper's text; the
// paper's figure names the two element types the other way round.
module bitwise_pe #(
  parameter bit TYPE_I = 1'b0
) (
  input  logic in_0,
  input  logic in_1,
  input  logic in_0_valid,
  input  logic in_1_valid,
  input  logic pattern,
  output logic result,
  output logic result_valid
);

  always_comb begin
    if (TYPE_I) result = pattern ? ~(in_0 ^ in_1) : (in_0 & in_1);
    else        result = pattern & in_0 & in_1;
    result_valid = in_0_valid & in_1_valid;
  end

endmodule
