// bitsys_core: one BitSys multiplier without input loaders (the "M" tile of the accelerator).
//
// Takes activation and weight bit streams already skewed by input loaders, computes every
// sub-partial product in the bitwise systolic array, sums each anti-diagonal into a signed
// partial product D_k and adds the shifted D_k in the output generator. The bit streams leave
// on a_out (right) and b_out (top) N cycles after they entered, so cores can be chained into a
// systolic array of multipliers that shares its loaders. Timing: the product appears 19 cycles
// after bit 0 of the operands is on a_in/b_in (1 array register + 3 adder-tree registers +
// 15 output-generator stages); one multiplication per cycle. prec/is_signed must be held while
// valid data is inside. The composition follows the paper; the register counts are this
// design's choice.
module bitsys_core
  import bitsys_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  prec_e          prec,
  input  logic           is_signed,
  input  logic [N-1:0]   a_in,
  input  logic [N-1:0]   a_in_v,
  input  logic [N-1:0]   b_in,
  input  logic [N-1:0]   b_in_v,
  output logic [N-1:0]   a_out,
  output logic [N-1:0]   a_out_v,
  output logic [N-1:0]   b_out,
  output logic [N-1:0]   b_out_v,
  output logic [2*N-1:0] result,
  output logic           result_valid
);

  logic [N-1:0][N-1:0]  res, res_v;
  logic signed [DW-1:0] d [NP];
  logic                 d_valid;

  bitwise_systolic_array u_array (
    .clk, .rst_n, .prec,
    .a_in, .a_in_v, .b_in, .b_in_v,
    .a_out, .a_out_v, .b_out, .b_out_v,
    .res, .res_v
  );

  partial_product_adder u_ppa (
    .clk, .rst_n, .prec, .is_signed,
    .res, .res_v, .d, .d_valid
  );

  output_generator u_ogen (
    .clk, .rst_n, .prec, .d, .d_valid, .result, .result_valid
  );

endmodule
