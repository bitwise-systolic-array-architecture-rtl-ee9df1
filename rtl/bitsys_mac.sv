// bitsys_mac: BitSys multiply-accumulator.
//
// bitsys_mul -> accu_input_converter -> accumulator. Every valid operand pair adds the sum of
// its channel products to acc, so one word pair per cycle contributes 8/w multiply-adds. clear
// zeroes the sum. Timing: acc includes an operand pair 27 cycles after it is sampled (22 for the
// multiplier, 4 for the converter, 1 for the accumulator), the computation-cycle count reported
// for the paper's MAC; acc_valid pulses in that cycle. prec/is_signed are static while operands
// are in flight: wait for the last acc_valid before switching precision.
// LOAD_A, LOAD_B and IO_REGS are handed to bitsys_mul, so the same unit serves as one cell of
// the accelerator's array (bit streams in on a_in / b_in, out on a_out / b_out for the next
// cell). Without the multiplier's input and result registers (IO_REGS = 0) an operand reaches
// acc 25 cycles after it enters a loader, or 24 after its bit 0 enters the core.
module bitsys_mac
  import bitsys_pkg::*;
#(
  parameter int unsigned ACC_W   = 32,
  parameter bit          LOAD_A  = 1'b1,
  parameter bit          LOAD_B  = 1'b1,
  parameter bit          IO_REGS = 1'b1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  prec_e                   prec,
  input  logic                    is_signed,
  input  logic                    clear,
  input  logic [N-1:0]            a,
  input  logic [N-1:0]            b,
  input  logic                    in_valid,
  input  logic [N-1:0]            a_in,
  input  logic [N-1:0]            a_in_v,
  input  logic [N-1:0]            b_in,
  input  logic [N-1:0]            b_in_v,
  output logic [N-1:0]            a_out,
  output logic [N-1:0]            a_out_v,
  output logic [N-1:0]            b_out,
  output logic [N-1:0]            b_out_v,
  output logic signed [ACC_W-1:0] acc,
  output logic                    acc_valid
);

  localparam int unsigned CW = 18;

  logic [RW-1:0]        prod;
  logic                 prod_v;
  logic signed [CW-1:0] csum;
  logic                 csum_v;

  bitsys_mul #(.LOAD_A(LOAD_A), .LOAD_B(LOAD_B), .IO_REGS(IO_REGS)) u_mul (
    .clk, .rst_n, .prec, .is_signed, .a, .b, .in_valid,
    .a_in, .a_in_v, .b_in, .b_in_v, .a_out, .a_out_v, .b_out, .b_out_v,
    .result(prod), .out_valid(prod_v)
  );

  accu_input_converter #(.OUT_W(CW)) u_conv (
    .clk, .rst_n, .prec, .is_signed, .in_bits(prod), .in_valid(prod_v),
    .sum(csum), .out_valid(csum_v)
  );

  accumulator #(.IN_W(CW), .ACC_W(ACC_W)) u_acc (
    .clk, .rst_n, .clear, .in_valid(csum_v), .in_data(csum), .acc, .acc_valid
  );

endmodule
