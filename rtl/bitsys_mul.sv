// bitsys_mul: stand-alone runtime-reconfigurable multi-precision multiplier (BitSys MUL).
//
// Multiplies two 8-bit words as 1 channel of 8 bits, 2 channels of 4 bits, 4 channels of
// 2 bits or 8 channels of 1 bit (prec), signed or unsigned (is_signed). Channel c of width w
// takes a[w*c +: w] and b[w*c +: w]; its 2w-bit product is placed at result[2*w*c +: 2*w].
// In 1-bit mode the channel product is the XNOR of the two bits (binarised networks: '0' is -1,
// '1' is +1); in signed 1-bit mode that bit is treated as a signed 1-bit value, so a match
// reads as 2'b11 and a mismatch as 2'b00, in unsigned 1-bit mode a match reads as 2'b01.
// Structure: input register, two input loaders (a along rows, b along columns), bitsys_core,
// result register. Timing: one multiplication per cycle; result/out_valid 22 cycles after
// a/b/in_valid are sampled (the computation-cycle count reported for the paper's MUL).
// prec and is_signed are static: change them only when no valid operand is in flight.
// The same module is the cell of the accelerator's multiplier array, set by three parameters
// (this tiling is this design's choice; the paper gives 16 loaders for 64 multipliers):
//   LOAD_A / LOAD_B = 1  the cell has its own loader for a / b and takes the word on a / b;
//                  = 0  it takes the skewed bit stream of its neighbour on a_in / b_in
//                       (a_in_v / b_in_v) instead, and a / b are not used.
//   IO_REGS = 0  drops the input and result registers (latency 20 with loaders, the core's 19
//                from bit 0 on a_in / b_in without).
// In every setting the bit streams leave on a_out / b_out 8 cycles after entering the core,
// for the next cell. Inputs a cell does not use (and the internal copies of a, b and in_valid)
// are left unread; lint lists them as unused in such settings (in the default setting a_in,
// b_in and their valids).
module bitsys_mul
  import bitsys_pkg::*;
#(
  parameter bit LOAD_A  = 1'b1,
  parameter bit LOAD_B  = 1'b1,
  parameter bit IO_REGS = 1'b1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  prec_e          prec,
  input  logic           is_signed,
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  input  logic           in_valid,
  input  logic [N-1:0]   a_in,
  input  logic [N-1:0]   a_in_v,
  input  logic [N-1:0]   b_in,
  input  logic [N-1:0]   b_in_v,
  output logic [N-1:0]   a_out,
  output logic [N-1:0]   a_out_v,
  output logic [N-1:0]   b_out,
  output logic [N-1:0]   b_out_v,
  output logic [2*N-1:0] result,
  output logic           out_valid
);

  logic [N-1:0]   a_w, b_w;
  logic           v_w;
  logic [N-1:0]   la, la_v, lb, lb_v;
  logic [2*N-1:0] core_res;
  logic           core_v;

  if (IO_REGS) begin : g_io_regs
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        a_w <= '0; b_w <= '0; v_w <= 1'b0;
        result <= '0; out_valid <= 1'b0;
      end else begin
        a_w <= a; b_w <= b; v_w <= in_valid;
        result <= core_res; out_valid <= core_v;
      end
    end
  end else begin : g_no_io_regs
    assign a_w = a;
    assign b_w = b;
    assign v_w = in_valid;
    assign result    = core_res;
    assign out_valid = core_v;
  end

  if (LOAD_A) begin : g_load_a
    input_loader u_load_a (
      .clk, .rst_n, .in_data(a_w), .in_valid(v_w), .out_bits(la), .out_valid(la_v)
    );
  end else begin : g_pass_a
    assign la   = a_in;
    assign la_v = a_in_v;
  end

  if (LOAD_B) begin : g_load_b
    input_loader u_load_b (
      .clk, .rst_n, .in_data(b_w), .in_valid(v_w), .out_bits(lb), .out_valid(lb_v)
    );
  end else begin : g_pass_b
    assign lb   = b_in;
    assign lb_v = b_in_v;
  end

  bitsys_core u_core (
    .clk, .rst_n, .prec, .is_signed,
    .a_in(la), .a_in_v(la_v), .b_in(lb), .b_in_v(lb_v),
    .a_out, .a_out_v, .b_out, .b_out_v,
    .result(core_res), .result_valid(core_v)
  );

endmodule
