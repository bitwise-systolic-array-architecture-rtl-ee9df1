// accu_input_converter: sums the channels of a multi-channel product for one accumulator.
//
// in_bits is the 16-bit multiplier result holding 16/(2w) channels of 2w bits. The converter
// is a tree of four shift-and-add layers (Neg. blocks in the first):
//   layer 1: t1[m] = in[2m] + (+/-)(in[2m+1] << 1)    negated when bit 2m+1 is a channel sign bit
//   layer 2: t2[m] = t1[2m] + (t1[2m+1] << 2)        shift only when channels are >= 4 bits
//   layer 3: t3[m] = t2[2m] + (t2[2m+1] << 4)        shift only when channels are >= 8 bits
//   layer 4: sum   = t3[0]  + (t3[1]    << 8)        shift only when the channel is 16 bits
// A shift is applied inside a channel and dropped between channels, so the tree weighs each bit
// by its place in its own channel and the output is the sum of all (signed) channel values.
// The Neg. blocks are enabled only in signed modes (all odd bits in 1-bit mode, bits 3/7/11/15
// in 2-bit mode, 7/15 in 4-bit mode, 15 in 8-bit mode). A register follows each layer:
// latency 4 cycles, one input per cycle. The tree, layer count and Neg. placement follow the
// paper; gating the shifts by precision and the register after the last layer are this
// design's reading of how a tree can "sum all channels".
module accu_input_converter
  import bitsys_pkg::*;
#(
  parameter int unsigned OUT_W = 18
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  prec_e                   prec,
  input  logic                    is_signed,
  input  logic [RW-1:0]           in_bits,
  input  logic                    in_valid,
  output logic signed [OUT_W-1:0] sum,
  output logic                    out_valid
);

  logic signed [OUT_W-1:0] t1 [8];
  logic signed [OUT_W-1:0] t2 [4];
  logic signed [OUT_W-1:0] t3 [2];
  logic [2:0] v;

  function automatic logic signed [OUT_W-1:0] bit_term(logic bit_in, logic neg, int unsigned sh);
    logic signed [OUT_W-1:0] x;
    x = bit_in ? (OUT_W'(1) << sh) : '0;
    return neg ? -x : x;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int m = 0; m < 8; m++) t1[m] <= '0;
      for (int m = 0; m < 4; m++) t2[m] <= '0;
      for (int m = 0; m < 2; m++) t3[m] <= '0;
      sum <= '0;
      v <= '0;
      out_valid <= 1'b0;
    end else begin
      for (int m = 0; m < 8; m++)
        t1[m] <= bit_term(in_bits[2*m], 1'b0, 0)
               + bit_term(in_bits[2*m+1], neg_enable(prec, is_signed, 2*m+1), 1);
      for (int m = 0; m < 4; m++)
        t2[m] <= t1[2*m] + ((prec >= PREC_2) ? (t1[2*m+1] <<< 2) : t1[2*m+1]);
      for (int m = 0; m < 2; m++)
        t3[m] <= t2[2*m] + ((prec >= PREC_4) ? (t2[2*m+1] <<< 4) : t2[2*m+1]);
      sum <= t3[0] + ((prec == PREC_8) ? (t3[1] <<< 8) : t3[1]);
      v <= {v[1:0], in_valid};
      out_valid <= v[2];
    end
  end

endmodule
