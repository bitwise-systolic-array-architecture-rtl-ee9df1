// output_generator: shift-and-add pipeline that turns the partial products into the product.
//
// Stage 0 registers D_0; stage k (1..2N-2) registers  cut_{k-1}(stage k-1) + (D_k << k).
// D_k of a multiplication reaches this block k cycles after its D_0, which is exactly when the
// running sum of that multiplication reaches stage k, so a new multiplication can enter every
// cycle and 2N-1 of them are in flight. The shift of D_k is always k bits: the per-precision
// partial-product shift plus the channel offset always add up to k. Carry cutters sit after the
// stages of D_1, D_3, ..., D_13; an enabled cutter after D_k keeps bits [k:0] of the running sum
// and clears the bits above, so that the borrow of a negative channel cannot spill into the next
// channel. Cutters are enabled at every 2w-bit channel boundary (all of them in 1-bit mode,
// after D_3/7/11 in 2-bit mode, after D_7 in 4-bit mode, none in 8-bit mode). result appears
// 2N-1 cycles after D_0 (15 for N=8). The structure follows the paper; what a cutter does
// internally is this design's choice.
module output_generator
  import bitsys_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  prec_e                  prec,
  input  logic signed [DW-1:0]   d [NP],
  input  logic                   d_valid,
  output logic [2*N-1:0]         result,
  output logic                   result_valid
);

  localparam int unsigned K = NP;
  localparam int unsigned W = 2 * N;

  logic [W-1:0] s   [K];
  logic [W-1:0] cut [K];
  logic [K-1:0] v;

  always_comb begin
    for (int k = 0; k < K; k++) begin
      cut[k] = s[k];
      if ((k % 2 == 1) && cut_enable(prec, k))
        cut[k] = s[k] & W'((32'd1 << (k + 1)) - 1);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < K; k++) s[k] <= '0;
      v <= '0;
    end else begin
      s[0] <= W'(d[0]);
      for (int k = 1; k < K; k++)
        s[k] <= cut[k-1] + (W'(d[k]) << k);
      v <= {v[K-2:0], d_valid};
    end
  end

  assign result       = s[K-1];
  assign result_valid = v[K-1];

endmodule
