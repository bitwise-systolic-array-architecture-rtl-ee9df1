// partial_product_adder: forms the signed partial products D_k of the BitSys multiplier.
//
// D_k is the sum of the registered element results on anti-diagonal i+j=k of the bitwise
// array, each counted only when its result-valid is set, and added or subtracted according to
// the sign-bit map of the current precision (pe_subtract in bitsys_pkg). Because all elements of
// one anti-diagonal hold the same multiplication in the same cycle, D_k of one multiplication
// leaves k cycles after its D_0. Each diagonal (at most N terms, |D_k| <= N) is summed by a
// three-level binary adder tree with a register after every level: latency 3 cycles, one new
// set of partial products per cycle. d_valid is the valid of element (0,0), delayed alongside,
// and marks the cycle in which D_0 of a multiplication is on the output. The signed sum per
// diagonal follows the paper; the tree and its registers are this design's choice.
module partial_product_adder
  import bitsys_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  prec_e                     prec,
  input  logic                      is_signed,
  input  logic [N-1:0][N-1:0]       res,
  input  logic [N-1:0][N-1:0]       res_v,
  output logic signed [DW-1:0]      d [NP],
  output logic                      d_valid
);

  localparam int unsigned K = NP;
  localparam int unsigned L = 8;          // tree leaves per diagonal (N <= 8)

  logic signed [DW-1:0] leaf [K][L];
  logic signed [DW-1:0] l1 [K][L/2];
  logic signed [DW-1:0] l2 [K][L/4];
  logic [2:0] v_pipe;

  // Leaf k,s holds the signed contribution of element (i, k-i), i = s + max(0, k-N+1)
  always_comb begin
    for (int k = 0; k < K; k++) begin
      for (int s = 0; s < L; s++) begin
        int i, j;
        i = s + ((k > N - 1) ? (k - (N - 1)) : 0);
        j = k - i;
        leaf[k][s] = '0;
        if (i < N && j >= 0 && j < N) begin
          if (res[i][j] && res_v[i][j])
            leaf[k][s] = pe_subtract(prec, is_signed, i, j) ? -DW'(1) : DW'(1);
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < K; k++) begin
        for (int s = 0; s < L/2; s++) l1[k][s] <= '0;
        for (int s = 0; s < L/4; s++) l2[k][s] <= '0;
        d[k] <= '0;
      end
      v_pipe <= '0;
    end else begin
      for (int k = 0; k < K; k++) begin
        for (int s = 0; s < L/2; s++) l1[k][s] <= leaf[k][2*s] + leaf[k][2*s+1];
        for (int s = 0; s < L/4; s++) l2[k][s] <= l1[k][2*s] + l1[k][2*s+1];
        d[k] <= l2[k][0] + l2[k][1];
      end
      v_pipe <= {v_pipe[1:0], res_v[0][0]};
    end
  end

  assign d_valid = v_pipe[2];

endmodule
