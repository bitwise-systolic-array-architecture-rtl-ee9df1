// bitwise_systolic_array: N x N grid of bitwise processing elements.
//
// Activation bit a_i enters row i from the left and moves one element to the right per cycle;
// weight bit b_j enters column j from the bottom and moves one element up per cycle. Both
// streams are skewed by the input loaders (bit k one cycle after bit k-1), so the bits a_i and
// b_j of the same multiplication meet in element (i,j) exactly i+j cycles after bit 0 of that
// multiplication entered element (0,0): all elements on one anti-diagonal i+j=k work on the
// same multiplication in the same cycle. Each element's result and result-valid are
// registered (res, res_v: one cycle after the bits meet). The bits leave on the right and top
// edges (a_out, b_out), registered, so that grids can be chained into a larger systolic array.
// Element (i,j) is of type I (XNOR/AND) on the diagonal and type II (AND/zero) elsewhere; its
// pattern comes from the static precision input. The grid and its data directions follow the
// paper; the forwarding registers and the reset are this design's choice.
module bitwise_systolic_array
  import bitsys_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  prec_e                 prec,
  input  logic [N-1:0]          a_in,
  input  logic [N-1:0]          a_in_v,
  input  logic [N-1:0]          b_in,
  input  logic [N-1:0]          b_in_v,
  output logic [N-1:0]          a_out,
  output logic [N-1:0]          a_out_v,
  output logic [N-1:0]          b_out,
  output logic [N-1:0]          b_out_v,
  output logic [N-1:0][N-1:0]   res,     // res[i][j] = registered result of a_i with b_j
  output logic [N-1:0][N-1:0]   res_v
);

  // a_q[i][j]/b_q[i][j]: bits forwarded out of element (i,j) to the right / upwards
  logic [N-1:0][N-1:0] a_q, a_qv, b_q, b_qv;
  logic [N-1:0][N-1:0] a_at, a_atv, b_at, b_atv, pe_r, pe_v, pat;

  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      if (j == 0) begin : g_a_edge
        assign a_at[i][j]  = a_in[i];
        assign a_atv[i][j] = a_in_v[i];
      end else begin : g_a_int
        assign a_at[i][j]  = a_q[i][j-1];
        assign a_atv[i][j] = a_qv[i][j-1];
      end
      if (i == 0) begin : g_b_edge
        assign b_at[i][j]  = b_in[j];
        assign b_atv[i][j] = b_in_v[j];
      end else begin : g_b_int
        assign b_at[i][j]  = b_q[i-1][j];
        assign b_atv[i][j] = b_qv[i-1][j];
      end

      // Region I elements switch to XNOR in 1-bit mode; the others follow the channel mask
      if (i == j) begin : g_pat_diag
        assign pat[i][j] = (prec == PREC_1);
      end else begin : g_pat_off
        assign pat[i][j] = pe_pattern(prec, i, j);
      end

      bitwise_pe #(.TYPE_I(i == j)) u_pe (
        .in_0        (a_at[i][j]),
        .in_1        (b_at[i][j]),
        .in_0_valid  (a_atv[i][j]),
        .in_1_valid  (b_atv[i][j]),
        .pattern     (pat[i][j]),
        .result      (pe_r[i][j]),
        .result_valid(pe_v[i][j])
      );
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_q <= '0; a_qv <= '0; b_q <= '0; b_qv <= '0; res <= '0; res_v <= '0;
    end else begin
      a_q  <= a_at;  a_qv <= a_atv;
      b_q  <= b_at;  b_qv <= b_atv;
      res  <= pe_r;  res_v <= pe_v;
    end
  end

  for (genvar k = 0; k < N; k++) begin : g_out
    assign a_out[k]   = a_q[k][N-1];
    assign a_out_v[k] = a_qv[k][N-1];
    assign b_out[k]   = b_q[N-1][k];
    assign b_out_v[k] = b_qv[N-1][k];
  end

endmodule
