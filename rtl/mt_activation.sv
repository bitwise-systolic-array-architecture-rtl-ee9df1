// mt_activation: multi-threshold activation and re-quantisation with a single comparator.
//
// The output of a FINN-style multi-threshold activation is the number of thresholds that are
// smaller than the accumulated value; 2^b - 1 ascending thresholds give a b-bit output
// (1/3/15/255 thresholds for 1/2/4/8 bits). Instead of one comparator per threshold this unit
// has one: start latches acc and clears the count, then one threshold per cycle arrives on
// thr (thr_valid) and the count is incremented when thr < acc (signed). q holds the count and
// is final one cycle after the last threshold. The single sequential comparator follows the
// paper; the strict "<" and the start/stream interface are this design's choice.
module mt_activation #(
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic signed [ACC_W-1:0] acc,
  input  logic                    thr_valid,
  input  logic signed [ACC_W-1:0] thr,
  output logic [7:0]              q
);

  logic signed [ACC_W-1:0] acc_l;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc_l <= '0;
      q     <= '0;
    end else if (start) begin
      acc_l <= acc;
      q     <= '0;
    end else if (thr_valid && (thr < acc_l)) begin
      q <= q + 8'd1;
    end
  end

endmodule
