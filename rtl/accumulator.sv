// accumulator: signed running sum behind one accumulator input converter.
//
// clear zeroes the sum (and takes priority over an input in the same cycle); every cycle with
// in_valid adds the sign-extended in_data. The new sum is visible one cycle after the input;
// acc_valid pulses in that cycle. The paper only names this block; width and clear are this
// design's choice.
module accumulator #(
  parameter int unsigned IN_W  = 18,
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_data,
  output logic signed [ACC_W-1:0] acc,
  output logic                    acc_valid
);

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      acc       <= '0;
      acc_valid <= 1'b0;
    end else begin
      if (in_valid) acc <= acc + ACC_W'(in_data);
      acc_valid <= in_valid;
    end
  end

endmodule
