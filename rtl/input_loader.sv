// input_loader: bit-skewing loader that feeds one edge of the bitwise systolic array.
//
// An N-row by N-bit shift buffer. Each cycle every row moves one place towards row 0 and a new
// operand (if in_valid) is written along the diagonal: bit r into row r, column r. Row 0 is the
// loader output, so bit k of an operand written at clock edge t is on out_bits[k] during the
// k-th cycle after that edge - the staircase the systolic array needs, with a new operand
// accepted every cycle. A valid flag per bit travels with each bit. Timing: bit 0 appears one
// cycle after the operand is presented, bit N-1 N cycles after. Synchronous active-low reset.
// The diagonal write and upward shift follow the paper; the per-bit valid flags and the reset
// are this design's choice.
module input_loader #(
  parameter int unsigned N = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] in_data,
  input  logic         in_valid,
  output logic [N-1:0] out_bits,
  output logic [N-1:0] out_valid
);

  logic [N-1:0] row_d [N];   // row_d[r][k]: data bit in column k of row r
  logic [N-1:0] row_v [N];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int r = 0; r < N; r++) begin
        row_d[r] <= '0;
        row_v[r] <= '0;
      end
    end else begin
      for (int r = 0; r < N; r++) begin
        for (int k = 0; k < N; k++) begin
          if (k == r) begin
            row_d[r][k] <= in_valid & in_data[k];
            row_v[r][k] <= in_valid;
          end else if (r + 1 < N) begin
            row_d[r][k] <= row_d[r+1][k];
            row_v[r][k] <= row_v[r+1][k];
          end else begin
            row_d[r][k] <= 1'b0;
            row_v[r][k] <= 1'b0;
          end
        end
      end
    end
  end

  assign out_bits  = row_d[0];
  assign out_valid = row_v[0];

endmodule
