// skew_delay: fixed delay line of DELAY cycles for one packed word and its valid flag.
//
// What: used in front of the input loaders of the systolic-array accelerator. The word for
// array row r (column c) must start 8r (8c) cycles after the word for row 0 (column 0),
// because a bit stream needs eight cycles to cross one multiplier core.
// How: a chain of DELAY registers for the data and a matching chain for the valid flag.
// Interface: in_data / in_valid in, out_data / out_valid out, synchronous active-low reset
// that clears the valid chain (and the data, so nothing random is ever read).
// Timing: out = in delayed by exactly DELAY clock cycles. DELAY = 0 is a plain wire; in that
// case clk and rst_n are unused, which lint reports and which is intended (row 0 / column 0).
// Paper vs own choice: the paper's accelerator figure shows the staggered feeding of rows and
// columns; doing it with a delay line per row and column is this design's choice.
module skew_delay #(
  parameter int unsigned W     = 8,
  parameter int unsigned DELAY = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] in_data,
  input  logic         in_valid,
  output logic [W-1:0] out_data,
  output logic         out_valid
);

  if (DELAY == 0) begin : g_pass
    assign out_data  = in_data;
    assign out_valid = in_valid;
  end else begin : g_delay
    logic [W-1:0] d_q [DELAY];
    logic [DELAY-1:0] v_q;
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        for (int i = 0; i < DELAY; i++) d_q[i] <= '0;
        v_q <= '0;
      end else begin
        d_q[0] <= in_data;
        v_q[0] <= in_valid;
        for (int i = 1; i < DELAY; i++) begin
          d_q[i] <= d_q[i-1];
          v_q[i] <= v_q[i-1];
        end
      end
    end
    assign out_data  = d_q[DELAY-1];
    assign out_valid = v_q[DELAY-1];
  end

endmodule
