// threshold_control: threshold store and sequencer for the activation array.
//
// Holds up to MAX_THR thresholds for each of COLS output neurons (columns of the array); the
// host writes them one at a time (wr_en, wr_col, wr_idx, wr_data). On start it sweeps
// k = 0 .. 2^out_bits - 2 and, one k per cycle, presents threshold k of every column on thr,
// with thr_valid; thr_last marks the last one. The first threshold is on thr two cycles after
// the cycle in which start is high (index counter, then registered memory read); a b-bit sweep
// then takes 2^b - 1 cycles. The paper only names this block; the storage and
// the interface are this design's choice.
module threshold_control #(
  parameter int unsigned COLS    = 8,
  parameter int unsigned ACC_W   = 32,
  parameter int unsigned MAX_THR = 255
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             wr_en,
  input  logic [$clog2(COLS)-1:0]          wr_col,
  input  logic [7:0]                       wr_idx,
  input  logic signed [ACC_W-1:0]          wr_data,
  input  logic                             start,
  input  logic [3:0]                       out_bits,
  output logic                             thr_valid,
  output logic                             thr_last,
  output logic signed [COLS-1:0][ACC_W-1:0] thr
);

  logic signed [ACC_W-1:0] mem [COLS][MAX_THR];
  logic [7:0] idx, last_idx;
  logic       running;

  always_ff @(posedge clk) begin
    if (wr_en && wr_idx < 8'(MAX_THR)) mem[wr_col][wr_idx] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running   <= 1'b0;
      idx       <= '0;
      last_idx  <= '0;
      thr_valid <= 1'b0;
      thr_last  <= 1'b0;
    end else begin
      thr_valid <= running;
      thr_last  <= running && (idx == last_idx);
      if (start) begin
        running  <= 1'b1;
        idx      <= '0;
        last_idx <= 8'((32'd1 << out_bits) - 2);
      end else if (running) begin
        idx <= idx + 8'd1;
        if (idx == last_idx) running <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int c = 0; c < COLS; c++) thr[c] <= mem[c][idx];
  end

endmodule
