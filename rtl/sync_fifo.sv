// sync_fifo: single-clock FIFO with valid/ready handshakes on both sides.
//
// A write happens when wr_valid && wr_ready (wr_ready = not full); a read when
// rd_valid && rd_ready (rd_valid = not empty, rd_data is the head entry, shown without a
// register). Storage is an array of DEPTH words with wrapping pointers and an occupancy counter.
// Used for the layer settings, the input words and the output words of the accelerator. The
// paper names these FIFOs; depth and handshake are this design's choice.
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_valid,
  output logic         wr_ready,
  input  logic [W-1:0] wr_data,
  output logic         rd_valid,
  input  logic         rd_ready,
  output logic [W-1:0] rd_data
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   count;
  logic          do_wr, do_rd;

  assign wr_ready = (count != (AW+1)'(DEPTH));
  assign rd_valid = (count != '0);
  assign rd_data  = mem[rp];
  assign do_wr    = wr_valid && wr_ready;
  assign do_rd    = rd_valid && rd_ready;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));

endmodule
