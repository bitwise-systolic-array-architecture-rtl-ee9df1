// bitsys_sa_accel: BitSys systolic-array accelerator for multi-precision quantised layers.
//
// Computes one tile of a fully connected layer: ROWS input frames (rows) against COLS output
// neurons (columns). Each input word carries, for one step t, one packed 8-bit activation word
// per row and one packed 8-bit weight word per column (8/w channels of w bits). After `length`
// steps, output (r,c) = number of thresholds T_c[k] smaller than
//     sum_t sum_channels act_r(t) * wgt_c(t)
// i.e. a dot product followed by the multi-threshold activation with 2^out_bits-1 thresholds.
//
// Datapath: input FIFO -> per-row / per-column skew delay (8r / 8c cycles) -> 8 row and 8
// column input loaders -> ROWS x COLS BitSys multiplier cores, with activation bit streams
// moving right and weight bit streams moving up through the cores (each core passes them on
// after 8 cycles) -> one accumulator input converter and accumulator per core -> one
// multi-threshold activation unit per core fed by the shared threshold control -> output FIFO,
// one word (all columns of a row, with the row index) per row.
// Each array cell is a bitsys_mac (multiplier core, converter, accumulator) without the
// stand-alone input / result registers; the cells of column 0 hold the row loaders and the
// cells of row 0 the column loaders, so there are 16 loaders for the 64 multipliers.
// A control state machine reads the layer settings FIFO, reprograms precision in three
// cycles, streams the inputs (bubbles when the input FIFO is empty), drains the array, runs
// the threshold sweep and writes out.
//
// Interface: valid/ready for settings, inputs and outputs; thresholds are written directly
// (thr_we) before the tile that uses them. A tile of L steps with b-bit outputs takes about
// 3 + L + DRAIN + 2^b + ROWS cycles. The 8x8 array, 16 loaders, per-multiplier accumulators
// and activation units, FIFOs and three-cycle reconfiguration follow the paper; the tile
// mapping, word formats, skew delays and FIFO depths are this design's choice.
module bitsys_sa_accel
  import bitsys_pkg::*;
#(
  parameter int unsigned ROWS      = 8,
  parameter int unsigned COLS      = 8,
  parameter int unsigned ACC_W     = 32,
  parameter int unsigned CFG_DEPTH = 4,
  parameter int unsigned IN_DEPTH  = 16,
  parameter int unsigned OUT_DEPTH = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // layer settings
  input  logic                          cfg_valid,
  output logic                          cfg_ready,
  input  layer_cfg_t                    cfg_data,
  // input words: activations (one per row) and weights (one per column)
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic [ROWS-1:0][N-1:0]        in_act,
  input  logic [COLS-1:0][N-1:0]        in_wgt,
  // threshold writes
  input  logic                          thr_we,
  input  logic [$clog2(COLS)-1:0]       thr_col,
  input  logic [7:0]                    thr_idx,
  input  logic signed [ACC_W-1:0]       thr_data,
  // output words: one row of quantised outputs
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic [$clog2(ROWS)-1:0]       out_row,
  output logic [COLS-1:0][7:0]          out_q,
  // status
  output logic                          busy,
  output logic [31:0]                   n_stall,
  output logic [31:0]                   n_reconfig,
  output logic [31:0]                   n_outwait
);

  localparam int unsigned DRAIN_CYC = N * (ROWS + COLS - 2) + 1 + 19 + 5 + 2;
  localparam int unsigned IW        = (ROWS + COLS) * N;
  localparam int unsigned RB        = $clog2(ROWS);
  localparam int unsigned OW        = RB + COLS * 8;

  // ---------------- FIFOs ----------------
  layer_cfg_t cfg_head;
  logic       cfg_head_v, cfg_pop;
  sync_fifo #(.W($bits(layer_cfg_t)), .DEPTH(CFG_DEPTH)) u_cfg_fifo (
    .clk, .rst_n, .wr_valid(cfg_valid), .wr_ready(cfg_ready), .wr_data(cfg_data),
    .rd_valid(cfg_head_v), .rd_ready(cfg_pop), .rd_data(cfg_head)
  );

  logic [IW-1:0] in_head;
  logic          in_head_v, in_pop, feed_valid;
  sync_fifo #(.W(IW), .DEPTH(IN_DEPTH)) u_in_fifo (
    .clk, .rst_n, .wr_valid(in_valid), .wr_ready(in_ready), .wr_data({in_wgt, in_act}),
    .rd_valid(in_head_v), .rd_ready(in_pop), .rd_data(in_head)
  );

  logic [ROWS-1:0][N-1:0] feed_act;
  logic [COLS-1:0][N-1:0] feed_wgt;
  assign {feed_wgt, feed_act} = in_head;

  // ---------------- control ----------------
  prec_e             prec;
  logic              is_signed;
  logic [3:0]        out_bits;
  logic              acc_clear, act_start, thr_last, thr_valid, out_push;
  logic [RB-1:0]     row_sel;
  logic              out_fifo_ready;

  bitsys_ctrl #(.ROWS(ROWS), .DRAIN_CYC(DRAIN_CYC)) u_ctrl (
    .clk, .rst_n,
    .cfg_valid(cfg_head_v), .cfg_data(cfg_head), .cfg_pop,
    .in_valid(in_head_v), .in_pop, .feed_valid,
    .prec, .is_signed, .out_bits,
    .acc_clear, .act_start, .thr_last, .out_push, .out_ready(out_fifo_ready),
    .out_row(row_sel), .busy, .n_stall, .n_reconfig, .n_outwait
  );

  // ---------------- skew delays (the loaders sit in the edge cells) ----------------
  logic [ROWS-1:0][N-1:0] row_word;
  logic [ROWS-1:0]        row_word_v;
  logic [COLS-1:0][N-1:0] col_word;
  logic [COLS-1:0]        col_word_v;

  for (genvar r = 0; r < ROWS; r++) begin : g_row_load
    skew_delay #(.W(N), .DELAY(N * r)) u_skew (
      .clk, .rst_n, .in_data(feed_act[r]), .in_valid(feed_valid),
      .out_data(row_word[r]), .out_valid(row_word_v[r])
    );
  end

  for (genvar c = 0; c < COLS; c++) begin : g_col_load
    skew_delay #(.W(N), .DELAY(N * c)) u_skew (
      .clk, .rst_n, .in_data(feed_wgt[c]), .in_valid(feed_valid),
      .out_data(col_word[c]), .out_valid(col_word_v[c])
    );
  end

  // ---------------- threshold control ----------------
  logic signed [COLS-1:0][ACC_W-1:0] thr;
  threshold_control #(.COLS(COLS), .ACC_W(ACC_W)) u_thr (
    .clk, .rst_n, .wr_en(thr_we), .wr_col(thr_col), .wr_idx(thr_idx), .wr_data(thr_data),
    .start(act_start), .out_bits, .thr_valid, .thr_last, .thr
  );

  // ---------------- multiplier, accumulator and activation arrays ----------------
  // Cell (r,c) is a bitsys_mac without input / result registers. Cells of column 0 hold the
  // activation loader of their row and cells of row 0 the weight loader of their column (16
  // loaders in all); every other cell takes the bit streams of its left / lower neighbour.
  // a_h[r][c]: activation bits entering cell (r,c) from the left; b_v[r][c]: weight bits
  // entering cell (r,c) from below. The edge entries [r][0] and [0][c] are unused (loaders).
  logic [N-1:0] a_h  [ROWS][COLS+1];
  logic [N-1:0] a_hv [ROWS][COLS+1];
  logic [N-1:0] b_v  [ROWS+1][COLS];
  logic [N-1:0] b_vv [ROWS+1][COLS];
  logic [ROWS-1:0][COLS-1:0][7:0] q;

  for (genvar r = 0; r < ROWS; r++) begin : g_edge_r
    assign a_h[r][0]  = '0;
    assign a_hv[r][0] = '0;
  end
  for (genvar c = 0; c < COLS; c++) begin : g_edge_c
    assign b_v[0][c]  = '0;
    assign b_vv[0][c] = '0;
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      logic signed [ACC_W-1:0] acc;
      logic                    acc_v;

      bitsys_mac #(.ACC_W(ACC_W), .LOAD_A(c == 0), .LOAD_B(r == 0), .IO_REGS(1'b0)) u_mac (
        .clk, .rst_n, .prec, .is_signed, .clear(acc_clear),
        .a(row_word[r]), .b(col_word[c]), .in_valid((c == 0) ? row_word_v[r] : col_word_v[c]),
        .a_in(a_h[r][c]), .a_in_v(a_hv[r][c]), .b_in(b_v[r][c]), .b_in_v(b_vv[r][c]),
        .a_out(a_h[r][c+1]), .a_out_v(a_hv[r][c+1]), .b_out(b_v[r+1][c]), .b_out_v(b_vv[r+1][c]),
        .acc, .acc_valid(acc_v)
      );

      mt_activation #(.ACC_W(ACC_W)) u_act (
        .clk, .rst_n, .start(act_start), .acc, .thr_valid, .thr(thr[c]), .q(q[r][c])
      );

      // The activation latches acc at act_start: by then the fixed drain time must have let
      // the last product of the tile through the accumulator.
      a_drained: assert property (@(posedge clk) disable iff (!rst_n) act_start |-> !acc_v);
    end
  end

  // ---------------- output FIFO ----------------
  logic [OW-1:0] out_word;
  sync_fifo #(.W(OW), .DEPTH(OUT_DEPTH)) u_out_fifo (
    .clk, .rst_n, .wr_valid(out_push), .wr_ready(out_fifo_ready), .wr_data({row_sel, q[row_sel]}),
    .rd_valid(out_valid), .rd_ready(out_ready), .rd_data(out_word)
  );
  assign {out_row, out_q} = out_word;

endmodule
