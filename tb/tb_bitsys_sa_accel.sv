// tb_bitsys_sa_accel: end-to-end test of the 8x8 BitSys systolic-array accelerator at its
// default size.
//
// Runs a sequence of tiles. The first four have the shape of one 8-frame x 8-neuron tile of
// each layer of a 784-64-64-64-10 MLP quantised 1/2/4/8 bits (signed): 98, 16, 32 and 64
// packed words (784/8, 64/4, 64/2, 64/1), with 2, 4, 8 and 8 output bits. Four more tiles use
// unsigned 1/2/4/8-bit modes. For every tile the testbench draws random packed activations and
// weights, computes each dot product channel by channel with the reference model, draws
// 2^b - 1 ascending thresholds per column around the column's values and expects the count of
// thresholds below each dot product. Inputs are offered with random gaps (so the array is fed
// bubbles) and outputs are taken with random back-pressure. It counts, and requires, each
// mechanism: input bubbles, output-FIFO back-pressure, precision reconfiguration, every
// precision, signed and unsigned operation, and both a 1-bit (XNOR) and an 8-bit output sweep.
module tb_bitsys_sa_accel;
  import bitsys_pkg::*;
  import bitsys_ref_pkg::*;

  localparam int R = 8, C = 8, MAXL = 128;

  logic clk = 1'b0;
  logic rst_n;
  logic cfg_valid, cfg_ready;
  layer_cfg_t cfg_data;
  logic in_valid, in_ready;
  logic [R-1:0][7:0] in_act;
  logic [C-1:0][7:0] in_wgt;
  logic thr_we;
  logic [2:0] thr_col;
  logic [7:0] thr_idx;
  logic signed [31:0] thr_data;
  logic out_valid, out_ready;
  logic [2:0] out_row;
  logic [C-1:0][7:0] out_q;
  logic busy;
  logic [31:0] n_stall, n_reconfig, n_outwait;

  bitsys_sa_accel dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int seen_prec [4];
  int seen_signed [2];
  int seen_ob1 = 0, seen_ob8 = 0;

  logic [7:0] act [R][MAXL];
  logic [7:0] wgt [C][MAXL];
  int         dot [R][C];
  int         thr [C][255];
  int         expq [R][C];

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Random back-pressure on the output side
  always @(posedge clk) out_ready <= ($urandom % 4) == 0;

  task automatic run_tile(int p, bit sgn, int ob, int len);
    int nthr, gap;
    nthr = (1 << ob) - 1;
    // operands and reference dot products
    for (int t = 0; t < len; t++) begin
      for (int r = 0; r < R; r++) act[r][t] = 8'($urandom);
      for (int c = 0; c < C; c++) wgt[c][t] = 8'($urandom);
    end
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        dot[r][c] = 0;
        for (int t = 0; t < len; t++) dot[r][c] += chan_sum(act[r][t], wgt[c][t], p, sgn);
      end
    // ascending thresholds per column spanning the column's range
    for (int c = 0; c < C; c++) begin
      int lo, hi;
      lo = dot[0][c]; hi = dot[0][c];
      for (int r = 1; r < R; r++) begin
        if (dot[r][c] < lo) lo = dot[r][c];
        if (dot[r][c] > hi) hi = dot[r][c];
      end
      lo -= 2; hi += 2;
      for (int k = 0; k < nthr; k++) begin
        thr[c][k] = lo + ((hi - lo) * k) / nthr + int'($urandom % 2);
        if (k > 0 && thr[c][k] < thr[c][k-1]) thr[c][k] = thr[c][k-1];
      end
      for (int r = 0; r < R; r++) begin
        expq[r][c] = 0;
        for (int k = 0; k < nthr; k++) if (thr[c][k] < dot[r][c]) expq[r][c]++;
      end
    end
    // thresholds
    for (int c = 0; c < C; c++)
      for (int k = 0; k < nthr; k++) begin
        thr_we <= 1'b1; thr_col <= 3'(c); thr_idx <= 8'(k); thr_data <= thr[c][k];
        @(posedge clk);
      end
    thr_we <= 1'b0;
    // layer setting
    cfg_data <= '{prec: prec_e'(p), is_signed: sgn, out_bits: 4'(ob), length: 16'(len)};
    cfg_valid <= 1'b1;
    @(posedge clk);
    while (!cfg_ready) @(posedge clk);
    cfg_valid <= 1'b0;
    // inputs with random gaps
    for (int t = 0; t < len; t++) begin
      gap = (($urandom % 4) == 0) ? int'($urandom % 3) + 1 : 0;
      if (gap > 0) begin
        in_valid <= 1'b0;
        repeat (gap) @(posedge clk);
      end
      for (int r = 0; r < R; r++) in_act[r] <= act[r][t];
      for (int c = 0; c < C; c++) in_wgt[c] <= wgt[c][t];
      in_valid <= 1'b1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    in_valid <= 1'b0;
    // outputs
    for (int n = 0; n < R; n++) begin
      @(posedge clk);
      while (!(out_valid && out_ready)) @(posedge clk);
      for (int c = 0; c < C; c++) begin
        checks++;
        if (out_q[c] != 8'(expq[out_row][c])) begin
          failures++;
          if (failures < 10)
            $display("ERROR p=%0d s=%0d ob=%0d row %0d col %0d: q=%0d exp %0d (dot %0d)",
                     p, sgn, ob, out_row, c, out_q[c], expq[out_row][c], dot[out_row][c]);
        end
      end
      checks++;
      if (out_row != 3'(n)) begin
        failures++;
        $display("ERROR: output row %0d, expected %0d", out_row, n);
      end
    end
    seen_prec[p]++;
    seen_signed[sgn]++;
    if (ob == 1) seen_ob1++;
    if (ob == 8) seen_ob8++;
    $display("tile prec=%0d-bit signed=%0d out_bits=%0d length=%0d done at %0t",
             1 << p, sgn, ob, len, $time);
  endtask

  initial begin
    rst_n = 1'b0;
    cfg_valid = 1'b0; in_valid = 1'b0; thr_we = 1'b0;
    cfg_data = '0; in_act = '0; in_wgt = '0; thr_col = '0; thr_idx = '0; thr_data = '0;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // one tile per layer of a 1/2/4/8-bit MLP (784-64-64-64-10)
    run_tile(0, 1'b1, 2, 98);
    run_tile(1, 1'b1, 4, 16);
    run_tile(2, 1'b1, 8, 32);
    run_tile(3, 1'b1, 8, 64);
    // unsigned modes, short tiles
    run_tile(3, 1'b0, 1, 9);
    run_tile(2, 1'b0, 4, 12);
    run_tile(1, 1'b0, 2, 7);
    run_tile(0, 1'b0, 1, 20);
    repeat (10) @(posedge clk);
    $display("events: stalls=%0d reconfigs=%0d outwaits=%0d", n_stall, n_reconfig, n_outwait);
    checks++; if (n_stall == 0)    begin failures++; $display("ERROR: no input bubble"); end
    checks++; if (n_outwait == 0)  begin failures++; $display("ERROR: no output back-pressure"); end
    checks++; if (n_reconfig < 7)  begin failures++; $display("ERROR: reconfigs %0d", n_reconfig); end
    for (int p = 0; p < 4; p++) begin
      checks++;
      if (seen_prec[p] == 0) begin failures++; $display("ERROR: precision %0d unused", p); end
    end
    checks++; if (seen_signed[0] == 0 || seen_signed[1] == 0) failures++;
    checks++; if (seen_ob1 == 0 || seen_ob8 == 0) failures++;
    checks++; if (busy) begin failures++; $display("ERROR: still busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
