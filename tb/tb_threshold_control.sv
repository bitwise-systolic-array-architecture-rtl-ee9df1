// tb_threshold_control: checks threshold storage and the per-layer sweep.
// Random thresholds are written for every column and index. A sweep is then started for
// 1, 2, 4 and 8 output bits: exactly 2^bits - 1 valid cycles must follow, presenting index
// 0, 1, 2, ... for all columns in parallel, with the last flag on the final one only.
// Rewriting part of the table between sweeps must show up in the next sweep.
module tb_threshold_control;
  logic clk = 1'b0, rst_n;
  logic wr_en, start, thr_valid, thr_last;
  logic [2:0] wr_col;
  logic [7:0] wr_idx;
  logic signed [31:0] wr_data;
  logic [3:0] out_bits;
  logic signed [7:0][31:0] thr;
  int checks = 0, failures = 0;
  int model [8][255];

  threshold_control #(.COLS(8), .ACC_W(32), .MAX_THR(255)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_all(int frac);
    for (int c = 0; c < 8; c++)
      for (int i = 0; i < 255; i++)
        if ($urandom % frac == 0) begin
          @(negedge clk);
          wr_en = 1'b1; wr_col = 3'(c); wr_idx = 8'(i); wr_data = 32'($urandom);
          model[c][i] = wr_data;
        end
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic sweep(int ob);
    int seen;
    @(negedge clk);
    start = 1'b1; out_bits = 4'(ob);
    @(negedge clk);
    start = 1'b0;
    seen = 0;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      if (thr_valid) begin
        checks++;
        for (int c = 0; c < 8; c++)
          if (thr[c] != model[c][seen]) begin
            failures++;
            if (failures < 10) $display("ERROR ob=%0d idx=%0d col=%0d", ob, seen, c);
          end
        if (thr_last != (seen == (1 << ob) - 2)) begin
          failures++;
          $display("ERROR last flag ob=%0d idx=%0d", ob, seen);
        end
        seen++;
      end else if (thr_last) failures++;
    end
    checks++;
    if (seen != (1 << ob) - 1) begin
      failures++;
      $display("ERROR ob=%0d saw %0d thresholds", ob, seen);
    end
  endtask

  initial begin
    rst_n = 1'b0; wr_en = 1'b0; start = 1'b0; wr_col = '0; wr_idx = '0; wr_data = '0;
    out_bits = 4'd1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    write_all(1);
    sweep(1); sweep(2); sweep(4); sweep(8);
    write_all(3);
    sweep(8); sweep(4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
