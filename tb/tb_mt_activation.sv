// tb_mt_activation: checks the multi-threshold activation.
// For random accumulator values and random ascending threshold lists (1, 3, 15 or 255
// entries, streamed with random gaps) the output level must equal the number of thresholds
// strictly below the accumulator. Ties, negative values and extreme values are included.
module tb_mt_activation;
  logic clk = 1'b0, rst_n;
  logic start, thr_valid;
  logic signed [31:0] acc, thr;
  logic [7:0] q;
  int checks = 0, failures = 0;

  mt_activation #(.ACC_W(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; start = 1'b0; thr_valid = 1'b0; acc = '0; thr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 400; t++) begin
      int nthr, expq, base;
      int tl [];
      nthr = (1 << (1 << (t % 4))) - 1;
      tl = new[nthr];
      base = $signed($urandom % 2000) - 1000;
      for (int k = 0; k < nthr; k++) begin
        base += $urandom % 20;
        tl[k] = base;
      end
      @(negedge clk);
      start = 1'b1;
      acc = (t % 3 == 0) ? tl[$urandom % nthr] : $signed($urandom % 4000) - 2000;
      if (t == 7) acc = 32'sh7fffffff;
      if (t == 8) acc = 32'sh80000000;
      expq = 0;
      for (int k = 0; k < nthr; k++) if (tl[k] < acc) expq++;
      @(negedge clk);
      start = 1'b0;
      acc = 32'($urandom);   // the level must use the value captured at start
      for (int k = 0; k < nthr; k++) begin
        while ($urandom % 4 == 0) begin
          thr_valid = 1'b0; thr = 32'($urandom);
          @(negedge clk);
        end
        thr_valid = 1'b1; thr = tl[k];
        @(negedge clk);
      end
      thr_valid = 1'b0;
      @(negedge clk);
      checks++;
      if (q != 8'(expq)) begin
        failures++;
        if (failures < 10) $display("ERROR t=%0d got %0d exp %0d", t, q, expq);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
