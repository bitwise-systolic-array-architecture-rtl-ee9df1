// tb_sync_fifo: checks the FIFO against a queue model.
// A 5-deep (non power of two, to exercise pointer wrap) and a 16-deep FIFO are driven with
// random write and read handshakes in phases that favour filling and draining. Every cycle the
// ready / valid flags and the head data must match the model.
module tb_sync_fifo;
  logic clk = 1'b0, rst_n;
  int checks = 0, failures = 0;

  logic       wv, rr;
  logic [7:0] wd;
  logic       wr_a, rv_a, wr_b, rv_b;
  logic [7:0] rd_a, rd_b;
  logic [7:0] qa [$], qb [$];

  sync_fifo #(.W(8), .DEPTH(5))  u_a (.clk, .rst_n, .wr_valid(wv), .wr_ready(wr_a), .wr_data(wd),
                                      .rd_valid(rv_a), .rd_ready(rr), .rd_data(rd_a));
  sync_fifo #(.W(8), .DEPTH(16)) u_b (.clk, .rst_n, .wr_valid(wv), .wr_ready(wr_b), .wr_data(wd),
                                      .rd_valid(rv_b), .rd_ready(rr), .rd_data(rd_b));
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(string nm, int depth, logic wr, logic rv, logic [7:0] rd,
                           ref logic [7:0] q [$]);
    checks += 3;
    if (wr != (q.size() < depth)) begin failures++; $display("ERROR %s wr_ready", nm); end
    if (rv != (q.size() > 0))     begin failures++; $display("ERROR %s rd_valid", nm); end
    if (q.size() > 0 && rd != q[0]) begin failures++; $display("ERROR %s data", nm); end
  endtask

  initial begin
    rst_n = 1'b0; wv = 1'b0; rr = 1'b0; wd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 6000; n++) begin
      int bias;
      @(negedge clk);
      bias = (n / 500) % 3;
      wv = ($urandom % 4) < (bias == 0 ? 3 : (bias == 1 ? 1 : 2));
      rr = ($urandom % 4) < (bias == 0 ? 1 : (bias == 1 ? 3 : 2));
      wd = 8'($urandom);
      #1;
      check_one("d5", 5, wr_a, rv_a, rd_a, qa);
      check_one("d16", 16, wr_b, rv_b, rd_b, qb);
      @(posedge clk);
      if (rr && qa.size() > 0) void'(qa.pop_front());
      if (wv && wr_a) qa.push_back(wd);
      if (rr && qb.size() > 0) void'(qb.pop_front());
      if (wv && wr_b) qb.push_back(wd);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
