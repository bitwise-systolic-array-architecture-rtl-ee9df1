// tb_skew_delay: checks the delay line at 0, 1 and 13 cycles of delay.
// A random word stream with random valids is applied; each instance must reproduce it,
// including the valid flag and the cleared state after reset, exactly DELAY cycles later.
module tb_skew_delay;
  logic clk = 1'b0, rst_n;
  logic [7:0] in_data, o0, o1, o13;
  logic in_valid, v0, v1, v13;
  int checks = 0, failures = 0;
  logic [7:0] hd [2000];
  logic hv [2000];

  skew_delay #(.W(8), .DELAY(0))  u_d0  (.clk, .rst_n, .in_data, .in_valid, .out_data(o0),  .out_valid(v0));
  skew_delay #(.W(8), .DELAY(1))  u_d1  (.clk, .rst_n, .in_data, .in_valid, .out_data(o1),  .out_valid(v1));
  skew_delay #(.W(8), .DELAY(13)) u_d13 (.clk, .rst_n, .in_data, .in_valid, .out_data(o13), .out_valid(v13));
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_d(int n, int dly, logic [7:0] o, logic v);
    checks++;
    if (n - dly < 0) begin
      if (v) failures++;
    end else if (v != hv[n-dly] || (hv[n-dly] && o != hd[n-dly])) begin
      failures++;
      if (failures < 10) $display("ERROR delay %0d at %0d", dly, n);
    end
  endtask

  initial begin
    rst_n = 1'b0; in_data = '0; in_valid = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      hd[n] = 8'($urandom); hv[n] = ($urandom % 3) != 0;
      in_data = hd[n]; in_valid = hv[n];
      #1;
      check_d(n, 0, o0, v0);
      check_d(n, 1, o1, v1);
      check_d(n, 13, o13, v13);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
