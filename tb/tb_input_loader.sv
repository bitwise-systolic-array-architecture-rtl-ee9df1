// tb_input_loader: checks the bit skew of the input loader.
// A random stream of operands (with random idle cycles) is written; bit k of the operand
// written at cycle s must appear on out_bits[k] with its valid flag during cycle s+1+k, and
// idle cycles must show cleared bits and valids.
module tb_input_loader;
  logic clk = 1'b0, rst_n;
  logic [7:0] in_data, out_bits, out_valid;
  logic in_valid;
  int checks = 0, failures = 0;
  logic [7:0] hist_d [1000];
  logic       hist_v [1000];

  input_loader #(.N(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      // outputs now reflect n posedges since the first drive
      if (n >= 1) begin
        for (int k = 0; k < 8; k++) begin
          int s;
          s = n - 1 - k;
          checks++;
          if (s >= 0) begin
            if (out_valid[k] != hist_v[s] || out_bits[k] != (hist_v[s] & hist_d[s][k])) begin
              failures++;
              if (failures < 10) $display("ERROR n=%0d bit %0d", n, k);
            end
          end else if (out_valid[k]) failures++;
        end
      end
      hist_d[n] = 8'($urandom);
      hist_v[n] = ($urandom % 4) != 0;
      in_data   = hist_d[n];
      in_valid  = hist_v[n];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
