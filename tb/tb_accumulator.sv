// tb_accumulator: checks the running sum, clear and the valid flag against a model.
// Random signed inputs with random valids and occasional clears are applied, including long
// runs of large negative values so the 32-bit sum crosses zero in both directions.
module tb_accumulator;
  logic clk = 1'b0, rst_n;
  logic clear, in_valid, acc_valid;
  logic signed [17:0] in_data;
  logic signed [31:0] acc;
  int checks = 0, failures = 0;
  int model;
  logic model_v;

  accumulator #(.IN_W(18), .ACC_W(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; clear = 1'b0; in_valid = 1'b0; in_data = '0;
    model = 0; model_v = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      checks += 2;
      if (acc != model) begin
        failures++;
        if (failures < 10) $display("ERROR n=%0d got %0d exp %0d", n, acc, model);
      end
      if (acc_valid != model_v) failures++;
      clear    = ($urandom % 300) == 0;
      in_valid = ($urandom % 3) != 0;
      in_data  = ((n / 700) % 2) ? -18'sd131072 + 18'($urandom % 50) : 18'($urandom);
      if (clear) begin
        model = 0; model_v = 1'b0;
      end else begin
        if (in_valid) model += int'(in_data);
        model_v = in_valid;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
