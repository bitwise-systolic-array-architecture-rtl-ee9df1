// tb_bitsys_mac: checks the multiply-accumulate unit in all eight modes.
// For each mode the accumulator is cleared and a random stream of operand pairs with random
// idle cycles is applied. Every accumulated value must appear exactly 27 cycles after its
// operand pair entered and must equal the running sum of all channel products so far.
module tb_bitsys_mac;
  import bitsys_pkg::*;
  import bitsys_ref_pkg::*;
  logic clk = 1'b0, rst_n;
  prec_e prec;
  logic is_signed, clear, in_valid, acc_valid;
  logic [7:0] a, b;
  logic signed [31:0] acc;
  int checks = 0, failures = 0;
  localparam int S = 1100;
  localparam int LAT = 27;
  int E [S];
  logic V [S];

  // bit-stream ports of the array cell, unused when the unit has its own loaders
  logic [7:0] a_in = '0, a_in_v = '0, b_in = '0, b_in_v = '0;
  logic [7:0] a_out, a_out_v, b_out, b_out_v;
  bitsys_mac #(.ACC_W(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; prec = PREC_8; is_signed = 1'b0; clear = 1'b0; in_valid = 1'b0;
    a = '0; b = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < 8; m++) begin
      int run;
      @(negedge clk);
      prec = prec_e'(m % 4); is_signed = m / 4; clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
      run = 0;
      for (int n = 0; n < S; n++) begin
        @(negedge clk);
        if (n >= LAT) begin
          checks++;
          if (acc_valid != V[n-LAT] || (V[n-LAT] && int'(acc) != E[n-LAT])) begin
            failures++;
            if (failures < 10)
              $display("ERROR m=%0d n=%0d got %0d/%0b exp %0d/%0b", m, n, acc, acc_valid,
                       E[n-LAT], V[n-LAT]);
          end
        end
        a = 8'($urandom); b = 8'($urandom);
        if (n % 5 == 0) begin a = 8'h80; b = 8'h80; end
        in_valid = (n < S - LAT - 2) && ($urandom % 4 != 0);
        if (in_valid) run += chan_sum(a, b, m % 4, m / 4);
        E[n] = run;
        V[n] = in_valid;
      end
      in_valid = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
