// tb_accu_input_converter: checks the packed-product to integer conversion.
// Random 16-bit words (not only valid products) are applied with random valids in all eight
// modes. Four cycles later the output must equal the sum of the word's 2w-bit fields, each
// read as a two's complement number in signed modes and as an unsigned number otherwise.
module tb_accu_input_converter;
  import bitsys_pkg::*;
  logic clk = 1'b0, rst_n;
  prec_e prec;
  logic is_signed;
  logic [15:0] in_bits;
  logic in_valid;
  logic signed [17:0] sum;
  logic out_valid;
  int checks = 0, failures = 0;
  localparam int S = 500;
  int E [S];
  logic V [S];

  accu_input_converter #(.OUT_W(18)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int field_sum(logic [15:0] x, int p, bit sgn);
    int fw, s;
    fw = 2 << p;
    s = 0;
    for (int c = 0; c < 16 / fw; c++) begin
      int v;
      v = int'((x >> (fw * c)) & ((1 << fw) - 1));
      if (sgn && v >= (1 << (fw - 1))) v -= (1 << fw);
      s += v;
    end
    return s;
  endfunction

  initial begin
    rst_n = 1'b0; prec = PREC_8; is_signed = 1'b0; in_bits = '0; in_valid = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < 8; m++) begin
      prec = prec_e'(m % 4); is_signed = m / 4;
      for (int n = 0; n < S; n++) begin
        @(negedge clk);
        if (n >= 4) begin
          checks++;
          if (out_valid != V[n-4] || (V[n-4] && int'(sum) != E[n-4])) begin
            failures++;
            if (failures < 10) $display("ERROR m=%0d n=%0d got %0d exp %0d", m, n, sum, E[n-4]);
          end
        end
        in_bits = 16'($urandom);
        if (n % 9 == 0) in_bits = 16'hffff;
        if (n % 9 == 1) in_bits = 16'h8080;
        in_valid = (n < S - 10) && ($urandom % 4 != 0);
        E[n] = field_sum(in_bits, m % 4, m / 4);
        V[n] = in_valid;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
