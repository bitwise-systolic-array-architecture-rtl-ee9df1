// tb_partial_product_adder: checks the signed anti-diagonal sums D_k.
// Random element results (zero outside each channel's block, as the array delivers them) and
// valids are applied each cycle in all eight modes; three cycles
// later every D_k must equal the sum over i+j=k of the valid results, where the testbench
// negates a term when, in a signed mode, exactly one of a_i, b_j is its channel's sign bit, or
// (1-bit signed) the term lies on the diagonal.
module tb_partial_product_adder;
  import bitsys_pkg::*;
  logic clk = 1'b0, rst_n;
  prec_e prec;
  logic is_signed;
  logic [7:0][7:0] res, res_v;
  logic signed [4:0] d [15];
  logic d_valid;
  int checks = 0, failures = 0;
  int expd [203][15];
  logic expv [203];

  partial_product_adder dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit neg_term(int p, bit sgn, int i, int j);
    int w;
    bit msb_i, msb_j;
    w = 1 << p;
    if (!sgn || (i / w != j / w)) return 0;
    if (w == 1) return 1;
    msb_i = (i % w) == w - 1;
    msb_j = (j % w) == w - 1;
    return msb_i != msb_j;
  endfunction

  initial begin
    rst_n = 1'b0; res = '0; res_v = '0; prec = PREC_8; is_signed = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < 8; m++) begin
      prec = prec_e'(m % 4); is_signed = m / 4;
      for (int n = 0; n < 200 + 3; n++) begin
        @(negedge clk);
        if (n >= 3) begin
          checks++;
          if (d_valid != expv[n-3]) failures++;
          for (int k = 0; k < 15; k++) begin
            checks++;
            if (int'(d[k]) != expd[n-3][k]) begin
              failures++;
              if (failures < 10)
                $display("ERROR m=%0d n=%0d k=%0d got %0d exp %0d", m, n, k, d[k], expd[n-3][k]);
            end
          end
        end
        // the array only produces ones inside a channel's block, so mask the same way
        for (int i = 0; i < 8; i++) begin
          res[i] = 8'($urandom);
          res_v[i] = 8'($urandom | $urandom);
          for (int j = 0; j < 8; j++)
            if (i / (1 << (m % 4)) != j / (1 << (m % 4))) res[i][j] = 1'b0;
        end
        for (int k = 0; k < 15; k++) expd[n][k] = 0;
        for (int i = 0; i < 8; i++)
          for (int j = 0; j < 8; j++)
            if (res[i][j] && res_v[i][j])
              expd[n][i+j] += neg_term(m % 4, m / 4, i, j) ? -1 : 1;
        expv[n] = res_v[0][0];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
