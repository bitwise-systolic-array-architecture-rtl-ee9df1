// tb_bitwise_systolic_array: checks data movement and element results of the 8x8 bitwise array.
// The testbench skews the operand bits itself (bit k of operand s on input k at cycle s+k), so
// element (i,j) must present, one cycle after the bits meet, AND / XNOR / 0 of a_i and b_j as
// the precision mask says, and the right / top outputs must carry bit i of operand s at cycle
// s+i+8. All four precisions are run.
module tb_bitwise_systolic_array;
  import bitsys_pkg::*;
  logic clk = 1'b0, rst_n;
  prec_e prec;
  logic [7:0] a_in, a_in_v, b_in, b_in_v, a_out, a_out_v, b_out, b_out_v;
  logic [7:0][7:0] res, res_v;
  int checks = 0, failures = 0;
  localparam int S = 300;
  logic [7:0] A [S], B [S];
  logic       V [S];

  bitwise_systolic_array dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic expect_pe(int p, logic a, logic b, int i, int j);
    int w;
    w = 1 << p;
    if (i == j && p == 0) return a ~^ b;
    if (i / w == j / w) return a & b;
    return 1'b0;
  endfunction

  initial begin
    rst_n = 1'b0; a_in = '0; b_in = '0; a_in_v = '0; b_in_v = '0; prec = PREC_8;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < 4; p++) begin
      prec = prec_e'(p);
      for (int s = 0; s < S; s++) begin
        A[s] = 8'($urandom); B[s] = 8'($urandom); V[s] = ($urandom % 5) != 0;
        if (s >= S - 30) V[s] = 1'b0;
      end
      for (int n = 0; n < S; n++) begin
        @(negedge clk);
        if (n > 0) begin
          for (int i = 0; i < 8; i++) begin
            for (int j = 0; j < 8; j++) begin
              int s;
              s = n - 1 - i - j;
              if (s >= 0) begin
                checks++;
                if (res_v[i][j] != V[s] ||
                    (V[s] && res[i][j] != expect_pe(p, A[s][i], B[s][j], i, j))) begin
                  failures++;
                  if (failures < 10) $display("ERROR p=%0d n=%0d pe(%0d,%0d)", p, n, i, j);
                end
              end
            end
            if (n - 1 - i - 7 >= 0) begin
              int s;
              s = n - 1 - i - 7;
              checks += 2;
              if (a_out_v[i] != V[s] || (V[s] && a_out[i] != A[s][i])) failures++;
              if (b_out_v[i] != V[s] || (V[s] && b_out[i] != B[s][i])) failures++;
            end
          end
        end
        for (int k = 0; k < 8; k++) begin
          int s;
          s = n - k;
          a_in[k]   = (s >= 0) ? A[s][k] : 1'b0;
          b_in[k]   = (s >= 0) ? B[s][k] : 1'b0;
          a_in_v[k] = (s >= 0) ? V[s] : 1'b0;
          b_in_v[k] = (s >= 0) ? V[s] : 1'b0;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
