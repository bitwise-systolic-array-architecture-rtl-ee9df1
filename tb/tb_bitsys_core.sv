// tb_bitsys_core: checks one BitSys core (array + adder tree + output generator).
// The testbench skews operand bits itself (bit k of operand s on lane k at cycle s+k) and
// expects the packed per-channel products 19 cycles after bit 0 entered, plus the forwarded
// operand bits on the right / top edges 8+k cycles after bit k entered. All eight modes.
module tb_bitsys_core;
  import bitsys_pkg::*;
  import bitsys_ref_pkg::*;
  logic clk = 1'b0, rst_n;
  prec_e prec;
  logic is_signed;
  logic [7:0] a_in, a_in_v, b_in, b_in_v, a_out, a_out_v, b_out, b_out_v;
  logic [15:0] result;
  logic result_valid;
  int checks = 0, failures = 0;
  localparam int S = 400;
  logic [7:0] A [S], B [S];
  logic V [S];

  bitsys_core dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; prec = PREC_8; is_signed = 1'b0;
    a_in = '0; b_in = '0; a_in_v = '0; b_in_v = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < 8; m++) begin
      prec = prec_e'(m % 4); is_signed = m / 4;
      for (int s = 0; s < S; s++) begin
        A[s] = 8'($urandom); B[s] = 8'($urandom); V[s] = ($urandom % 4) != 0;
        if (s % 13 == 0) A[s] = 8'h80;
        if (s % 17 == 0) B[s] = 8'h7f;
        if (s >= S - 30) V[s] = 1'b0;
      end
      for (int n = 0; n < S; n++) begin
        @(negedge clk);
        if (n >= 19) begin
          checks++;
          if (result_valid != V[n-19] ||
              (V[n-19] && result !== mul_ref(A[n-19], B[n-19], m % 4, m / 4))) begin
            failures++;
            if (failures < 10) $display("ERROR m=%0d s=%0d got %h", m, n - 19, result);
          end
        end
        for (int k = 0; k < 8; k++) begin
          if (n - 8 - k >= 0) begin
            int s;
            s = n - 8 - k;
            checks += 2;
            if (a_out_v[k] != V[s] || (V[s] && a_out[k] != A[s][k])) failures++;
            if (b_out_v[k] != V[s] || (V[s] && b_out[k] != B[s][k])) failures++;
          end
          a_in[k]   = (n - k >= 0) ? A[n-k][k] : 1'b0;
          b_in[k]   = (n - k >= 0) ? B[n-k][k] : 1'b0;
          a_in_v[k] = (n - k >= 0) ? V[n-k] : 1'b0;
          b_in_v[k] = (n - k >= 0) ? V[n-k] : 1'b0;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
