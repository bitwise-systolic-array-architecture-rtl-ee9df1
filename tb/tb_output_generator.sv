// tb_output_generator: checks the shift-add chain with carry cutters.
// For random operand pairs in all eight modes the testbench forms the anti-diagonal sums D_k
// itself (signed sub-partial products, masked per precision) and applies D_k at cycle s+k,
// as the adder tree would. Fifteen cycles after D_0 the 16-bit result must equal the packed
// per-channel products of the reference model, so any carry leaking across a channel
// boundary is caught.
module tb_output_generator;
  import bitsys_pkg::*;
  import bitsys_ref_pkg::*;
  logic clk = 1'b0, rst_n;
  prec_e prec;
  logic signed [4:0] d [15];
  logic d_valid;
  logic [15:0] result;
  logic result_valid;
  int checks = 0, failures = 0;
  localparam int S = 400;
  int D [S][15];
  logic [15:0] E [S];
  logic V [S];

  output_generator dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic make_sample(int p, bit sgn, int s);
    logic [7:0] a, b;
    int w;
    a = 8'($urandom); b = 8'($urandom);
    if (s % 7 == 0) a = 8'h80;
    if (s % 11 == 0) b = 8'hff;
    w = 1 << p;
    for (int k = 0; k < 15; k++) D[s][k] = 0;
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++)
        if (i / w == j / w) begin
          bit t, neg;
          t = (i == j && w == 1) ? (a[i] ~^ b[j]) : (a[i] & b[j]);
          neg = sgn && ((w == 1) ? 1'b1 : (((i % w) == w - 1) != ((j % w) == w - 1)));
          if (t) D[s][i+j] += neg ? -1 : 1;
        end
    E[s] = mul_ref(a, b, p, sgn);
    V[s] = ($urandom % 4) != 0;
  endtask

  initial begin
    rst_n = 1'b0; d_valid = 1'b0; prec = PREC_8;
    for (int k = 0; k < 15; k++) d[k] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < 8; m++) begin
      prec = prec_e'(m % 4);
      for (int s = 0; s < S; s++) make_sample(m % 4, m / 4, s);
      for (int s = S - 20; s < S; s++) V[s] = 1'b0;
      for (int n = 0; n < S; n++) begin
        @(negedge clk);
        if (n >= 15) begin
          checks++;
          if (result_valid != V[n-15] || (V[n-15] && result !== E[n-15])) begin
            failures++;
            if (failures < 10)
              $display("ERROR m=%0d s=%0d got %h exp %h", m, n - 15, result, E[n-15]);
          end
        end
        for (int k = 0; k < 15; k++) d[k] = (n - k >= 0 && V[n-k]) ? 5'(D[n-k][k]) : '0;
        d_valid = V[n];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
