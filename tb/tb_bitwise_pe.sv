// tb_bitwise_pe: exhaustive test of both bitwise processing element types.
// Every combination of the five inputs is applied to a type I (XNOR/AND) and a type II
// (AND/zero) element and compared with the truth table written out here.
module tb_bitwise_pe;
  int checks = 0, failures = 0;
  logic in_0, in_1, v0, v1, pat;
  logic r1, rv1, r2, rv2;

  bitwise_pe #(.TYPE_I(1'b1)) u_t1 (.in_0, .in_1, .in_0_valid(v0), .in_1_valid(v1),
                                    .pattern(pat), .result(r1), .result_valid(rv1));
  bitwise_pe #(.TYPE_I(1'b0)) u_t2 (.in_0, .in_1, .in_0_valid(v0), .in_1_valid(v1),
                                    .pattern(pat), .result(r2), .result_valid(rv2));

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 32; n++) begin
      logic e1, e2;
      {in_0, in_1, v0, v1, pat} = 5'(n);
      #1;
      e1 = pat ? (in_0 == in_1) : (in_0 && in_1);
      e2 = pat && in_0 && in_1;
      checks += 4;
      if (r1 != e1)  begin failures++; $display("ERROR type I  n=%0d", n); end
      if (r2 != e2)  begin failures++; $display("ERROR type II n=%0d", n); end
      if (rv1 != (v0 && v1)) failures++;
      if (rv2 != (v0 && v1)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
