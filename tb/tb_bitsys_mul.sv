// tb_bitsys_mul: self-checking test of the stand-alone BitSys multiplier.
//
// For each of the 8 modes (1/2/4/8-bit, signed/unsigned) it streams 2000 random operand pairs,
// with random idle cycles, and compares every result with the reference model in
// bitsys_ref_pkg. It also checks that each result appears exactly 22 cycles after its operands
// were sampled and that no result appears without an operand. Between modes the pipeline is
// drained, as the multiplier requires.
module tb_bitsys_mul;
  import bitsys_pkg::*;
  import bitsys_ref_pkg::*;

  localparam int LAT = 22;

  logic        clk = 1'b0;
  logic        rst_n;
  prec_e       prec;
  logic        is_signed;
  logic [7:0]  a, b;
  logic        in_valid;
  logic [15:0] result;
  logic        out_valid;

  int checks = 0, failures = 0;
  longint cycle = 0;

  typedef struct { logic [15:0] exp; longint t; logic [7:0] a, b; } item_t;
  item_t q[$];

  // bit-stream ports of the array cell, unused when the unit has its own loaders
  logic [7:0] a_in = '0, a_in_v = '0, b_in = '0, b_in_v = '0;
  logic [7:0] a_out, a_out_v, b_out, b_out_v;
  bitsys_mul dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // Scoreboard
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("ERROR: unexpected result %h", result);
      end else begin
        item_t it;
        it = q.pop_front();
        if (result !== it.exp || cycle - it.t != longint'(LAT)) begin
          failures++;
          if (failures < 10)
            $display("ERROR prec=%0d s=%0d a=%h b=%h got %h exp %h latency %0d",
                     prec, is_signed, it.a, it.b, result, it.exp, cycle - it.t);
        end
      end
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; a = '0; b = '0;
    prec = PREC_8; is_signed = 1'b0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int s = 0; s < 2; s++) begin
      for (int p = 0; p < 4; p++) begin
        prec <= prec_e'(p); is_signed <= s[0];
        @(posedge clk);
        for (int n = 0; n < 2000; n++) begin
          logic [7:0] ra, rb;
          ra = 8'($urandom); rb = 8'($urandom);
          if (n < 4) begin ra = (n[0]) ? 8'h80 : 8'hff; rb = (n[1]) ? 8'h80 : 8'hff; end
          a <= ra; b <= rb;
          in_valid <= ($urandom % 8) != 0;
          @(posedge clk);
          if (in_valid) q.push_back('{mul_ref(a, b, p, s[0]), cycle, a, b});
        end
        in_valid <= 1'b0;
        repeat (LAT + 5) @(posedge clk);
        checks++;
        if (q.size() != 0) begin
          failures++;
          $display("ERROR: %0d results missing", q.size());
          q.delete();
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
