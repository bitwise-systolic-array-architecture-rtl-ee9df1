// tb_bitsys_ctrl: checks the layer sequencing of the accelerator controller.
// A queue of layer settings is offered; the testbench plays the input FIFO (random data
// availability), the threshold sweep (thr_last some cycles after act_start) and the output
// consumer (random ready). For every layer it checks: one settings pop; the new precision,
// sign mode and output width in place and the accumulators cleared before the first operand
// pop, which comes exactly 3 cycles after the settings pop when data is waiting; exactly
// `length` operand pops, only when data is available; act_start DRAIN_CYC+2 cycles after the
// last pop; eight output pushes with rows 0..7 in order, only when the consumer is ready.
// The stall, reconfiguration and output-wait counters are compared with the testbench's own
// counts, and busy must drop at the end.
module tb_bitsys_ctrl;
  import bitsys_pkg::*;
  localparam int DRAIN = 140;
  logic clk = 1'b0, rst_n;
  logic cfg_valid, cfg_pop, in_valid, in_pop, feed_valid;
  layer_cfg_t cfg_data;
  prec_e prec;
  logic is_signed;
  logic [3:0] out_bits;
  logic acc_clear, act_start, thr_last, out_push, out_ready, busy;
  logic [2:0] out_row;
  logic [31:0] n_stall, n_reconfig, n_outwait;
  int checks = 0, failures = 0;

  bitsys_ctrl #(.ROWS(8), .DRAIN_CYC(DRAIN)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_true(bit c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("ERROR %s", what);
    end
  endtask

  layer_cfg_t layers [$];
  int exp_stall = 0, exp_reconf = 0, exp_outwait = 0;

  initial begin
    prec_e cur_p;
    logic cur_s;
    rst_n = 1'b0; cfg_valid = 1'b0; cfg_data = '0; in_valid = 1'b0; thr_last = 1'b0;
    out_ready = 1'b0;
    cur_p = PREC_8; cur_s = 1'b0;
    for (int l = 0; l < 12; l++) begin
      layer_cfg_t c;
      c.prec = prec_e'($urandom % 4);
      c.is_signed = $urandom % 2;
      c.out_bits = 4'(1 << ($urandom % 4));
      c.length = 16'(1 + $urandom % 40);
      if (l == 0) c.length = 16'd1;
      layers.push_back(c);
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    foreach (layers[l]) begin
      int t_cfg, t_first, t_last, t_act, pops, pushes, row, wait_thr;
      bit all_ready;
      layer_cfg_t c;
      c = layers[l];
      all_ready = (l % 3 == 0);   // some layers have operands waiting every cycle
      @(negedge clk);
      cfg_valid = 1'b1; cfg_data = c;
      // wait for the settings pop
      t_cfg = 0;
      while (1) begin
        #1;
        if (cfg_pop) break;
        expect_true(!in_pop && !out_push, "activity while idle");
        @(negedge clk);
        t_cfg++;
      end
      @(negedge clk);
      cfg_valid = 1'b0; cfg_data = '0;
      if (c.prec != cur_p || c.is_signed != cur_s) exp_reconf++;
      cur_p = c.prec; cur_s = c.is_signed;
      // stream phase
      pops = 0; t_first = -1; t_last = 0;
      for (int n = 1; pops < c.length; n++) begin
        in_valid = all_ready || ($urandom % 3 != 0);
        #1;
        if (acc_clear) expect_true(pops == 0, "accumulator clear during streaming");
        expect_true(!cfg_pop, "second settings pop");
        if (in_pop) begin
          expect_true(in_valid, "pop without data");
          expect_true(feed_valid, "feed valid missing");
          expect_true(prec == c.prec && is_signed == c.is_signed && out_bits == c.out_bits,
                      "settings not in place at first pop");
          if (pops == 0) begin
            t_first = n;
            if (all_ready) expect_true(n == 3, $sformatf("first pop after %0d cycles", n));
          end
          pops++;
          t_last = n;
        end else if (n >= 3 && !in_valid) begin
          exp_stall++;      // streaming state, operands still owed, none available
        end
        @(negedge clk);
      end
      in_valid = 1'b0;
      // drain: act_start must come DRAIN+2 cycles after the last pop
      t_act = 0;
      for (int n = 1; n < DRAIN + 10; n++) begin
        #1;
        expect_true(!in_pop, "pop after the last operand");
        if (act_start) begin
          t_act = n;
          break;
        end
        @(negedge clk);
      end
      expect_true(t_act == DRAIN + 2, $sformatf("act_start %0d cycles after last pop", t_act));
      // threshold sweep stand-in
      wait_thr = 1 + $urandom % 20;
      repeat (wait_thr) @(negedge clk);
      thr_last = 1'b1;
      #1 expect_true(!out_push, "push before the sweep ended");
      @(negedge clk);
      thr_last = 1'b0;
      // output phase
      pushes = 0;
      while (pushes < 8) begin
        out_ready = ($urandom % 3 == 0);
        #1;
        expect_true(out_push == out_ready, "push does not follow ready");
        if (out_push) begin
          expect_true(out_row == 3'(pushes), "row order");
          pushes++;
        end else exp_outwait++;
        @(negedge clk);
      end
      out_ready = 1'b0;
      #1 expect_true(!busy, "busy after the layer");
    end
    expect_true(n_stall == 32'(exp_stall), $sformatf("stall count %0d vs %0d", n_stall, exp_stall));
    expect_true(n_reconfig == 32'(exp_reconf), $sformatf("reconfig count %0d vs %0d", n_reconfig, exp_reconf));
    expect_true(n_outwait == 32'(exp_outwait), $sformatf("outwait count %0d vs %0d", n_outwait, exp_outwait));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
