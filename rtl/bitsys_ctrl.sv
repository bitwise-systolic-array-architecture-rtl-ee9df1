// bitsys_ctrl: layer state machine of the BitSys systolic-array accelerator.
//
// One layer setting (layer_cfg_t) from the settings FIFO describes one tile: length packed words
// per row and column, the multiplier precision, signedness and the activation output bits.
//   IDLE    wait for a setting.
//   CFG0..2 three cycles to take the setting: pop it from the FIFO (CFG0), decode it (CFG1),
//           rewrite the multiplier setting registers and clear the accumulators (CFG2). This is
//           the only place the precision changes, and the array is empty then.
//   STREAM  each cycle pop one input word and feed it to the array; when the input FIFO is
//           empty feed a bubble (feed_valid=0) instead and count a stall.
//   DRAIN   wait DRAIN_CYC cycles until the last word has reached every accumulator.
//   ACT     start the threshold sweep and the activation units; wait for the last threshold.
//   OUT     push one output word per row into the output FIFO, waiting while it is full.
// The three-cycle reconfiguration follows the paper; the states and everything else are this
// design's choice.
module bitsys_ctrl
  import bitsys_pkg::*;
#(
  parameter int unsigned ROWS      = 8,
  parameter int unsigned DRAIN_CYC = 140
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // layer settings FIFO (read side)
  input  logic                     cfg_valid,
  input  layer_cfg_t               cfg_data,
  output logic                     cfg_pop,
  // input FIFO (read side) and feed to the array
  input  logic                     in_valid,
  output logic                     in_pop,
  output logic                     feed_valid,
  // multiplier setting registers
  output prec_e                    prec,
  output logic                     is_signed,
  output logic [3:0]               out_bits,
  // datapath control
  output logic                     acc_clear,
  output logic                     act_start,
  input  logic                     thr_last,
  output logic                     out_push,
  input  logic                     out_ready,
  output logic [$clog2(ROWS)-1:0]  out_row,
  output logic                     busy,
  // event counters for observation
  output logic [31:0]              n_stall,
  output logic [31:0]              n_reconfig,
  output logic [31:0]              n_outwait
);

  typedef enum logic [2:0] {S_IDLE, S_CFG0, S_CFG1, S_CFG2, S_STREAM, S_DRAIN, S_ACT, S_OUT}
    state_e;

  state_e      state;
  layer_cfg_t  cfg_q;
  logic [15:0] remaining;
  logic [15:0] drain_cnt;

  assign cfg_pop    = (state == S_CFG0);
  assign in_pop     = (state == S_STREAM) && in_valid && (remaining != 0);
  assign feed_valid = in_pop;
  assign acc_clear  = (state == S_CFG2);
  assign act_start  = (state == S_DRAIN) && (drain_cnt == 0);
  assign out_push   = (state == S_OUT) && out_ready;
  assign busy       = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cfg_q      <= '0;
      prec       <= PREC_8;
      is_signed  <= 1'b0;
      out_bits   <= 4'd1;
      remaining  <= '0;
      drain_cnt  <= '0;
      out_row    <= '0;
      n_stall    <= '0;
      n_reconfig <= '0;
      n_outwait  <= '0;
    end else begin
      unique case (state)
        S_IDLE:   if (cfg_valid) state <= S_CFG0;
        S_CFG0: begin
          cfg_q <= cfg_data;
          state <= S_CFG1;
        end
        S_CFG1: begin
          remaining <= cfg_q.length;
          state     <= S_CFG2;
        end
        S_CFG2: begin
          if (cfg_q.prec != prec || cfg_q.is_signed != is_signed) n_reconfig <= n_reconfig + 1;
          prec      <= cfg_q.prec;
          is_signed <= cfg_q.is_signed;
          out_bits  <= cfg_q.out_bits;
          state     <= S_STREAM;
        end
        S_STREAM: begin
          if (remaining == 0) begin
            drain_cnt <= 16'(DRAIN_CYC);
            state     <= S_DRAIN;
          end else if (in_valid) begin
            remaining <= remaining - 1'b1;
          end else begin
            n_stall <= n_stall + 1;
          end
        end
        S_DRAIN: begin
          if (drain_cnt == 0) state <= S_ACT;
          else drain_cnt <= drain_cnt - 1'b1;
        end
        S_ACT: begin
          if (thr_last) begin
            out_row <= '0;
            state   <= S_OUT;
          end
        end
        S_OUT: begin
          if (out_ready) begin
            out_row <= out_row + 1'b1;
            if (out_row == $clog2(ROWS)'(ROWS - 1)) state <= S_IDLE;
          end else begin
            n_outwait <= n_outwait + 1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_pop_needs_data: assert property (@(posedge clk) disable iff (!rst_n) in_pop |-> in_valid);
  a_cfg_pop_needs_data: assert property (@(posedge clk) disable iff (!rst_n) cfg_pop |-> cfg_valid);

endmodule
