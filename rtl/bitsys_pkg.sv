// bitsys_pkg: types and mode tables shared by the BitSys multiplier, MAC and accelerator.
//
// The multiplier works on 8-bit operands that hold 1, 2, 4 or 8 channels of 8, 4, 2 or 1 bits.
// Every table here is a function of the bit indices (i of operand a, j of operand b) and the
// precision, so the RTL never stores the masks of the paper as constants:
//   * pe_pattern  - the sub-partial-product mask: a_i*b_j belongs to a channel when i and j fall
//                   in the same w-bit block (w = channel width). Region I (i==j) is always on,
//                   region II (same 2-bit block) from 2-bit mode, III (same 4-bit block) from
//                   4-bit mode, IV (everything else) only in 8-bit mode.
//   * pe_subtract - in signed modes a_i*b_j is subtracted when exactly one of i, j is the
//                   channel's sign bit; in 1-bit signed mode the XNOR result on the diagonal is
//                   subtracted because a lone 1-bit two's-complement value '1' means -1.
//   * cut_enable  - the carry cutter after partial product D_k (k odd) is active when k+1 is a
//                   multiple of the 2w-bit channel output width.
//   * neg_enable  - bit n of the 16-bit product is a channel sign bit (converter Neg. block).
// The encodings of prec_e and layer_cfg_t are this design's own choice.
package bitsys_pkg;

  localparam int unsigned N    = 8;          // operand width of one multiplier
  localparam int unsigned NP   = 2 * N - 1;  // number of partial products D_0..D_14
  localparam int unsigned RW   = 2 * N;      // result width
  localparam int unsigned DW   = 5;          // width of one signed partial product (-8..+8)

  // Channel width w = 1 << prec
  typedef enum logic [1:0] {
    PREC_1 = 2'd0,
    PREC_2 = 2'd1,
    PREC_4 = 2'd2,
    PREC_8 = 2'd3
  } prec_e;

  // One layer (tile) setting as held in the settings FIFO
  typedef struct packed {
    prec_e       prec;       // operand precision of the multipliers
    logic        is_signed;  // signed (two's complement / BNN) or unsigned operands
    logic [3:0]  out_bits;   // activation output bits: 2^out_bits-1 thresholds (1..8)
    logic [15:0] length;     // number of packed input words per row / column
  } layer_cfg_t;

  function automatic int unsigned prec_width(prec_e p);
    return 1 << p;
  endfunction

  function automatic logic pe_pattern(prec_e p, int unsigned i, int unsigned j);
    return (i >> p) == (j >> p);
  endfunction

  function automatic logic pe_subtract(prec_e p, logic sgn, int unsigned i, int unsigned j);
    int unsigned w;
    logic        si, sj;
    w  = prec_width(p);
    si = (i % w) == (w - 1);
    sj = (j % w) == (w - 1);
    if (!sgn || !pe_pattern(p, i, j)) return 1'b0;
    if (p == PREC_1) return 1'b1;
    return si ^ sj;
  endfunction

  function automatic logic cut_enable(prec_e p, int unsigned k);
    int unsigned cw;
    cw = 2 * prec_width(p);
    return ((k + 1) % cw == 0) && (k + 1 < RW);
  endfunction

  function automatic logic neg_enable(prec_e p, logic sgn, int unsigned n);
    int unsigned cw;
    cw = 2 * prec_width(p);
    return sgn && ((n % cw) == cw - 1);
  endfunction

endpackage
