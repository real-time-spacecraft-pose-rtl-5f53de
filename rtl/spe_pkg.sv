// spe_pkg -- shared constants, configuration-bus type and network table
// for the quantised MobileNetV2 backbone accelerator.
//
// The accelerator is a dataflow pipeline with one hardware unit per
// network layer.  This package holds what the units share:
//  * the activation and weight bit-widths of the mixed-precision network
//    (4-bit activations everywhere; 4-bit weights on the first
//    convolution, 6-bit on the first depthwise convolution, 4-bit on the
//    first projection, 3-bit on the remaining 49 convolutions),
//  * the MobileNetV2 layer table (17 inverted residual blocks between a
//    3x3 stem convolution and a 1x1 head convolution),
//  * the cycle budget per frame (187.5 MHz / 250 frames/s = 750 000
//    cycles) and the folding functions that choose, for each unit, the
//    smallest parallelism that keeps it within that budget,
//  * the configuration bus that loads weights and thresholds into the
//    on-chip memories of every unit.
// Bit-widths, block structure, clock and frame rate follow the paper;
// the configuration bus, the unit numbering, the 8-bit signed input
// pixels and the folding heuristic are this design's own choices.
package spe_pkg;

  // ---------------------------------------------------------------- numbers
  localparam int unsigned ACT_BITS     = 4;       // all activations
  localparam int unsigned IN_BITS      = 8;       // input image pixels (signed)
  localparam int unsigned IN_CH        = 3;       // RGB
  localparam int unsigned IMG_DIM      = 240;     // 240x240 input frames
  localparam int unsigned NUM_BLOCKS   = 17;      // inverted residual blocks
  localparam int unsigned NUM_CONV     = 52;      // convolution layers
  localparam int unsigned HEAD_CH      = 1280;    // last 1x1 convolution
  localparam int unsigned STEM_CH      = 32;      // first 3x3 convolution
  localparam int unsigned NUM_THR      = (1 << ACT_BITS) - 1;  // 15 thresholds
  localparam int unsigned FRAME_BUDGET = 750000;  // 187.5e6 Hz / 250 fps

  // weight bit-widths of the mixed-precision network
  localparam int unsigned WB_STEM     = 4;  // first convolution
  localparam int unsigned WB_FIRST_DW = 6;  // first depthwise convolution
  localparam int unsigned WB_FIRST_PJ = 4;  // first projection convolution
  localparam int unsigned WB_REST     = 3;  // the other 49 convolutions

  // ------------------------------------------------------ configuration bus
  // One write per cycle of a single weight or threshold into the unit
  // numbered `unit`.  For a weight, row is the output channel and col the
  // input index; for a threshold, row is the channel and col the
  // threshold number (0..14, ascending thresholds).
  typedef enum logic {CFG_WEIGHT = 1'b0, CFG_THRESH = 1'b1} cfg_sel_e;

  typedef struct packed {
    logic               we;
    cfg_sel_e           sel;
    logic [7:0]         unit;
    logic [15:0]        row;
    logic [15:0]        col;
    logic signed [31:0] data;
  } cfg_t;

  // Unit numbering.  Convolution layers are 0..51 in network order
  // (0 = stem, 1/2 = depthwise/projection of block 0, then expansion,
  // depthwise, projection of blocks 1..16, 51 = head).  Standalone
  // threshold (shared activation) units are 64 + 2*block (block input)
  // and 65 + 2*block (before the residual add); 98 quantises the last
  // block's output for the head convolution.
  localparam int unsigned UNIT_STEM     = 0;
  localparam int unsigned UNIT_HEAD     = 51;
  localparam int unsigned UNIT_ACT_BASE = 64;
  localparam int unsigned UNIT_HEAD_ACT = 98;

  function automatic int unsigned unit_exp(int unsigned b);
    return (b == 0) ? 0 : 3 * b;          // block 0 has no expansion
  endfunction
  function automatic int unsigned unit_dw(int unsigned b);
    return (b == 0) ? 1 : 3 * b + 1;
  endfunction
  function automatic int unsigned unit_proj(int unsigned b);
    return (b == 0) ? 2 : 3 * b + 2;
  endfunction

  // ------------------------------------------------------- MobileNetV2 table
  // (expansion t, output channels c, stride s) of each of the 17 blocks.
  function automatic int unsigned blk_t(int unsigned b);
    return (b == 0) ? 1 : 6;
  endfunction

  function automatic int unsigned blk_cout_full(int unsigned b);
    if (b == 0)       return 16;
    else if (b <= 2)  return 24;
    else if (b <= 5)  return 32;
    else if (b <= 9)  return 64;
    else if (b <= 12) return 96;
    else if (b <= 15) return 160;
    else              return 320;
  endfunction

  function automatic int unsigned blk_s(int unsigned b);
    return (b == 1 || b == 3 || b == 6 || b == 13) ? 2 : 1;
  endfunction

  function automatic int unsigned blk_cout(int unsigned b, int unsigned div);
    return blk_cout_full(b) / div;
  endfunction

  function automatic int unsigned blk_cin(int unsigned b, int unsigned div);
    return (b == 0) ? STEM_CH / div : blk_cout_full(b - 1) / div;
  endfunction

  // output size of a KxK convolution with padding P and stride S
  function automatic int unsigned conv_out(int unsigned h, int unsigned k,
                                           int unsigned s, int unsigned p);
    return (h + 2 * p - k) / s + 1;
  endfunction

  // input feature-map size of block b for an img x img frame
  function automatic int unsigned blk_h(int unsigned b, int unsigned img);
    int unsigned h;
    h = conv_out(img, 3, 2, 1);           // stem
    for (int unsigned i = 0; i < b; i++) h = conv_out(h, 3, blk_s(i), 1);
    return h;
  endfunction

  function automatic bit blk_res(int unsigned b);
    return (blk_s(b) == 1) && (b == 0 ? 1'b0 : blk_cout_full(b - 1) == blk_cout_full(b));
  endfunction

  function automatic int unsigned blk_wb_dw(int unsigned b);
    return (b == 0) ? WB_FIRST_DW : WB_REST;
  endfunction
  function automatic int unsigned blk_wb_proj(int unsigned b);
    return (b == 0) ? WB_FIRST_PJ : WB_REST;
  endfunction

  // ------------------------------------------------------- element widths
  function automatic int unsigned clog2u(int unsigned v);
    int unsigned r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction

  // accumulator bits of a dot product of mw (ib-bit x wb-bit) products
  function automatic int unsigned acc_bits(int unsigned ib, int unsigned wb,
                                           int unsigned mw);
    return ib + wb + clog2u(mw);
  endfunction

  // element width leaving an inverted residual block: the residual sum
  // of two 4-bit signed values, or the raw projection accumulator
  function automatic int unsigned ir_out_bits(int unsigned cin, int unsigned t,
                                              bit res, int unsigned wb_proj);
    return res ? ACT_BITS + 1 : acc_bits(ACT_BITS, wb_proj, cin * t);
  endfunction

  // element width entering block b (signed except at block 0)
  function automatic int unsigned blk_in_bits(int unsigned b, int unsigned div);
    if (b == 0) return ACT_BITS;
    return ir_out_bits(blk_cin(b - 1, div), blk_t(b - 1), blk_res(b - 1),
                       blk_wb_proj(b - 1));
  endfunction

  // ------------------------------------------------------------- folding
  // smallest divisor of n that is larger than d (n itself at most)
  function automatic int unsigned next_div(int unsigned n, int unsigned d);
    for (int unsigned i = d + 1; i < n; i++) if (n % i == 0) return i;
    return n;
  endfunction

  // Matrix-vector unit: cycles per frame = pix * (mw/simd) * (mh/pe).
  // SIMD is widened first, then PE, until the unit meets the budget.
  function automatic int unsigned fold_simd(int unsigned mw, int unsigned mh,
                                            int unsigned pix, int unsigned budget);
    int unsigned simd = 1;
    while (simd < mw && pix * (mw / simd) * mh > budget) simd = next_div(mw, simd);
    return simd;
  endfunction

  function automatic int unsigned fold_pe(int unsigned mw, int unsigned mh,
                                          int unsigned pix, int unsigned budget);
    int unsigned simd = fold_simd(mw, mh, pix, budget);
    int unsigned pe = 1;
    while (pe < mh && pix * (mw / simd) * (mh / pe) > budget) pe = next_div(mh, pe);
    return pe;
  endfunction

  // Channel-parallel units (depthwise, thresholds): pix * (c/pe) cycles.
  function automatic int unsigned fold_ch(int unsigned c, int unsigned pix,
                                          int unsigned budget);
    int unsigned pe = 1;
    while (pe < c && pix * (c / pe) > budget) pe = next_div(c, pe);
    return pe;
  endfunction

endpackage
