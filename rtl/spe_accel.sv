// spe_accel -- dataflow accelerator for the mixed-precision quantised
// MobileNetV2 backbone of a monocular spacecraft pose estimator.
//
// One hardware unit per network layer, all running concurrently and
// joined by FIFOs:
//   image (IMG x IMG x 3, 8-bit signed pixels)
//   -> 3x3 stride-2 stem convolution (4-bit weights, BN+ReLU thresholds)
//   -> 17 inverted residual blocks (see inverted_residual)
//   -> shared activation -> 1x1 head convolution to 1280 channels
//      (3-bit weights, BN+ReLU thresholds)
//   -> feature map (8 x 8 x 1280 for 240 x 240 frames, 4-bit unsigned)
// The pose heads that turn the feature map into orientation and position
// run in software and are not part of this RTL.
//
// Streams: in_* carries one input pixel per beat in raster order, the 3
// channels at bits [c*8 +: 8]; out_* one feature-map pixel per beat in
// raster order, channel c at bits [c*4 +: 4].  Both use valid/ready.
// Weights and thresholds live in on-chip memories inside the units and
// are loaded through cfg (see spe_pkg for the unit numbering); they must
// be loaded before frames are streamed.
//
// Throughput: every unit is folded so that one frame costs it at most
// BUDGET cycles; the default 750 000 cycles is 250 frames/s at 187.5 MHz,
// the paper's clock and estimated rate.  Frames can follow each other
// back to back.  CH_DIV divides every channel count (1 = the network as
// published); it and IMG exist to simulate reduced copies.
// Network, bit-widths, clock and frame budget are the paper's; FIFO
// depths, folding rule, configuration bus and stream formats are this
// design's own.
module spe_accel
  import spe_pkg::*;
#(
  parameter int unsigned IMG      = IMG_DIM,
  parameter int unsigned CH_DIV   = 1,
  parameter int unsigned BUDGET   = FRAME_BUDGET,
  parameter int unsigned FIFO_D   = 4,
  parameter int unsigned SC_EXTRA = 32,
  // derived
  parameter int unsigned C_STEM   = STEM_CH / CH_DIV,
  parameter int unsigned C_HEAD   = HEAD_CH / CH_DIV
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  cfg_t                      cfg,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [IN_CH*IN_BITS-1:0]  in_data,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [C_HEAD*ACT_BITS-1:0] out_data
);
  localparam int unsigned A     = ACT_BITS;
  localparam int unsigned H1    = conv_out(IMG, 3, 2, 1);        // stem output
  localparam int unsigned HL    = conv_out(blk_h(NUM_BLOCKS - 1, IMG), 3,
                                           blk_s(NUM_BLOCKS - 1), 1);
  localparam int unsigned MW0   = 9 * IN_CH;
  localparam int unsigned C_LB  = blk_cout(NUM_BLOCKS - 1, CH_DIV);
  localparam int unsigned B_LB  = ir_out_bits(blk_cin(NUM_BLOCKS - 1, CH_DIV),
                                              blk_t(NUM_BLOCKS - 1),
                                              blk_res(NUM_BLOCKS - 1),
                                              blk_wb_proj(NUM_BLOCKS - 1));

  // ----------------------------------------------------------------- stem
  logic                     sw_valid, sw_ready;
  logic [MW0*IN_BITS-1:0]   sw_data;
  logic                     s_valid, s_ready, sq_valid, sq_ready;
  logic [C_STEM*A-1:0]      s_data, sq_data;

  sliding_window #(.C(IN_CH), .EB(IN_BITS), .H(IMG), .K(3), .S(2), .P(1)) u_stem_swg (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid(sw_valid), .out_ready(sw_ready), .out_data(sw_data)
  );

  mvau #(
    .MW(MW0), .MH(C_STEM),
    .SIMD(fold_simd(MW0, C_STEM, H1 * H1, BUDGET)),
    .PE(fold_pe(MW0, C_STEM, H1 * H1, BUDGET)),
    .IB(IN_BITS), .IN_SIGNED(1'b1), .WB(WB_STEM),
    .USE_THR(1'b1), .OUT_SIGNED(1'b0), .UNIT(UNIT_STEM)
  ) u_stem (
    .clk, .rst_n, .cfg,
    .in_valid(sw_valid), .in_ready(sw_ready), .in_data(sw_data),
    .out_valid(s_valid), .out_ready(s_ready), .out_data(s_data)
  );

  stream_fifo #(.WIDTH(C_STEM*A), .DEPTH(FIFO_D)) u_fifo_stem (
    .clk, .rst_n,
    .in_valid(s_valid), .in_ready(s_ready), .in_data(s_data),
    .out_valid(sq_valid), .out_ready(sq_ready), .out_data(sq_data)
  );

  // ------------------------------------------------------ residual blocks
  for (genvar b = 0; b < NUM_BLOCKS; b++) begin : g_blk
    localparam int unsigned CI  = blk_cin(b, CH_DIV);
    localparam int unsigned CO  = blk_cout(b, CH_DIV);
    localparam int unsigned IBB = blk_in_bits(b, CH_DIV);
    localparam bit          RS  = blk_res(b);
    localparam int unsigned OBB = ir_out_bits(CI, blk_t(b), RS, blk_wb_proj(b));

    logic             i_valid, i_ready;
    logic [CI*IBB-1:0] i_data;
    logic             o_valid, o_ready, q_valid, q_ready;
    logic [CO*OBB-1:0] o_data, q_data;

    if (b == 0) begin : g_src
      assign i_valid  = sq_valid;
      assign sq_ready = i_ready;
      assign i_data   = sq_data;
    end else begin : g_src
      assign i_valid             = g_blk[b-1].q_valid;
      assign g_blk[b-1].q_ready  = i_ready;
      assign i_data              = g_blk[b-1].q_data;
    end

    inverted_residual #(
      .CIN(CI), .COUT(CO), .T(blk_t(b)), .S(blk_s(b)), .H(blk_h(b, IMG)),
      .IB(IBB), .IN_SIGNED(b != 0),
      .WB_EXP(WB_REST), .WB_DW(blk_wb_dw(b)), .WB_PROJ(blk_wb_proj(b)),
      .BUDGET(BUDGET), .FIFO_D(FIFO_D), .SC_EXTRA(SC_EXTRA),
      .U_EXP(unit_exp(b)), .U_DW(unit_dw(b)), .U_PROJ(unit_proj(b)),
      .U_ACT_IN(UNIT_ACT_BASE + 2*b), .U_ACT_OUT(UNIT_ACT_BASE + 2*b + 1)
    ) u_block (
      .clk, .rst_n, .cfg,
      .in_valid(i_valid), .in_ready(i_ready), .in_data(i_data),
      .out_valid(o_valid), .out_ready(o_ready), .out_data(o_data)
    );

    stream_fifo #(.WIDTH(CO*OBB), .DEPTH(FIFO_D)) u_fifo_blk (
      .clk, .rst_n,
      .in_valid(o_valid), .in_ready(o_ready), .in_data(o_data),
      .out_valid(q_valid), .out_ready(q_ready), .out_data(q_data)
    );
  end

  // ----------------------------------------------------------------- head
  logic                l_valid, l_ready;
  logic [C_LB*A-1:0]   l_data;

  thresholding #(
    .C(C_LB), .PE(fold_ch(C_LB, HL * HL, BUDGET)), .IB(B_LB),
    .IN_SIGNED(1'b1), .OUT_SIGNED(1'b1), .UNIT(UNIT_HEAD_ACT)
  ) u_head_act (
    .clk, .rst_n, .cfg,
    .in_valid(g_blk[NUM_BLOCKS-1].q_valid), .in_ready(g_blk[NUM_BLOCKS-1].q_ready),
    .in_data(g_blk[NUM_BLOCKS-1].q_data),
    .out_valid(l_valid), .out_ready(l_ready), .out_data(l_data)
  );

  mvau #(
    .MW(C_LB), .MH(C_HEAD),
    .SIMD(fold_simd(C_LB, C_HEAD, HL * HL, BUDGET)),
    .PE(fold_pe(C_LB, C_HEAD, HL * HL, BUDGET)),
    .IB(A), .IN_SIGNED(1'b1), .WB(WB_REST),
    .USE_THR(1'b1), .OUT_SIGNED(1'b0), .UNIT(UNIT_HEAD)
  ) u_head (
    .clk, .rst_n, .cfg,
    .in_valid(l_valid), .in_ready(l_ready), .in_data(l_data),
    .out_valid, .out_ready, .out_data
  );
endmodule
