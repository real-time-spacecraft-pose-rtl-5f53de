// inverted_residual -- one modified MobileNetV2 inverted residual block
// as a chain of dataflow units.
//
//   in -> shared activation -> [fork] -> 1x1 expansion (BN, ReLU)
//      -> 3x3 sliding window -> 3x3 depthwise (BN, ReLU)
//      -> 1x1 projection -> shared activation -> add(shortcut) -> out
//
// The input is a pixel stream of CIN integer elements of IB bits.  The
// first shared activation requantises it to 4-bit signed values.  With a
// residual (stride 1 and CIN == COUT) the quantised pixel is forked: one
// copy goes through a deep FIFO (the shortcut), the other through the
// main path, whose projection accumulator is requantised by a second
// shared activation to the same 4-bit grid and added to the shortcut,
// giving a 5-bit signed output.  Without a residual the block ends at the
// raw projection accumulator, which the next block's shared activation
// requantises.  Blocks with expansion T = 1 (the first block) have no
// expansion layer.  Every unit is followed by a small FIFO.
//
// Folding of every unit is derived from BUDGET, the cycles allowed per
// frame: each unit gets the smallest parallelism that processes its
// share of a frame within it.  The shortcut FIFO must hold the pixels
// that the main path swallows before its first output (about one input
// line plus the unit buffers), otherwise the fork deadlocks; it is sized
// SC_EXTRA pixels beyond one line.
// Block structure, bit-widths and the residual are the paper's (its
// Fig. 2); FIFO depths, folding rule and signedness choices are this
// design's.
module inverted_residual
  import spe_pkg::*;
#(
  parameter int unsigned CIN       = 8,
  parameter int unsigned COUT      = 8,
  parameter int unsigned T         = 6,       // expansion factor
  parameter int unsigned S         = 1,       // depthwise stride
  parameter int unsigned H         = 8,       // input map is H x H
  parameter int unsigned IB        = 5,       // input element bits
  parameter bit          IN_SIGNED = 1'b1,
  parameter int unsigned WB_EXP    = 3,
  parameter int unsigned WB_DW     = 3,
  parameter int unsigned WB_PROJ   = 3,
  parameter int unsigned BUDGET    = 750000,  // cycles per frame
  parameter int unsigned FIFO_D    = 4,       // FIFO between units
  parameter int unsigned SC_EXTRA  = 32,      // shortcut FIFO beyond a line
  parameter int unsigned U_EXP     = 3,
  parameter int unsigned U_DW      = 4,
  parameter int unsigned U_PROJ    = 5,
  parameter int unsigned U_ACT_IN  = 64,
  parameter int unsigned U_ACT_OUT = 65,
  // derived
  parameter bit          RES       = (S == 1) && (CIN == COUT),
  parameter int unsigned OB        = ir_out_bits(CIN, T, RES, WB_PROJ)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_t               cfg,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [CIN*IB-1:0]  in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [COUT*OB-1:0] out_data
);
  localparam int unsigned A    = ACT_BITS;
  localparam int unsigned CE   = CIN * T;               // expanded channels
  localparam int unsigned HO   = conv_out(H, 3, S, 1);
  localparam int unsigned PIN  = H * H;
  localparam int unsigned POUT = HO * HO;
  localparam int unsigned PB   = acc_bits(A, WB_PROJ, CE);  // projection acc

  localparam int unsigned PE_AIN  = fold_ch(CIN, PIN, BUDGET);
  localparam int unsigned SIMD_EX = fold_simd(CIN, CE, PIN, BUDGET);
  localparam int unsigned PE_EX   = fold_pe(CIN, CE, PIN, BUDGET);
  localparam int unsigned PE_DW   = fold_ch(CE, POUT, BUDGET);
  localparam int unsigned SIMD_PJ = fold_simd(CE, COUT, POUT, BUDGET);
  localparam int unsigned PE_PJ   = fold_pe(CE, COUT, POUT, BUDGET);
  localparam int unsigned PE_AOUT = fold_ch(COUT, POUT, BUDGET);

  // ---------------------------------------------------- input activation
  logic             q_valid, q_ready;
  logic [CIN*A-1:0] q_data;

  thresholding #(
    .C(CIN), .PE(PE_AIN), .IB(IB), .IN_SIGNED(IN_SIGNED), .OUT_SIGNED(1'b1),
    .UNIT(U_ACT_IN)
  ) u_act_in (
    .clk, .rst_n, .cfg,
    .in_valid, .in_ready, .in_data,
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_data)
  );

  // ------------------------------------------------------ fork (residual)
  logic             m_valid, m_ready, sc_valid, sc_ready;
  logic [CIN*A-1:0] m_data, sc_data;

  logic             scq_valid, scq_ready;
  logic [CIN*A-1:0] scq_data;

  if (RES) begin : g_fork
    dup_streams #(.WIDTH(CIN*A)) u_dup (
      .clk, .rst_n,
      .in_valid(q_valid), .in_ready(q_ready), .in_data(q_data),
      .out0_valid(m_valid), .out0_ready(m_ready), .out0_data(m_data),
      .out1_valid(sc_valid), .out1_ready(sc_ready), .out1_data(sc_data)
    );
    stream_fifo #(.WIDTH(CIN*A), .DEPTH(H + SC_EXTRA)) u_shortcut (
      .clk, .rst_n,
      .in_valid(sc_valid), .in_ready(sc_ready), .in_data(sc_data),
      .out_valid(scq_valid), .out_ready(scq_ready), .out_data(scq_data)
    );
  end else begin : g_nofork
    assign m_valid   = q_valid;
    assign q_ready   = m_ready;
    assign m_data    = q_data;
    assign sc_valid  = 1'b0;
    assign sc_data   = '0;
    assign sc_ready  = 1'b0;
    assign scq_valid = 1'b0;
    assign scq_data  = '0;
  end

  // ----------------------------------------------------------- expansion
  logic            e_valid, e_ready;
  logic [CE*A-1:0] e_data;

  if (T != 1) begin : g_exp
    logic            x_valid, x_ready;
    logic [CE*A-1:0] x_data;
    mvau #(
      .MW(CIN), .MH(CE), .SIMD(SIMD_EX), .PE(PE_EX), .IB(A), .IN_SIGNED(1'b1),
      .WB(WB_EXP), .USE_THR(1'b1), .OUT_SIGNED(1'b0), .UNIT(U_EXP)
    ) u_exp (
      .clk, .rst_n, .cfg,
      .in_valid(m_valid), .in_ready(m_ready), .in_data(m_data),
      .out_valid(x_valid), .out_ready(x_ready), .out_data(x_data)
    );
    stream_fifo #(.WIDTH(CE*A), .DEPTH(FIFO_D)) u_fifo_exp (
      .clk, .rst_n,
      .in_valid(x_valid), .in_ready(x_ready), .in_data(x_data),
      .out_valid(e_valid), .out_ready(e_ready), .out_data(e_data)
    );
  end else begin : g_noexp
    assign e_valid = m_valid;
    assign m_ready = e_ready;
    assign e_data  = m_data;
  end

  // The depthwise unit reads unsigned activations.  Without an expansion
  // layer its input is the signed output of the shared activation, so
  // the depthwise unit then reads signed values.
  localparam bit DW_SIGNED = (T == 1);

  // ----------------------------------------------------------- depthwise
  logic              w_valid, w_ready;
  logic [9*CE*A-1:0] w_data;

  sliding_window #(.C(CE), .EB(A), .H(H), .K(3), .S(S), .P(1)) u_swg (
    .clk, .rst_n,
    .in_valid(e_valid), .in_ready(e_ready), .in_data(e_data),
    .out_valid(w_valid), .out_ready(w_ready), .out_data(w_data)
  );

  logic            d_valid, d_ready, dq_valid, dq_ready;
  logic [CE*A-1:0] d_data, dq_data;

  vvau #(
    .C(CE), .K(3), .PE(PE_DW), .IB(A), .IN_SIGNED(DW_SIGNED), .WB(WB_DW), .UNIT(U_DW)
  ) u_dw (
    .clk, .rst_n, .cfg,
    .in_valid(w_valid), .in_ready(w_ready), .in_data(w_data),
    .out_valid(d_valid), .out_ready(d_ready), .out_data(d_data)
  );

  stream_fifo #(.WIDTH(CE*A), .DEPTH(FIFO_D)) u_fifo_dw (
    .clk, .rst_n,
    .in_valid(d_valid), .in_ready(d_ready), .in_data(d_data),
    .out_valid(dq_valid), .out_ready(dq_ready), .out_data(dq_data)
  );

  // ---------------------------------------------------------- projection
  logic              p_valid, p_ready;
  logic [COUT*PB-1:0] p_data;

  mvau #(
    .MW(CE), .MH(COUT), .SIMD(SIMD_PJ), .PE(PE_PJ), .IB(A), .IN_SIGNED(1'b0),
    .WB(WB_PROJ), .USE_THR(1'b0), .UNIT(U_PROJ)
  ) u_proj (
    .clk, .rst_n, .cfg,
    .in_valid(dq_valid), .in_ready(dq_ready), .in_data(dq_data),
    .out_valid(p_valid), .out_ready(p_ready), .out_data(p_data)
  );

  // ------------------------------------------- output activation and add
  if (RES) begin : g_res
    logic               r_valid, r_ready;
    logic [COUT*A-1:0]  r_data;
    thresholding #(
      .C(COUT), .PE(PE_AOUT), .IB(PB), .IN_SIGNED(1'b1), .OUT_SIGNED(1'b1),
      .UNIT(U_ACT_OUT)
    ) u_act_out (
      .clk, .rst_n, .cfg,
      .in_valid(p_valid), .in_ready(p_ready), .in_data(p_data),
      .out_valid(r_valid), .out_ready(r_ready), .out_data(r_data)
    );
    add_streams #(.C(COUT), .IB(A)) u_add (
      .clk, .rst_n,
      .a_valid(r_valid), .a_ready(r_ready), .a_data(r_data),
      .b_valid(scq_valid), .b_ready(scq_ready), .b_data(scq_data),
      .out_valid, .out_ready, .out_data
    );
  end else begin : g_nores
    assign out_valid = p_valid;
    assign p_ready   = out_ready;
    assign out_data  = p_data;
    assign scq_ready = 1'b0;
  end
endmodule
