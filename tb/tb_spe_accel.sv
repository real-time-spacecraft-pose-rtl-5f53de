// tb_spe_accel -- end-to-end test of the backbone accelerator spe_accel.
//
// Runs a reduced copy of the network (32x32 frames, every channel count
// divided by 8, a cycle budget of 2000 per frame so that units fold with
// SIMD/PE above one) with all 52 convolutions, 17 inverted residual blocks
// and 34 shared activations in place.  Weights and thresholds are loaded
// through the configuration bus from the generators of tb_ref_pkg; then
// random 8-bit frames are streamed in, and every element of every output
// feature map is compared with a layer-by-layer loop-nest model of the
// quantised network.
// Phase 1: NF frames with random input gaps and random output back-
// pressure.  Phase 2: NFF frames streamed back to back with the output
// always ready; the interval between the first output pixels of
// consecutive frames must not exceed the cycle budget plus the frame
// hand-over allowance SLACK.
// Mechanisms counted (each must occur): residual additions, input
// back-pressure, output back-pressure, compute stalls of the stem unit
// waiting for its output to be taken, stride-2 windows.
module tb_spe_accel;
  import spe_pkg::*;
  import tb_ref_pkg::*;

  localparam int IMG = 32, DIV = 8, BUD = 2000;
  localparam int NF = 2, NFF = 3, SLACK = 100;
  localparam longint WATCHDOG = 64'd4000000;
  localparam int C_HEAD = HEAD_CH / DIV;
  localparam int HL = conv_out(blk_h(NUM_BLOCKS - 1, IMG), 3, blk_s(NUM_BLOCKS - 1), 1);
  localparam int NPIX = HL * HL;
  localparam int NTOT = NF + NFF;

  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [IN_CH*IN_BITS-1:0] in_data;
  logic [C_HEAD*ACT_BITS-1:0] out_data;
  int checks = 0, failures = 0;
  longint cyc = 0;
  int sent = 0, got = 0;
  bit free_run = 0, in_fire = 0;
  int img [NTOT][];
  int expo [NTOT][];
  longint t_frame [NTOT];
  int n_add = 0, n_in_bp = 0, n_out_bp = 0, n_stall = 0, n_s2 = 0;
  // Sizes copied into variables at run time: loops bounded by them are not
  // unrolled when the testbench is compiled, which keeps the build short.
  int v_img, v_nblk, v_chead, v_npix, v_inch;

  spe_accel #(.IMG(IMG), .CH_DIV(DIV), .BUDGET(BUD)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (cyc == WATCHDOG) begin
      failures++;
      $display("watchdog expired after %0d cycles (frames out: %0d pixels)", cyc, got);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  // ------------------------------------------------------ reference model
  function automatic int cin_of(int b);  return blk_cin(b, DIV);  endfunction
  function automatic int ce_of(int b);   return blk_cin(b, DIV) * blk_t(b); endfunction
  // threshold spacing of each block's input activation
  function automatic int ain_step(int b);
    if (b == 0) return 1;
    if (blk_res(b - 1)) return 2;
    return thr_step(ce_of(b - 1), 8);
  endfunction
  localparam int STEM_STEP = 1 + (isqrt(27) * 128) / 4;

  function automatic void model(input int x[], output int y[]);
    int a[], q[], e[], d[], p[], r[];
    int h;
    conv(x, v_img, v_inch, 3, 2, STEM_CH / DIV, UNIT_STEM, WB_STEM, a);
    act(a, STEM_CH / DIV, UNIT_STEM, STEM_STEP, 1'b0, a);
    h = conv_out(v_img, 3, 2, 1);
    for (int b = 0; b < v_nblk; b++) begin
      int ci = cin_of(b), ce = ce_of(b), co = blk_cout(b, DIV);
      int u_ai = UNIT_ACT_BASE + 2 * b;
      int ho = conv_out(h, 3, blk_s(b), 1);
      act(a, ci, u_ai, ain_step(b), 1'b1, q);
      if (blk_t(b) != 1) begin
        conv(q, h, ci, 1, 1, ce, unit_exp(b), WB_REST, e);
        act(e, ce, unit_exp(b), thr_step(ci, 8), 1'b0, e);
      end else e = q;
      dwconv(e, h, ce, blk_s(b), unit_dw(b), blk_wb_dw(b), d);
      act(d, ce, unit_dw(b), thr_step(9, 8), 1'b0, d);
      conv(d, ho, ce, 1, 1, co, unit_proj(b), blk_wb_proj(b), p);
      if (blk_res(b)) begin
        act(p, co, u_ai + 1, thr_step(ce, 8), 1'b1, r);
        add(r, q, a);
      end else a = p;
      h = ho;
    end
    act(a, blk_cout(NUM_BLOCKS - 1, DIV), UNIT_HEAD_ACT, thr_step(ce_of(NUM_BLOCKS - 1), 8), 1'b1, q);
    conv(q, h, blk_cout(NUM_BLOCKS - 1, DIV), 1, 1, C_HEAD, UNIT_HEAD, WB_REST, e);
    act(e, C_HEAD, UNIT_HEAD, thr_step(blk_cout(NUM_BLOCKS - 1, DIV), 8), 1'b0, y);
  endfunction

  // ------------------------------------------------------------ loading
  task automatic wr(input int unit, input cfg_sel_e sel, input int row, input int col, input int data);
    cfg.we <= 1'b1; cfg.sel <= sel; cfg.unit <= 8'(unit);
    cfg.row <= 16'(row); cfg.col <= 16'(col); cfg.data <= data;
    @(posedge clk);
  endtask

  task automatic load_mv(input int unit, input int mh, input int mw, input int wb,
                         input bit thr, input int step);
    for (int o = 0; o < mh; o++) begin
      for (int i = 0; i < mw; i++) wr(unit, CFG_WEIGHT, o, i, wgen(unit, o, i, wb));
      if (thr) for (int t = 0; t < 15; t++) wr(unit, CFG_THRESH, o, t, tgen(unit, o, t, step, 1'b0));
    end
  endtask

  task automatic load_thr(input int unit, input int c, input int step);
    for (int o = 0; o < c; o++)
      for (int t = 0; t < 15; t++) wr(unit, CFG_THRESH, o, t, tgen(unit, o, t, step, 1'b1));
  endtask

  task automatic load_all();
    load_mv(UNIT_STEM, STEM_CH / DIV, 9 * IN_CH, WB_STEM, 1'b1, STEM_STEP);
    for (int b = 0; b < v_nblk; b++) begin
      automatic int ci = cin_of(b), ce = ce_of(b), co = blk_cout(b, DIV);
      load_thr(UNIT_ACT_BASE + 2 * b, ci, ain_step(b));
      if (blk_t(b) != 1) load_mv(unit_exp(b), ce, ci, WB_REST, 1'b1, thr_step(ci, 8));
      load_mv(unit_dw(b), ce, 9, blk_wb_dw(b), 1'b1, thr_step(9, 8));
      load_mv(unit_proj(b), co, ce, blk_wb_proj(b), 1'b0, 0);
      if (blk_res(b)) load_thr(UNIT_ACT_BASE + 2 * b + 1, co, thr_step(ce, 8));
    end
    load_thr(UNIT_HEAD_ACT, blk_cout(NUM_BLOCKS - 1, DIV), thr_step(ce_of(NUM_BLOCKS - 1), 8));
    load_mv(UNIT_HEAD, C_HEAD, blk_cout(NUM_BLOCKS - 1, DIV), WB_REST, 1'b1,
            thr_step(blk_cout(NUM_BLOCKS - 1, DIV), 8));
  endtask

  // ------------------------------------------------------ stream driver
  always @(negedge clk) if (rst_n && cfg.unit == 8'hFF) begin
    if (in_fire) sent++;
    if (!in_valid || in_fire) begin
      if (sent < NTOT*IMG*IMG && (free_run || ($urandom % 4 != 0)) && sent < (free_run ? NTOT : NF)*IMG*IMG) begin
        in_valid = 1'b1;
        for (int c = 0; c < v_inch; c++)
          in_data[c*IN_BITS +: IN_BITS] = IN_BITS'(img[sent / (v_img*v_img)][(sent % (v_img*v_img))*v_inch + c]);
      end else in_valid = 1'b0;
    end
    out_ready = free_run ? 1'b1 : ($urandom % 3 != 0);
    #1;
    in_fire = in_valid && in_ready;
    if (in_valid && !in_ready) n_in_bp++;
    if (out_valid && !out_ready) n_out_bp++;
    if (dut.u_stem.stall) n_stall++;
    if (dut.u_stem_swg.out_valid && dut.u_stem_swg.out_ready) n_s2++;
    if (dut.g_blk[2].u_block.g_res.u_add.a_valid && dut.g_blk[2].u_block.g_res.u_add.a_ready) n_add++;
    if (out_valid && out_ready) begin
      int f, px;
      f = got / v_npix;
      px = got % v_npix;
      if (px == 0) t_frame[f] = cyc;
      for (int c = 0; c < v_chead; c++) begin
        int hw, e;
        hw = int'(out_data[c*ACT_BITS +: ACT_BITS]);
        e = expo[f][px*v_chead + c];
        checks++;
        if (hw != e) begin
          failures++;
          if (failures < 10) $display("frame %0d pixel %0d ch %0d: got %0d expected %0d", f, px, c, hw, e);
        end
      end
      got++;
    end
  end

  initial begin
    longint t0;
    cfg = '0;
    cfg.unit = 8'hFF;
    in_valid = 0; in_data = '0; out_ready = 0;
    v_img = IMG; v_nblk = NUM_BLOCKS; v_chead = C_HEAD; v_npix = NPIX; v_inch = IN_CH;
    for (int f = 0; f < NTOT; f++) begin
      img[f] = new[v_img*v_img*v_inch];
      foreach (img[f][i]) img[f][i] = int'($urandom % 256) - 128;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    t0 = cyc;
    load_all();
    cfg <= '0;
    cfg.unit <= 8'hFF;
    @(posedge clk);
    $display("configuration loaded in %0d cycles", cyc - t0);
    for (int f = 0; f < NTOT; f++) model(img[f], expo[f]);
    $display("reference model done");
    wait (got == NF * NPIX);
    @(negedge clk);
    free_run = 1;
    wait (got == NTOT * NPIX);
    repeat (2) @(posedge clk);
    for (int f = NF + 1; f < NTOT; f++) begin
      $display("frame interval %0d cycles (budget %0d)", t_frame[f] - t_frame[f - 1], BUD);
      checks++;
      if (t_frame[f] - t_frame[f - 1] > BUD + SLACK) begin
        failures++;
        $display("frame interval above budget");
      end
    end
    $display("residual adds %0d, input back-pressure %0d, output back-pressure %0d, stem stalls %0d, stem windows %0d",
             n_add, n_in_bp, n_out_bp, n_stall, n_s2);
    checks++; if (n_add == 0) begin failures++; $display("no residual addition"); end
    checks++; if (n_in_bp == 0) begin failures++; $display("no input back-pressure"); end
    checks++; if (n_out_bp == 0) begin failures++; $display("no output back-pressure"); end
    checks++; if (n_stall == 0) begin failures++; $display("no stem stall"); end
    checks++; if (n_s2 != NTOT * conv_out(IMG, 3, 2, 1) ** 2) begin failures++; $display("stem window count wrong"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
