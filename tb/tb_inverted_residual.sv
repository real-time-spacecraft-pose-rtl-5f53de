// tb_inverted_residual -- self-checking test of inverted_residual.
// Three blocks run side by side:
//  0: residual block  (4 -> 4 channels, expansion 3, stride 1, 6x6 map,
//     5-bit signed input), with a small cycle budget so that the units
//     fold with PE/SIMD above one;
//  1: stride-2 block  (4 -> 6 channels, expansion 2, 7x7 map, unsigned
//     4-bit input), no residual, raw projection accumulator out;
//  2: first-block form (expansion 1: no expansion layer; 6-bit depthwise
//     and 4-bit projection weights; 4 -> 2 channels).
// All weights and thresholds are loaded through the configuration bus
// from the generators in tb_ref_pkg.  Three random frames per block are
// streamed with random gaps and random back-pressure, and every output
// element is compared with a layer-by-layer loop-nest model of the block.
// The test also counts the residual additions, the stalls of the fork on
// the shortcut and the output back-pressure cycles, and fails if any of
// them never happened.
module tb_inverted_residual;
  import spe_pkg::*;
  import tb_ref_pkg::*;
  localparam int NF = 3;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  int checks = 0, failures = 0, done_cnt = 0;
  int n_add = 0, n_fork_stall = 0, n_bp = 0;

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int p_cin(int g);  return 4; endfunction
  function automatic int p_cout(int g); return g == 0 ? 4 : g == 1 ? 6 : 2; endfunction
  function automatic int p_t(int g);    return g == 0 ? 3 : g == 1 ? 2 : 1; endfunction
  function automatic int p_s(int g);    return g == 1 ? 2 : 1; endfunction
  function automatic int p_h(int g);    return g == 0 ? 6 : g == 1 ? 7 : 5; endfunction
  function automatic int p_ib(int g);   return g == 0 ? 5 : 4; endfunction
  function automatic int p_wbdw(int g); return g == 2 ? 6 : 3; endfunction
  function automatic int p_wbpj(int g); return g == 2 ? 4 : 3; endfunction
  function automatic int p_ain_step(int g); return g == 0 ? 2 : 1; endfunction

  for (genvar g = 0; g < 3; g++) begin : g_cfg
    localparam int CIN = p_cin(g), COUT = p_cout(g), T = p_t(g), S = p_s(g), H = p_h(g);
    localparam int IB = p_ib(g);
    localparam bit SG = (g == 0);
    localparam int CE = CIN * T;
    localparam int HO = (H + 2 - 3) / S + 1;
    localparam bit RES = (S == 1) && (CIN == COUT);
    localparam int OB = ir_out_bits(CIN, T, RES, p_wbpj(g));
    localparam int U0 = 100 + 10 * g;       // exp, dw, proj, act_in, act_out
    localparam int BUD = g == 0 ? 288 : g == 1 ? 196 : 100000;

    logic in_valid, in_ready, out_valid, out_ready;
    logic [CIN*IB-1:0] in_data;
    logic [COUT*OB-1:0] out_data;
    int img [NF][];
    int expo [NF][];
    int sent = 0, got = 0;

    inverted_residual #(
      .CIN(CIN), .COUT(COUT), .T(T), .S(S), .H(H), .IB(IB), .IN_SIGNED(SG),
      .WB_EXP(3), .WB_DW(p_wbdw(g)), .WB_PROJ(p_wbpj(g)), .BUDGET(BUD),
      .FIFO_D(2), .SC_EXTRA(8),
      .U_EXP(U0), .U_DW(U0 + 1), .U_PROJ(U0 + 2), .U_ACT_IN(U0 + 3), .U_ACT_OUT(U0 + 4)
    ) dut (.*);

    initial begin
      for (int f = 0; f < NF; f++) begin
        int q[], e[], d[], p[], r[], o[];
        img[f] = new[H*H*CIN];
        for (int i = 0; i < H*H*CIN; i++)
          img[f][i] = SG ? int'($urandom % (1 << IB)) - (1 << (IB - 1)) : int'($urandom % (1 << IB));
        act(img[f], CIN, U0 + 3, p_ain_step(g), 1'b1, q);
        if (T != 1) begin
          conv(q, H, CIN, 1, 1, CE, U0, 3, e);
          act(e, CE, U0, thr_step(CIN, 8), 1'b0, e);
        end else e = q;
        dwconv(e, H, CE, S, U0 + 1, p_wbdw(g), d);
        act(d, CE, U0 + 1, thr_step(9, 8), 1'b0, d);
        conv(d, HO, CE, 1, 1, COUT, U0 + 2, p_wbpj(g), p);
        if (RES) begin
          act(p, COUT, U0 + 4, thr_step(CE, 8), 1'b1, r);
          add(r, q, o);
        end else o = p;
        expo[f] = o;
      end
      in_valid = 0; out_ready = 0; in_data = '0;
    end

    bit in_fire = 0;
    always @(negedge clk) if (rst_n && cfg.unit == 8'hFF) begin
      if (in_fire) sent++;
      if (!in_valid || in_fire) begin
        if (sent < NF*H*H && ($urandom % 4 != 0)) begin
          in_valid = 1'b1;
          for (int c = 0; c < CIN; c++) in_data[c*IB +: IB] = IB'(img[sent / (H*H)][(sent % (H*H))*CIN + c]);
        end else in_valid = 1'b0;
      end
      out_ready = ($urandom % 3 != 0);
      #1;
      in_fire = in_valid && in_ready;
      if (out_valid && !out_ready) n_bp++;
      if (out_valid && out_ready) begin
        int f, px;
        f = got / (HO*HO);
        px = got % (HO*HO);
        for (int c = 0; c < COUT; c++) begin
          int hw, e;
          hw = int'(signed'(out_data[c*OB +: OB]));
          e = expo[f][px*COUT + c];
          checks++;
          if (hw != e) begin
            failures++;
            if (failures < 10) $display("cfg %0d frame %0d pixel %0d ch %0d: got %0d expected %0d",
                                        g, f, px, c, hw, e);
          end
        end
        got++;
        if (got == NF*HO*HO) done_cnt++;
      end
    end

    if (RES) begin : g_mon
      always @(negedge clk) begin
        #2;
        if (dut.g_res.u_add.a_valid && dut.g_res.u_add.a_ready) n_add++;
        if (dut.g_fork.u_dup.in_valid && !dut.g_fork.u_dup.in_ready) n_fork_stall++;
      end
    end
  end

  task automatic wr(input int unit, input cfg_sel_e sel, input int row, input int col, input int data);
    cfg.we <= 1'b1; cfg.sel <= sel; cfg.unit <= 8'(unit);
    cfg.row <= 16'(row); cfg.col <= 16'(col); cfg.data <= data;
    @(posedge clk);
  endtask

  initial begin
    cfg = '0;
    cfg.unit = 8'hFF;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 3; g++) begin
      automatic int u0 = 100 + 10 * g;
      automatic int cin = p_cin(g), cout = p_cout(g), ce = p_cin(g) * p_t(g);
      if (p_t(g) != 1)
        for (int o = 0; o < ce; o++) begin
          for (int i = 0; i < cin; i++) wr(u0, CFG_WEIGHT, o, i, wgen(u0, o, i, 3));
          for (int t = 0; t < 15; t++) wr(u0, CFG_THRESH, o, t, tgen(u0, o, t, thr_step(cin, 8), 1'b0));
        end
      for (int o = 0; o < ce; o++) begin
        for (int k = 0; k < 9; k++) wr(u0 + 1, CFG_WEIGHT, o, k, wgen(u0 + 1, o, k, p_wbdw(g)));
        for (int t = 0; t < 15; t++) wr(u0 + 1, CFG_THRESH, o, t, tgen(u0 + 1, o, t, thr_step(9, 8), 1'b0));
      end
      for (int o = 0; o < cout; o++)
        for (int i = 0; i < ce; i++) wr(u0 + 2, CFG_WEIGHT, o, i, wgen(u0 + 2, o, i, p_wbpj(g)));
      for (int o = 0; o < cin; o++)
        for (int t = 0; t < 15; t++) wr(u0 + 3, CFG_THRESH, o, t, tgen(u0 + 3, o, t, p_ain_step(g), 1'b1));
      for (int o = 0; o < cout; o++)
        for (int t = 0; t < 15; t++) wr(u0 + 4, CFG_THRESH, o, t, tgen(u0 + 4, o, t, thr_step(ce, 8), 1'b1));
    end
    cfg <= '0;
    cfg.unit <= 8'hFF;
    @(posedge clk);
    wait (done_cnt == 3);
    repeat (2) @(posedge clk);
    $display("residual adds %0d, fork stalls %0d, output back-pressure cycles %0d", n_add, n_fork_stall, n_bp);
    checks++; if (n_add != NF*36) begin failures++; $display("residual add count wrong"); end
    checks++; if (n_fork_stall == 0) begin failures++; $display("fork never stalled"); end
    checks++; if (n_bp == 0) begin failures++; $display("no output back-pressure"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
