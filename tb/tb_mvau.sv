// tb_mvau -- self-checking test of mvau.
// Two instances: (a) 12 inputs x 6 outputs folded SIMD=4, PE=3, signed
// 4-bit inputs, 3-bit weights and a signed multi-threshold output;
// (b) 10 x 4 folded SIMD=5, PE=2, unsigned inputs, 6-bit weights and the
// raw accumulator as output.  Weights and thresholds are loaded through
// the configuration bus from the generators of tb_ref_pkg, then 200
// random vectors go through each with random back-pressure; every output
// element is compared with a direct dot product (and threshold count).
// A last burst without back-pressure checks that a vector takes exactly
// (MW/SIMD)*(MH/PE) cycles.
module tb_mvau;
  import spe_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 200, NB = 40;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  int checks = 0, failures = 0, done_cnt = 0;
  bit free_run = 0;

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < 2; g++) begin : g_cfg
    localparam int MW = (g == 0) ? 12 : 10;
    localparam int MH = (g == 0) ? 6 : 4;
    localparam int SIMD = (g == 0) ? 4 : 5;
    localparam int PE = (g == 0) ? 3 : 2;
    localparam int IB = 4;
    localparam bit SG_IN = (g == 0);
    localparam int WB = (g == 0) ? 3 : 6;
    localparam bit THR = (g == 0);
    localparam int UNIT = 10 + g;
    localparam int AB = acc_bits(IB, WB, MW);
    localparam int OB = THR ? ACT_BITS : AB;
    localparam int STEP = thr_step(MW, 8);
    localparam int FOLD = (MW / SIMD) * (MH / PE);

    logic in_valid, in_ready, out_valid, out_ready;
    logic [MW*IB-1:0] in_data;
    logic [MH*OB-1:0] out_data;
    logic [MW*IB-1:0] vec [N + NB];
    int sent = 0, got = 0, cyc = 0, t_prev = 0;

    mvau #(.MW(MW), .MH(MH), .SIMD(SIMD), .PE(PE), .IB(IB), .IN_SIGNED(SG_IN),
           .WB(WB), .USE_THR(THR), .OUT_SIGNED(1'b1), .UNIT(UNIT)) dut (.*);

    function automatic int expect_out(int v, int o);
      int acc = 0;
      for (int i = 0; i < MW; i++) begin
        logic [IB-1:0] e = vec[v][i*IB +: IB];
        acc += (SG_IN ? int'(signed'(e)) : int'(e)) * wgen(UNIT, o, i, WB);
      end
      return THR ? thr_apply(acc, UNIT, o, STEP, 1'b1) : acc;
    endfunction

    initial begin
      for (int i = 0; i < N + NB; i++)
        for (int j = 0; j < MW; j++) vec[i][j*IB +: IB] = IB'($urandom);
      in_valid = 0; out_ready = 0; in_data = '0;
    end

    // Stimulus and checks run on the falling edge: drive, let the
    // combinational outputs settle, then record what the next rising
    // edge will transfer.
    bit in_fire = 0;
    always @(negedge clk) if (rst_n && cfg.we == 0 && cfg.unit == 8'hFF) begin
      cyc++;
      if (in_fire) sent++;
      if (!in_valid || in_fire) begin
        if (sent < N + NB && (sent >= N ? free_run : ($urandom % 2 != 0))) begin
          in_valid = 1'b1;
          in_data  = vec[sent];
        end else in_valid = 1'b0;
      end
      out_ready = (got >= N) ? free_run : ($urandom % 3 != 0);
      #1;
      in_fire = in_valid && in_ready;
      if (out_valid && out_ready) begin
        for (int o = 0; o < MH; o++) begin
          int hw, e;
          hw = int'(signed'(out_data[o*OB +: OB]));
          e  = expect_out(got, o);
          checks++;
          if (hw != e) begin
            failures++;
            if (failures < 10) $display("cfg %0d vector %0d out %0d: got %0d expected %0d", g, got, o, hw, e);
          end
        end
        if (got > N + 2) begin
          checks++;
          if (cyc - t_prev != FOLD) begin
            failures++;
            $display("cfg %0d: vector interval %0d, expected %0d", g, cyc - t_prev, FOLD);
          end
        end
        t_prev = cyc;
        if (got == N + NB - 1) done_cnt++;
        got++;
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
    for (int o = 0; o < 6; o++) begin
      for (int i = 0; i < 12; i++) wr(10, CFG_WEIGHT, o, i, wgen(10, o, i, 3));
      for (int t = 0; t < 15; t++) wr(10, CFG_THRESH, o, t, tgen(10, o, t, thr_step(12, 8), 1'b1));
    end
    for (int o = 0; o < 4; o++)
      for (int i = 0; i < 10; i++) wr(11, CFG_WEIGHT, o, i, wgen(11, o, i, 6));
    cfg <= '0;
    cfg.unit <= 8'hFF;
    @(posedge clk);
    wait (g_cfg[0].got >= N && g_cfg[1].got >= N);
    free_run = 1;
    wait (done_cnt == 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
