// tb_vvau -- self-checking test of vvau.
// Two instances: (a) 6 channels, PE=3, signed 4-bit inputs and 6-bit
// weights (the configuration of the first depthwise layer); (b) 8
// channels, PE=2, unsigned inputs and 3-bit weights (all later depthwise
// layers).  Weights and thresholds are loaded through the configuration
// bus from the generators of tb_ref_pkg, then 200 random 3x3 windows go
// through each with random back-pressure; every output channel is
// compared with a direct 9-tap dot product and threshold count.  A last
// burst without back-pressure checks that a window takes exactly C/PE
// cycles.
module tb_vvau;
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
    localparam int C = (g == 0) ? 6 : 8;
    localparam int PE = (g == 0) ? 3 : 2;
    localparam int IB = 4;
    localparam bit SG_IN = (g == 0);
    localparam int WB = (g == 0) ? 6 : 3;
    localparam int UNIT = 20 + g;
    localparam int MW = 9 * C;
    localparam int MH = C;
    localparam int OB = ACT_BITS;
    localparam int STEP = thr_step(9, 8);
    localparam int FOLD = C / PE;

    logic in_valid, in_ready, out_valid, out_ready;
    logic [MW*IB-1:0] in_data;
    logic [MH*OB-1:0] out_data;
    logic [MW*IB-1:0] vec [N + NB];
    int sent = 0, got = 0, cyc = 0, t_prev = 0;

    vvau #(.C(C), .K(3), .PE(PE), .IB(IB), .IN_SIGNED(SG_IN), .WB(WB), .UNIT(UNIT)) dut (.*);

    function automatic int expect_out(int v, int o);
      int acc = 0;
      for (int k = 0; k < 9; k++) begin
        logic [IB-1:0] e = vec[v][(k*C + o)*IB +: IB];
        acc += (SG_IN ? int'(signed'(e)) : int'(e)) * wgen(UNIT, o, k, WB);
      end
      return thr_apply(acc, UNIT, o, STEP, 1'b0);
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
          hw = int'(out_data[o*OB +: OB]);
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
    for (int g = 0; g < 2; g++) begin
      automatic int c = (g == 0) ? 6 : 8;
      automatic int wb = (g == 0) ? 6 : 3;
      for (int o = 0; o < c; o++) begin
        for (int k = 0; k < 9; k++) wr(20 + g, CFG_WEIGHT, o, k, wgen(20 + g, o, k, wb));
        for (int t = 0; t < 15; t++) wr(20 + g, CFG_THRESH, o, t, tgen(20 + g, o, t, thr_step(9, 8), 1'b0));
      end
    end
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
