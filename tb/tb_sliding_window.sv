// tb_sliding_window -- self-checking test of sliding_window.
// Two instances run side by side: a stride-2 window over an odd 7x7 map
// (the padding on the right and bottom edges differs from the left and
// top) and a stride-1 window over a 6x6 map.  Each receives three
// random frames back to back with random input gaps and random output
// back-pressure; every tap of every window is compared with the pixel
// (or the zero padding) it must hold.  A fourth frame with no gaps and
// no back-pressure checks that the stride-1 instance emits its 36
// windows within one input frame time plus a short fill latency.
module tb_sliding_window;
  localparam int NF = 3;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  int done_cnt = 0;
  bit free_run = 0;

  always #5 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < 2; g++) begin : g_cfg
    localparam int C  = (g == 0) ? 2 : 3;
    localparam int EB = (g == 0) ? 4 : 5;
    localparam int H  = (g == 0) ? 7 : 6;
    localparam int S  = (g == 0) ? 2 : 1;
    localparam int K  = 3;
    localparam int OH = (H + 2 - K) / S + 1;
    localparam int NFR = NF + 1;

    logic in_valid, in_ready, out_valid, out_ready;
    logic [C*EB-1:0] in_data;
    logic [K*K*C*EB-1:0] out_data;
    logic [C*EB-1:0] img [NFR][H*H];
    int sent = 0, got = 0, t_first = 0, t_last = 0, cyc = 0;

    sliding_window #(.C(C), .EB(EB), .H(H), .K(K), .S(S), .P(1)) dut (.*);

    initial begin
      for (int f = 0; f < NFR; f++)
        for (int i = 0; i < H*H; i++) img[f][i] = (C*EB)'($urandom);
      in_valid = 0; out_ready = 0; in_data = '0;
    end

    // drive on the falling edge, settle, then record what the next
    // rising edge transfers
    bit in_fire = 0;
    always @(negedge clk) if (rst_n) begin
      cyc++;
      if (in_fire) sent++;
      if (!in_valid || in_fire) begin
        if (sent < NFR*H*H && (sent >= NF*H*H ? free_run : ($urandom % 3 != 0))) begin
          in_valid = 1'b1;
          in_data  = img[sent / (H*H)][sent % (H*H)];
        end else in_valid = 1'b0;
      end
      out_ready = (got >= NF*OH*OH) ? free_run : ($urandom % 3 != 0);
      #1;
      in_fire = in_valid && in_ready;
      if (out_valid && out_ready) begin
        int f, oy, ox;
        f  = got / (OH*OH);
        oy = (got % (OH*OH)) / OH;
        ox = got % OH;
        for (int ky = 0; ky < K; ky++)
          for (int kx = 0; kx < K; kx++) begin
            int y, x;
            logic [C*EB-1:0] e;
            y = oy*S - 1 + ky;
            x = ox*S - 1 + kx;
            e = (y < 0 || y >= H || x < 0 || x >= H) ? '0 : img[f][y*H + x];
            checks++;
            if (out_data[(ky*K+kx)*C*EB +: C*EB] !== e) begin
              failures++;
              if (failures < 10)
                $display("cfg %0d frame %0d window (%0d,%0d) tap %0d: got %h expected %h",
                         g, f, oy, ox, ky*K+kx, out_data[(ky*K+kx)*C*EB +: C*EB], e);
            end
          end
        if (got == NF*OH*OH) t_first = cyc;
        if (got == NFR*OH*OH - 1) begin
          t_last = cyc;
          done_cnt++;
        end
        got++;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (g_cfg[0].got == NF*16 && g_cfg[1].got == NF*36);  // 4x4 and 6x6 windows per frame
    free_run = 1;
    wait (done_cnt == 2);
    // stride 1: 36 windows, input 36 pixels; allow one line plus 4 cycles of fill
    checks++;
    if (g_cfg[1].t_last - g_cfg[1].t_first > 6*6 + 6 + 4) begin
      failures++;
      $display("stride-1 frame took %0d cycles", g_cfg[1].t_last - g_cfg[1].t_first);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
