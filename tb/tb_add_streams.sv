// tb_add_streams -- self-checking test of add_streams.
// Two independent random streams of pixels of 6 signed 4-bit elements,
// each with its own random valid pattern, and a random output ready.
// Every output pixel must be the element-wise sum (5-bit signed) of the
// matching input pixels.  A final burst with both inputs always valid
// and the output always ready checks the rate of one pixel per cycle.
module tb_add_streams;
  localparam int C = 6, IB = 4, N = 800;
  logic clk = 0, rst_n = 0;
  logic a_valid, a_ready, b_valid, b_ready, out_valid, out_ready;
  logic [C*IB-1:0] a_data, b_data;
  logic [C*(IB+1)-1:0] out_data;
  int checks = 0, failures = 0, na = 0, nb = 0, no = 0;
  logic [C*IB-1:0] av[N], bv[N];

  add_streams #(.C(C), .IB(IB)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Stimulus is driven at the falling edge and sampled 1 time unit later,
  // so every handshake seen here is the one the next rising edge takes.
  initial begin
    for (int i = 0; i < N; i++) begin av[i] = ($urandom); bv[i] = ($urandom); end
    a_valid = 0; b_valid = 0; out_ready = 0; a_data = '0; b_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      begin
        bit sa = 0;
        while (na < N) begin
          @(negedge clk);
          if (!sa) begin
            a_valid = (na >= N - 100) || ($urandom % 3 != 0);
            a_data  = av[na];
          end
          #1;
          sa = a_valid && !a_ready;
          if (a_valid && a_ready) na++;
        end
        @(negedge clk);
        a_valid = 0;
      end
      begin
        bit sb = 0;
        while (nb < N) begin
          @(negedge clk);
          if (!sb) begin
            b_valid = (nb >= N - 100) || ($urandom % 2 != 0);
            b_data  = bv[nb];
          end
          #1;
          sb = b_valid && !b_ready;
          if (b_valid && b_ready) nb++;
        end
        @(negedge clk);
        b_valid = 0;
      end
      begin
        int first_fast = -1, t = 0;
        while (no < N) begin
          @(negedge clk);
          out_ready = (no >= N - 120) || ($urandom % 4 != 0);
          #1;
          t++;
          if (out_valid && out_ready) begin
            for (int c = 0; c < C; c++) begin
              int e;
              e = int'(signed'(av[no][c*IB +: IB])) + int'(signed'(bv[no][c*IB +: IB]));
              checks++;
              if (int'(signed'(out_data[c*(IB+1) +: IB+1])) != e) begin
                failures++;
                if (failures < 10) $display("pixel %0d ch %0d: got %0d expected %0d", no, c,
                                            int'(signed'(out_data[c*(IB+1) +: IB+1])), e);
              end
            end
            if (no == N - 60) first_fast = t;
            no++;
          end
        end
        // the last 60 pixels were all offered back to back
        checks++;
        if (t - first_fast > 60) begin failures++; $display("rate below one pixel per cycle"); end
      end
    join_any
    wait (no == N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
