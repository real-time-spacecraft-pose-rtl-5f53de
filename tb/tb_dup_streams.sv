// tb_dup_streams -- self-checking test of dup_streams.
// Sends 1000 random words with random valid patterns; each output has its
// own random ready.  Both outputs must see every word exactly once and in
// order, whatever the order in which they accept it.
module tb_dup_streams;
  localparam int W = 10, N = 1000;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out0_valid, out0_ready, out1_valid, out1_ready;
  logic [W-1:0] in_data, out0_data, out1_data;
  int checks = 0, failures = 0, sent = 0, got0 = 0, got1 = 0;
  logic [W-1:0] ref_q[N];

  dup_streams #(.WIDTH(W)) dut (.*);

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
    bit stalled;
    for (int i = 0; i < N; i++) ref_q[i] = W'($urandom);
    in_valid = 0; in_data = '0; out0_ready = 0; out1_ready = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      begin
        stalled = 0;
        while (sent < N) begin
          @(negedge clk);
          if (!stalled) begin
            in_valid = ($urandom % 3) != 0;
            in_data  = ref_q[sent];
          end
          #1;
          stalled = in_valid && !in_ready;
          if (in_valid && in_ready) sent++;
        end
        @(negedge clk);
        in_valid = 0;
      end
      begin
        while (got0 < N || got1 < N) begin
          @(negedge clk);
          out0_ready = ($urandom % 2) != 0;
          out1_ready = ($urandom % 3) != 0;
          #1;
          if (out0_valid && out0_ready) begin
            checks++;
            if (out0_data !== ref_q[got0]) begin failures++; $display("out0 word %0d wrong", got0); end
            got0++;
          end
          if (out1_valid && out1_ready) begin
            checks++;
            if (out1_data !== ref_q[got1]) begin failures++; $display("out1 word %0d wrong", got1); end
            got1++;
          end
        end
      end
    join
    checks++;
    if (got0 != N || got1 != N) begin failures++; $display("counts %0d %0d", got0, got1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
