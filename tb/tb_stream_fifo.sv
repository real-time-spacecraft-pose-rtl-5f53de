// tb_stream_fifo -- self-checking test of stream_fifo.
// Pushes 2000 random words with random valid/ready patterns through a
// 5-deep FIFO (not a power of two, to exercise pointer wrap) and checks
// that they leave in order and unchanged; checks that the FIFO reports
// full after DEPTH pushes without pops and that a word written at one
// edge can be read at the next.
module tb_stream_fifo;
  localparam int W = 12, D = 5, N = 2000;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  int checks = 0, failures = 0, sent = 0, got = 0;
  logic [W-1:0] q[$];

  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

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
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // fill without reading
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      in_valid = 1; in_data = W'(i + 100);
      #1;
      checks++; if (!in_ready) begin failures++; $display("not ready at push %0d", i); end
      q.push_back(W'(i + 100)); sent++;
    end
    @(negedge clk);
    in_valid = 0;
    #1;
    checks++; if (in_ready !== 1'b0) begin failures++; $display("not full after %0d pushes", D); end
    checks++; if (out_valid !== 1'b1 || out_data !== W'(100)) begin failures++; $display("head wrong"); end
    // random traffic
    fork
      begin
        stalled = 0;
        while (sent < N) begin
          @(negedge clk);
          if (!stalled) begin
            in_valid = ($urandom % 3) != 0;
            in_data  = W'($urandom);
          end
          #1;
          stalled = in_valid && !in_ready;
          if (in_valid && in_ready) begin q.push_back(in_data); sent++; end
        end
        @(negedge clk);
        in_valid = 0;
      end
      begin
        while (got < N) begin
          @(negedge clk);
          out_ready = ($urandom % 4) != 0;
          #1;
          if (out_valid && out_ready) begin
            logic [W-1:0] e;
            e = q.pop_front(); got++;
            checks++;
            if (out_data !== e) begin
              failures++;
              if (failures < 10) $display("word %0d: got %h expected %h", got, out_data, e);
            end
          end
        end
        @(negedge clk);
        out_ready = 0;
      end
    join
    // one-cycle fall-through into an empty FIFO
    @(negedge clk);
    in_valid = 1; in_data = 12'h5A5;
    @(negedge clk);
    in_valid = 0;
    #1;
    checks++; if (!(out_valid && out_data == 12'h5A5)) begin failures++; $display("no fall-through"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
