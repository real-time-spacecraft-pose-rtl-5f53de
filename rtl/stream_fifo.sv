// stream_fifo -- first-in first-out buffer between two dataflow units.
//
// The accelerator is a chain of units joined by FIFOs, which absorb
// differences in the instantaneous rates of neighbouring units; the
// deep instance on the residual shortcut of an inverted residual block
// holds the block input while the main path fills its line buffers.
// The FIFO is a circular buffer of DEPTH words of WIDTH bits with an
// occupancy counter.  Both sides use a valid/ready handshake: a word
// moves when valid and ready are high at a clock edge.  out_data shows
// the oldest word combinationally from the storage array (first-word
// fall-through), so a word written at edge n can be read at edge n+1.
// in_ready depends only on state, never on out_ready.
// The paper sizes its FIFOs by simulation but gives no depths; the
// depths used here are this design's choice.
module stream_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic [AW:0]      count;

  logic push, pop;
  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr];

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop)  rd_ptr <= incr(rd_ptr);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  // a producer must hold a word, unchanged, until it is taken
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           in_valid && !in_ready |=> in_valid && $stable(in_data));
endmodule
