// add_streams -- element-wise addition of two quantised streams.
//
// Closes the residual connection of a stride-1 inverted residual block:
// each beat carries one pixel of C signed IB-bit activations from the
// main path (after its shared activation) and from the shortcut.  Both
// share one scale factor, so the sum is a plain integer addition and the
// result is IB+1 bits wide, with no overflow.  A beat is consumed when
// both inputs are valid and the output register is free; the sum is
// registered, so the latency is one cycle and the rate one pixel per
// cycle.  The integer addition of equally scaled tensors follows the
// paper; the handshake and the one-cycle register are this design's.
module add_streams #(
  parameter int unsigned C  = 4,
  parameter int unsigned IB = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                a_valid,
  output logic                a_ready,
  input  logic [C*IB-1:0]     a_data,
  input  logic                b_valid,
  output logic                b_ready,
  input  logic [C*IB-1:0]     b_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [C*(IB+1)-1:0] out_data
);
  localparam int unsigned OB = IB + 1;

  logic fire, free;
  logic [C*OB-1:0] sum;

  assign free    = !out_valid || out_ready;
  assign fire    = a_valid && b_valid && free;
  assign a_ready = b_valid && free;
  assign b_ready = a_valid && free;

  always_comb begin
    for (int c = 0; c < C; c++) begin
      sum[c*OB +: OB] = OB'(signed'(a_data[c*IB +: IB])) + OB'(signed'(b_data[c*IB +: IB]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        out_valid <= 1'b0;
    else if (fire)     out_valid <= 1'b1;
    else if (out_ready) out_valid <= 1'b0;
  end

  always_ff @(posedge clk) begin
    if (fire) out_data <= sum;
  end
endmodule
