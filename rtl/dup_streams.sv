// dup_streams -- copies one stream onto two outputs.
//
// Forks the output of a block's input activation into the main path and
// the residual shortcut of an inverted residual block.  Each output has
// its own valid/ready pair; a word is offered on both at once and the
// input is taken only once both outputs have accepted it, in the same
// cycle or earlier (a per-output `taken` flag remembers an early
// acceptance).  No storage beyond the two flags; outputs follow the
// input combinationally.  The fork itself is in the paper's block
// diagram; the handshake is this design's choice.
module dup_streams #(
  parameter int unsigned WIDTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out0_valid,
  input  logic             out0_ready,
  output logic [WIDTH-1:0] out0_data,
  output logic             out1_valid,
  input  logic             out1_ready,
  output logic [WIDTH-1:0] out1_data
);
  logic taken0, taken1;
  logic done0, done1;

  assign out0_valid = in_valid && !taken0;
  assign out1_valid = in_valid && !taken1;
  assign out0_data  = in_data;
  assign out1_data  = in_data;
  assign done0      = taken0 || out0_ready;
  assign done1      = taken1 || out1_ready;
  assign in_ready   = done0 && done1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      taken0 <= 1'b0;
      taken1 <= 1'b0;
    end else if (in_valid) begin
      if (in_ready) begin
        taken0 <= 1'b0;
        taken1 <= 1'b0;
      end else begin
        taken0 <= done0;
        taken1 <= done1;
      end
    end
  end
endmodule
