// mvau -- folded matrix-vector unit with on-chip weights and an optional
// multi-threshold activation.
//
// Computes y = W x for one input vector per beat, where W is MH x MW
// (MH output channels, MW inputs: K*K*Cin for a KxK convolution fed by
// sliding_window, Cin for a 1x1 convolution fed pixel by pixel).  The
// work is folded: each cycle SIMD inputs of PE output channels are
// multiplied and accumulated, so one vector takes
// (MW/SIMD) * (MH/PE) cycles.  Row nf*SF+sf of the weight memory holds
// the PE*SIMD weights used in fold step (nf, sf).
//
// With USE_THR = 1 each finished accumulator is compared with the 15
// ascending thresholds of its channel; the output is the number of
// thresholds it reaches (0..15), minus 8 when OUT_SIGNED, giving a 4-bit
// activation.  This folds batch normalisation, ReLU and quantisation
// into integer compares.  With USE_THR = 0 the raw accumulator is the
// output (projection convolutions, whose activation is a separate unit).
//
// Timing: an input vector is taken into a one-entry buffer; compute
// starts the next cycle and the full output vector appears in the output
// register after (MW/SIMD)*(MH/PE) cycles.  A new vector starts in the
// cycle after the previous one finishes, so the unit sustains one vector
// per (MW/SIMD)*(MH/PE) cycles.  Compute stalls in its last step while
// the previous output has not been taken.
//
// Weights and thresholds are written one at a time through the
// configuration bus (cfg.unit == UNIT).  The folded matrix-vector
// structure, on-chip weights, threshold activations and bit-widths follow
// the paper; the loading bus, the memory layout and the handshake are
// this design's choices.
module mvau
  import spe_pkg::*;
#(
  parameter int unsigned MW         = 16,  // inputs per vector
  parameter int unsigned MH         = 8,   // outputs per vector
  parameter int unsigned SIMD       = 4,
  parameter int unsigned PE         = 2,
  parameter int unsigned IB         = 4,   // input element bits
  parameter bit          IN_SIGNED  = 1'b1,
  parameter int unsigned WB         = 3,   // weight bits (signed)
  parameter bit          USE_THR    = 1'b1,
  parameter bit          OUT_SIGNED = 1'b0,
  parameter int unsigned UNIT       = 0,
  // accumulator and output widths (derived)
  parameter int unsigned AB         = acc_bits(IB, WB, MW),
  parameter int unsigned OB         = USE_THR ? ACT_BITS : AB
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [MW*IB-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [MH*OB-1:0] out_data
);
  localparam int unsigned SF  = MW / SIMD;
  localparam int unsigned NF  = MH / PE;
  localparam int unsigned SFW = (SF > 1) ? $clog2(SF) : 1;
  localparam int unsigned NFW = (NF > 1) ? $clog2(NF) : 1;

  // ------------------------------------------------------------ memories
  logic signed [WB-1:0] wmem [NF*SF][PE*SIMD];
  logic signed [AB:0]   tmem [MH][NUM_THR];

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.unit == 8'(UNIT)) begin
      if (cfg.sel == CFG_WEIGHT)
        wmem[(int'(cfg.row) / PE) * SF + int'(cfg.col) / SIMD]
            [(int'(cfg.row) % PE) * SIMD + int'(cfg.col) % SIMD] <= WB'(cfg.data);
      else if (USE_THR)
        tmem[int'(cfg.row)][int'(cfg.col)] <= (AB+1)'(cfg.data);
    end
  end

  // ---------------------------------------------------------- datapath
  logic             in_full, busy, start, last_sf, last_nf, stall, step;
  logic [MW*IB-1:0] in_buf, x;
  logic [SFW-1:0]   sf;
  logic [NFW-1:0]   nf;
  logic signed [AB-1:0] acc [PE];
  logic signed [AB-1:0] acc_nx [PE];
  logic [MH*OB-1:0] res, res_nx;

  assign last_sf  = (sf == SFW'(SF - 1));
  assign last_nf  = (nf == NFW'(NF - 1));
  assign stall    = busy && last_sf && last_nf && out_valid && !out_ready;
  assign step     = busy && !stall;
  assign start    = in_full && (!busy || (step && last_sf && last_nf));
  assign in_ready = !in_full;

  function automatic logic signed [AB:0] elem(logic [MW*IB-1:0] v, int i);
    logic [IB-1:0] e = v[i*IB +: IB];
    return IN_SIGNED ? (AB+1)'(signed'(e)) : (AB+1)'($unsigned(e));
  endfunction

  always_comb begin
    logic [PE*SIMD*WB-1:0] wrow;
    for (int l = 0; l < PE * SIMD; l++)
      wrow[l*WB +: WB] = wmem[int'(nf) * SF + int'(sf)][l];
    res_nx = res;
    for (int p = 0; p < PE; p++) begin
      logic signed [AB:0] s;
      s = (AB+1)'(acc[p]);
      for (int k = 0; k < SIMD; k++)
        s = s + elem(x, int'(sf) * SIMD + k) * (AB+1)'(signed'(wrow[(p*SIMD+k)*WB +: WB]));
      acc_nx[p] = AB'(s);
      if (USE_THR) begin
        int unsigned cnt;
        cnt = 0;
        for (int t = 0; t < NUM_THR; t++)
          if (s >= tmem[int'(nf) * PE + p][t]) cnt++;
        res_nx[(int'(nf)*PE + p)*OB +: OB] =
            OUT_SIGNED ? OB'(cnt) - OB'(1 << (ACT_BITS - 1)) : OB'(cnt);
      end else begin
        res_nx[(int'(nf)*PE + p)*OB +: OB] = OB'(s);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_full   <= 1'b0;
      busy      <= 1'b0;
      sf        <= '0;
      nf        <= '0;
      out_valid <= 1'b0;
      for (int p = 0; p < PE; p++) acc[p] <= '0;
    end else begin
      if (in_valid && in_ready) in_full <= 1'b1;
      else if (start)           in_full <= 1'b0;

      if (out_valid && out_ready) out_valid <= 1'b0;

      if (step) begin
        for (int p = 0; p < PE; p++) acc[p] <= last_sf ? '0 : acc_nx[p];
        if (last_sf) begin
          sf <= '0;
          if (last_nf) begin
            nf        <= '0;
            out_valid <= 1'b1;
            busy      <= start;
          end else begin
            nf <= nf + 1'b1;
          end
        end else begin
          sf <= sf + 1'b1;
        end
      end else if (start) begin
        busy <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) in_buf <= in_data;
    if (start) x <= in_buf;
    if (step && last_sf) res <= res_nx;
    if (step && last_sf && last_nf) out_data <= res_nx;
  end

  initial begin
    assert (MW % SIMD == 0 && MH % PE == 0)
      else $error("mvau: SIMD must divide MW and PE must divide MH");
  end
endmodule
