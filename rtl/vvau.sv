// vvau -- folded depthwise KxK convolution unit with on-chip weights and
// multi-threshold activation.
//
// Each input beat is one window from sliding_window: K*K taps of C
// elements, element (tap, c) at bits [(tap*C+c)*IB +: IB].  Output
// channel c is the dot product of the K*K taps of channel c with that
// channel's own K*K weights, passed through the channel's 15 ascending
// thresholds (batch normalisation + ReLU + 4-bit quantisation): the
// output is the number of thresholds reached, 0..15.
//
// Folding: PE channels per cycle, all K*K taps at once, so one window
// takes C/PE cycles.  Row nf of the weight memory holds the PE*K*K
// weights of channels nf*PE .. nf*PE+PE-1.  Timing and handshake are the
// same as mvau: one-entry input buffer, output register written after
// the last fold step, back-to-back vectors every C/PE cycles.
//
// Configuration: cfg.row is the channel, cfg.col the tap (weights) or
// the threshold number.  The depthwise convolution with BN and ReLU is
// the paper's; the folding over channels, memory layout, loading bus and
// handshake are this design's choices.
module vvau
  import spe_pkg::*;
#(
  parameter int unsigned C          = 8,
  parameter int unsigned K          = 3,
  parameter int unsigned PE         = 2,
  parameter int unsigned IB         = 4,
  parameter bit          IN_SIGNED  = 1'b0,
  parameter int unsigned WB         = 3,
  parameter int unsigned UNIT       = 1,
  parameter int unsigned AB         = acc_bits(IB, WB, K * K)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  cfg_t                  cfg,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [K*K*C*IB-1:0]   in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [C*ACT_BITS-1:0] out_data
);
  localparam int unsigned KK  = K * K;
  localparam int unsigned NF  = C / PE;
  localparam int unsigned NFW = (NF > 1) ? $clog2(NF) : 1;
  localparam int unsigned OB  = ACT_BITS;

  logic signed [WB-1:0] wmem [NF][PE*KK];
  logic signed [AB:0]   tmem [C][NUM_THR];

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.unit == 8'(UNIT)) begin
      if (cfg.sel == CFG_WEIGHT)
        wmem[int'(cfg.row) / PE][(int'(cfg.row) % PE) * KK + int'(cfg.col)] <= WB'(cfg.data);
      else
        tmem[int'(cfg.row)][int'(cfg.col)] <= (AB+1)'(cfg.data);
    end
  end

  logic                in_full, busy, start, last_nf, stall, step;
  logic [KK*C*IB-1:0]  in_buf, x;
  logic [NFW-1:0]      nf;
  logic [C*OB-1:0]     res, res_nx;

  assign last_nf  = (nf == NFW'(NF - 1));
  assign stall    = busy && last_nf && out_valid && !out_ready;
  assign step     = busy && !stall;
  assign start    = in_full && (!busy || (step && last_nf));
  assign in_ready = !in_full;

  always_comb begin
    res_nx = res;
    for (int p = 0; p < PE; p++) begin
      int c;
      logic signed [AB:0] s;
      int unsigned cnt;
      c = int'(nf) * PE + p;
      s = '0;
      for (int k = 0; k < KK; k++) begin
        logic [IB-1:0] e;
        e = x[(k*C + c)*IB +: IB];
        s = s + (IN_SIGNED ? (AB+1)'(signed'(e)) : (AB+1)'($unsigned(e)))
              * (AB+1)'(wmem[nf][p*KK + k]);
      end
      cnt = 0;
      for (int t = 0; t < NUM_THR; t++)
        if (s >= tmem[c][t]) cnt++;
      res_nx[c*OB +: OB] = OB'(cnt);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_full   <= 1'b0;
      busy      <= 1'b0;
      nf        <= '0;
      out_valid <= 1'b0;
    end else begin
      if (in_valid && in_ready) in_full <= 1'b1;
      else if (start)           in_full <= 1'b0;

      if (out_valid && out_ready) out_valid <= 1'b0;

      if (step) begin
        if (last_nf) begin
          nf        <= '0;
          out_valid <= 1'b1;
          busy      <= start;
        end else begin
          nf <= nf + 1'b1;
        end
      end else if (start) begin
        busy <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) in_buf <= in_data;
    if (start) x <= in_buf;
    if (step) res <= res_nx;
    if (step && last_nf) out_data <= res_nx;
  end

  initial begin
    assert (C % PE == 0) else $error("vvau: PE must divide C");
  end
endmodule
