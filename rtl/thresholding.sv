// thresholding -- standalone multi-threshold unit: the "shared
// activation" of the modified inverted residual block.
//
// Each beat is one pixel of C integer elements of IB bits (signed, or
// unsigned when IN_SIGNED = 0).  Element c is compared with the 15
// ascending thresholds of channel c; the count of thresholds reached,
// minus 8 when OUT_SIGNED, is the 4-bit output.  With OUT_SIGNED this is
// a quantised linear (identity) activation: it rescales a wide integer
// (a residual sum or a projection accumulator) onto the 4-bit grid whose
// scale factor the block input and the residual branch share, so the
// residual add stays integer.
//
// Folding: PE channels per cycle, C/PE cycles per pixel; one-entry input
// buffer and output register as in mvau.  Thresholds are loaded through
// the configuration bus (cfg.row = channel, cfg.col = threshold number).
// The shared activation and its threshold form follow the paper; per-
// channel thresholds, the signed output grid and the handshake are this
// design's choices.
module thresholding
  import spe_pkg::*;
#(
  parameter int unsigned C          = 8,
  parameter int unsigned PE         = 2,
  parameter int unsigned IB         = 5,
  parameter bit          IN_SIGNED  = 1'b1,
  parameter bit          OUT_SIGNED = 1'b1,
  parameter int unsigned UNIT       = 64
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  cfg_t                  cfg,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [C*IB-1:0]       in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [C*ACT_BITS-1:0] out_data
);
  localparam int unsigned NF  = C / PE;
  localparam int unsigned NFW = (NF > 1) ? $clog2(NF) : 1;
  localparam int unsigned OB  = ACT_BITS;

  logic signed [IB:0] tmem [C][NUM_THR];

  always_ff @(posedge clk) begin
    if (cfg.we && cfg.unit == 8'(UNIT) && cfg.sel == CFG_THRESH)
      tmem[int'(cfg.row)][int'(cfg.col)] <= (IB+1)'(cfg.data);
  end

  logic            in_full, busy, start, last_nf, stall, step;
  logic [C*IB-1:0] in_buf, x;
  logic [NFW-1:0]  nf;
  logic [C*OB-1:0] res, res_nx;

  assign last_nf  = (nf == NFW'(NF - 1));
  assign stall    = busy && last_nf && out_valid && !out_ready;
  assign step     = busy && !stall;
  assign start    = in_full && (!busy || (step && last_nf));
  assign in_ready = !in_full;

  always_comb begin
    res_nx = res;
    for (int p = 0; p < PE; p++) begin
      int c;
      logic [IB-1:0] e;
      logic signed [IB:0] v;
      int unsigned cnt;
      c = int'(nf) * PE + p;
      e = x[c*IB +: IB];
      v = IN_SIGNED ? (IB+1)'(signed'(e)) : (IB+1)'($unsigned(e));
      cnt = 0;
      for (int t = 0; t < NUM_THR; t++)
        if (v >= tmem[c][t]) cnt++;
      res_nx[c*OB +: OB] = OUT_SIGNED ? OB'(cnt) - OB'(1 << (ACT_BITS - 1)) : OB'(cnt);
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
    assert (C % PE == 0) else $error("thresholding: PE must divide C");
  end
endmodule
