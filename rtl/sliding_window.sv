// sliding_window -- convolution input generator (im2col) for KxK
// convolutions with stride S and zero padding P on a square H x H map.
//
// Input: one pixel per beat, C elements of EB bits, in raster order
// (row by row, left to right).  Output: one window per beat, K*K pixels
// in tap order ky*K+kx (tap 0 = top-left), each tap holding the C
// elements of that pixel, so element (tap, c) sits at bits
// [(tap*C+c)*EB +: EB].  Taps that fall outside the map are zero.
// Windows leave in raster order of the OH x OH output map,
// OH = (H + 2P - K)/S + 1.
//
// Pixels are stored in a ring of NB = K + S line buffers.  An incoming
// pixel of row r overwrites row r - NB and is accepted only while
// r < top + NB, where top is the first input row of the window row now
// being produced; the extra S lines let the input stream in the next
// rows while the current window row is emitted.  A window is emitted
// once the input has delivered its bottom-right in-map pixel.  After
// the last window of a frame both counters restart, so frames follow
// one another without gaps beyond that hand-over.  The output is
// registered: one window per cycle at most.
// The paper names this unit (im2col) but not its insides; the line
// buffer ring, zero padding and tap order are this design's choices.
module sliding_window #(
  parameter int unsigned C  = 4,
  parameter int unsigned EB = 4,
  parameter int unsigned H  = 8,
  parameter int unsigned K  = 3,
  parameter int unsigned S  = 1,
  parameter int unsigned P  = 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [C*EB-1:0]       in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [K*K*C*EB-1:0]   out_data
);
  localparam int unsigned OH = (H + 2*P - K) / S + 1;
  localparam int unsigned NB = K + S;
  localparam int unsigned PW = C * EB;
  localparam int unsigned RW = $clog2(H + NB + 1) + 1;  // signed row/col width
  localparam int unsigned SW = $clog2(NB + 1);

  typedef logic signed [RW-1:0] idx_t;

  logic [PW-1:0] lbuf [NB][H];

  // write side
  idx_t          wr_r, wr_c;
  logic [SW-1:0] wr_slot;
  // read side
  idx_t          oy, ox;      // output coordinates
  idx_t          top, left;   // window origin in input coordinates
  logic [SW-1:0] top_slot;    // line buffer holding row `top` (mod NB)

  idx_t lr, lc;
  logic avail, free, emit, push, last_out;

  function automatic logic [SW-1:0] slot_add(logic [SW-1:0] a, int unsigned d);
    int unsigned v = int'(a) + d;
    return SW'(v % NB);
  endfunction

  assign top  = oy * idx_t'(S) - idx_t'(P);
  assign left = ox * idx_t'(S) - idx_t'(P);

  // bottom-right pixel of the window that lies inside the map
  always_comb begin
    lr = top + idx_t'(K - 1);
    lc = left + idx_t'(K - 1);
    if (lr > idx_t'(H - 1)) lr = idx_t'(H - 1);
    if (lc > idx_t'(H - 1)) lc = idx_t'(H - 1);
  end

  assign avail    = (wr_r > lr) || (wr_r == lr && wr_c > lc);
  assign free     = !out_valid || out_ready;
  assign emit     = avail && free;
  assign last_out = (oy == idx_t'(OH - 1)) && (ox == idx_t'(OH - 1));
  assign in_ready = (wr_r < idx_t'(H)) && (wr_r < top + idx_t'(NB));
  assign push     = in_valid && in_ready;

  // window assembly from the line buffers
  logic [K*K*PW-1:0] win;
  always_comb begin
    for (int ky = 0; ky < K; ky++) begin
      for (int kx = 0; kx < K; kx++) begin
        idx_t r, c;
        r = top + idx_t'(ky);
        c = left + idx_t'(kx);
        if (r < 0 || r >= idx_t'(H) || c < 0 || c >= idx_t'(H))
          win[(ky*K+kx)*PW +: PW] = '0;
        else
          win[(ky*K+kx)*PW +: PW] = lbuf[slot_add(top_slot, ky)][c[RW-2:0]];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_r      <= '0;
      wr_c      <= '0;
      wr_slot   <= '0;
      oy        <= '0;
      ox        <= '0;
      top_slot  <= SW'((NB - P) % NB);
      out_valid <= 1'b0;
    end else begin
      if (emit) out_valid <= 1'b1;
      else if (out_ready) out_valid <= 1'b0;

      if (emit && last_out) begin
        // frame complete: every input pixel has been consumed
        wr_r     <= '0;
        wr_c     <= '0;
        wr_slot  <= '0;
        oy       <= '0;
        ox       <= '0;
        top_slot <= SW'((NB - P) % NB);
      end else begin
        if (push) begin
          if (wr_c == idx_t'(H - 1)) begin
            wr_c    <= '0;
            wr_r    <= wr_r + 1'b1;
            wr_slot <= slot_add(wr_slot, 1);
          end else begin
            wr_c <= wr_c + 1'b1;
          end
        end
        if (emit) begin
          if (ox == idx_t'(OH - 1)) begin
            ox       <= '0;
            oy       <= oy + 1'b1;
            top_slot <= slot_add(top_slot, S);
          end else begin
            ox <= ox + 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (push) lbuf[wr_slot][wr_c[RW-2:0]] <= in_data;
    if (emit) out_data <= win;
  end

  // the last window needs the last pixel, so no push can race the restart
  a_no_push_at_restart: assert property (@(posedge clk) disable iff (!rst_n)
                                         emit && last_out |-> !push);
endmodule
