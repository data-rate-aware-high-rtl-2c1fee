// window_ctrl -- position counter of a convolutional layer.
//
// The input stream carries P pixels per beat in raster order, images back to
// back without gaps; a beat is T valid cycles long (its j features are held
// for h cycles each, for d_in/j groups, so T = h*d_in/j). The counter keeps
// the row/column of the pixel on lane 0 and the phase (0..T-1) inside the
// beat; everything advances only on cycles with `en` high.
//
// For every lane a it derives, combinationally for the current cycle, the
// sliding window whose last (bottom-right) pixel is the lane's pixel:
//   * win_valid[a]   -- the window is one of the layer's outputs (inside the
//                       padded image and on the stride grid);
//   * pad_win[a][t]  -- tap t = kr*K+kc of that window lies in the zero
//                       padding (used by the non-transposed KPU).
// A window that ends beyond the right edge of a row ends, in the stream, on
// the first pixels of the next row; one that ends below the last row ends
// on the first rows of the next image. Both are mapped back to their
// "virtual" position (column c+W or row r+H), which is unambiguous while
// PD <= (K-1)/2. Windows reaching into a previous image are not valid until
// one image has passed.
// For the transposed KPU, which multiplies the current pixel with all K*K
// weights at once, pad_tr[t] tells whether the current pixel (lane 0) has to
// be replaced by zero at tap t.
//
// The paper states only that pad selects and validity come from "a simple
// counter in the layer"; the mapping above is this design's own.
module window_ctrl #(
  parameter int W  = 5,   // image width
  parameter int H  = 5,   // image height
  parameter int K  = 3,   // kernel size
  parameter int S  = 1,   // stride
  parameter int PD = 1,   // zero padding on each side
  parameter int P  = 2,   // pixels per beat
  parameter int T  = 1    // cycles per beat
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  output logic [$clog2(T+1)-1:0] phase,
  output logic [P-1:0]         win_valid,
  output logic [K*K-1:0]       pad_win [P],
  output logic [K*K-1:0]       pad_tr
);
  localparam int RW = $clog2(H + 2) + 1;
  localparam int CW = $clog2(W + P + 2) + 1;

  logic [RW-1:0] r0;
  logic [CW-1:0] c0;
  logic          prev_ok;   // one image has been seen completely

  // ---------------- counters ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase   <= '0;
      r0      <= '0;
      c0      <= '0;
      prev_ok <= 1'b0;
    end else if (en) begin
      if (int'(phase) == T - 1) begin
        phase <= '0;
        if (int'(c0) + P >= W) begin
          c0 <= CW'(int'(c0) + P - W);
          if (int'(r0) == H - 1) begin
            r0      <= '0;
            prev_ok <= 1'b1;
          end else begin
            r0 <= r0 + 1'b1;
          end
        end else begin
          c0 <= c0 + CW'(P);
        end
      end else begin
        phase <= phase + 1'b1;
      end
    end
  end

  // ---------------- per-lane windows ----------------
  always_comb begin
    int ra, ca, vr, vc, row, col;
    bit from_prev, nxt_img;
    for (int a = 0; a < P; a++) begin
      ra = int'(r0);
      ca = int'(c0) + a;
      nxt_img = 1'b0;
      if (ca >= W) begin
        ca = ca - W;
        ra = ra + 1;
        if (ra >= H) begin
          ra = ra - H;
          nxt_img = 1'b1;
        end
      end
      // virtual position of the window's last pixel
      vc = ca;
      vr = ra;
      if (ca < PD) begin
        vc = ca + W;
        vr = ra - 1;
      end
      from_prev = 1'b0;
      if (vr < PD) begin
        vr = vr + H;
        from_prev = 1'b1;
      end
      win_valid[a] = (!from_prev || prev_ok || nxt_img)
                   && vr >= K - 1 - PD && vr <= H - 1 + PD
                   && vc >= K - 1 - PD && vc <= W - 1 + PD
                   && ((vr - (K - 1) + PD) % S == 0)
                   && ((vc - (K - 1) + PD) % S == 0);
      for (int kr = 0; kr < K; kr++)
        for (int kc = 0; kc < K; kc++) begin
          row = vr - (K - 1) + kr;
          col = vc - (K - 1) + kc;
          pad_win[a][kr*K+kc] = row < 0 || row >= H || col < 0 || col >= W;
        end
    end
  end

  // ---------------- pads for the transposed KPU ----------------
  always_comb begin
    bit cp, rp;
    for (int kr = 0; kr < K; kr++)
      for (int kc = 0; kc < K; kc++) begin
        cp = (kc < PD && int'(c0) >= W - PD + kc)
          || (kc > K - 1 - PD && int'(c0) <= kc - K + PD);
        rp = (kr < PD && int'(r0) >= H - PD + kr)
          || (kr > K - 1 - PD && int'(r0) <= kr - K + PD);
        pad_tr[kr*K+kc] = cp || rp;
      end
  end

endmodule
