// wc_harness -- checks one window_ctrl configuration.
//
// A reference list of output windows is built from the output coordinates
// (stride S, padding PD) of NIMG+1 back-to-back images: each window is keyed
// by the stream index of its last pixel. The counter is stepped through the
// stream (T cycles per beat, random idle cycles) and, for every lane pixel,
// win_valid must say whether a window ends there and pad_win must mark the
// taps of that window lying outside the image. For P = 1 also pad_tr is
// checked: tap t of the current pixel feeds the window ending tap_offset(t)
// pixels later; if that window is an output, pad_tr[t] must tell whether
// tap t of it lies outside the image.
module wc_harness #(
  parameter int W = 5, H = 5, K = 3, S = 1, PD = 0, P = 2, T = 1, NIMG = 2,
  parameter int SEED = 1
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_valid,
  output int   n_padded
);
  localparam int HO = (H + 2 * PD - K) / S + 1;
  localparam int WO = (W + 2 * PD - K) / S + 1;
  localparam int NPIX = (NIMG + 1) * W * H;

  logic rst_n = 1'b1, en = 1'b0;
  logic [$clog2(T+1)-1:0] phase;
  logic [P-1:0] win_valid;
  logic [K*K-1:0] pad_win [P];
  logic [K*K-1:0] pad_tr;

  window_ctrl #(.W(W), .H(H), .K(K), .S(S), .PD(PD), .P(P), .T(T)) dut (.*);

  typedef struct { int orow; int ocol; } win_t;
  win_t wins [int];

  function automatic logic [K*K-1:0] ref_pad(win_t wv);
    logic [K*K-1:0] p;
    for (int kr = 0; kr < K; kr++)
      for (int kc = 0; kc < K; kc++) begin
        int r, c;
        r = wv.orow * S - PD + kr;
        c = wv.ocol * S - PD + kc;
        p[kr*K+kc] = r < 0 || r >= H || c < 0 || c >= W;
      end
    return p;
  endfunction

  initial begin
    int unsigned rs;
    checks = 0; failures = 0; n_valid = 0; n_padded = 0; done = 1'b0;
    for (int img = 0; img <= NIMG; img++)
      for (int orow = 0; orow < HO; orow++)
        for (int ocol = 0; ocol < WO; ocol++)
          wins[img * W * H + (orow * S - PD + K - 1) * W + ocol * S - PD + K - 1]
            = '{orow, ocol};
    rs = SEED;
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n * P < NPIX; n++)
      for (int ph = 0; ph < T; ph++) begin
        rs = rs * 1103515245 + 12345;
        #1;
        while (rs[19:18] == 2'd0) begin
          en = 1'b0;
          @(posedge clk);
          #1;
          rs = rs * 1103515245 + 12345;
        end
        en = 1'b1;
        checks++;
        if (int'(phase) != ph) failures++;
        for (int a = 0; a < P; a++) begin
          int q;
          bit v;
          q = n * P + a;
          if (q >= NPIX) continue;
          v = wins.exists(q);
          checks++;
          if (win_valid[a] != v) begin
            failures++;
            if (failures < 5) $display("W%0d P%0d q=%0d: valid %0d exp %0d", W, P, q, win_valid[a], v);
          end
          if (v) begin
            n_valid++;
            checks++;
            if (pad_win[a] != ref_pad(wins[q])) failures++;
            if (pad_win[a] != 0) n_padded++;
          end
        end
        if (P == 1)
          for (int kr = 0; kr < K; kr++)
            for (int kc = 0; kc < K; kc++) begin
              int q2;
              logic [K*K-1:0] rp;
              q2 = n + (K - 1 - kr) * W + (K - 1 - kc);
              if (wins.exists(q2)) begin
                rp = ref_pad(wins[q2]);
                checks++;
                if (pad_tr[kr*K+kc] != rp[kr*K+kc]) begin
                  failures++;
                  if (failures < 5) $display("pad_tr q=%0d tap %0d", n, kr*K+kc);
                end
              end
            end
        @(posedge clk);
      end
    en = 1'b0;
    done = 1'b1;
  end
endmodule
