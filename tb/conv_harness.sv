// conv_harness -- drives one convolutional layer configuration and checks it.
//
// Builds NIMG random images (D_IN x H x W, 8-bit), streams them back to back
// in raster order, P pixels per beat, each feature group held HN cycles,
// followed by one all-zero image that flushes the windows reaching below the
// last real image. With GAPS set, idle cycles (en low) are inserted at
// random. Every output window is compared with a direct convolution of the
// images computed here (stride S, symmetric zero padding PD), using its own
// copy of the weight hash. Without gaps the output cycle of every window is
// checked too: two cycles after the cycle that carried its last pixel's
// final configuration.
// SP selects the single-pixel layer (transposed KPUs, P must be 1).
module conv_harness
  import cf_pkg::*;
#(
  parameter bit SP        = 1'b0,
  parameter int W         = 5,
  parameter int H         = 5,
  parameter int K         = 3,
  parameter int S         = 1,
  parameter int PD        = 0,
  parameter int P         = 2,
  parameter int D_IN      = 1,
  parameter int D_OUT     = 1,
  parameter int J         = 1,
  parameter int HN        = 1,
  parameter bit DEPTHWISE = 1'b0,
  parameter int WSEED     = 1,
  parameter int NIMG      = 2,
  parameter bit GAPS      = 1'b0,
  parameter int SEED      = 1
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_windows,
  output int   n_invalid,
  output int   n_padded,
  output int   n_gaps
);
  localparam int G  = D_IN / J;
  localparam int T  = HN * G;
  localparam int NM = DEPTHWISE ? 1 : D_OUT / HN;
  localparam int NY = DEPTHWISE ? J : NM;
  localparam int PW = $clog2(T + 1);
  localparam int HO = (H + 2 * PD - K) / S + 1;
  localparam int WO = (W + 2 * PD - K) / S + 1;
  localparam int NPIX  = (NIMG + 1) * W * H;
  localparam int NBEAT = (NPIX + P - 1) / P;
  localparam int NWIN  = NIMG * HO * WO;

  logic rst_n = 1'b1;
  logic en = 1'b0;
  act_t x [J][P];
  acc_t y [P][NY];
  logic [P-1:0]  y_valid;
  logic [PW-1:0] y_cfg;
  logic [P-1:0]  m_wv, m_pad;   // window valid / padded, seen in the layer

  if (SP) begin : g_sp
    act_t xs [J];
    acc_t ys [NY];
    logic [PW-1:0] cs;
    logic vs;
    always_comb for (int i = 0; i < J; i++) xs[i] = x[i][0];
    conv_layer_sp #(.W(W), .H(H), .K(K), .S(S), .PD(PD), .D_IN(D_IN),
                    .D_OUT(D_OUT), .J(J), .HN(HN), .DEPTHWISE(DEPTHWISE),
                    .WSEED(WSEED)) dut (
      .clk, .rst_n, .en, .x(xs), .y(ys), .y_valid(vs), .y_cfg(cs));
    always_comb begin
      for (int m = 0; m < NY; m++) y[0][m] = ys[m];
      y_valid = P'(vs);
      y_cfg   = cs;
    end
    assign m_wv  = P'(dut.u_ctrl.win_valid[0]);
    assign m_pad = P'(dut.u_ctrl.pad_tr != '0);
  end else begin : g_mp
    conv_layer_mp #(.W(W), .H(H), .K(K), .S(S), .PD(PD), .P(P), .D_IN(D_IN),
                    .D_OUT(D_OUT), .J(J), .HN(HN), .DEPTHWISE(DEPTHWISE),
                    .WSEED(WSEED)) dut (
      .clk, .rst_n, .en, .x, .y, .y_valid, .y_cfg);
    for (genvar a = 0; a < P; a++) begin : g_m
      assign m_wv[a]  = dut.u_ctrl.win_valid[a];
      assign m_pad[a] = dut.u_ctrl.pad_win[a] != '0 && dut.u_ctrl.win_valid[a];
    end
  end

  // ---------------- reference ----------------
  function automatic int ref_weight(int seed, int o, int i, int t);
    logic [31:0] v;
    v = 32'(seed) * 32'h9E37_79B1 ^ 32'(o) * 32'h85EB_CA6B
      ^ 32'(i) * 32'hC2B2_AE35 ^ 32'(t) * 32'h27D4_EB2F;
    v = v ^ (v >> 15);
    v = v * 32'h2C1B_3C6D;
    v = v ^ (v >> 12);
    return (v[3] ? -16 : 0) + int'(v[3:0]);
  endfunction

  int pix  [NPIX][D_IN];          // all streamed pixels, raster order
  int expv [NWIN][D_OUT];
  int qlast[NWIN];                // stream index of each window's last pixel
  int start_cycle, cyc;

  initial begin
    int unsigned r;
    int s, rr, cc;
    r = SEED;
    for (int q = 0; q < NPIX; q++)
      for (int c = 0; c < D_IN; c++) begin
        r = r * 1103515245 + 12345;
        pix[q][c] = (q < NIMG * W * H) ? int'(r[23:16]) - 128 : 0;
      end
    for (int img = 0; img < NIMG; img++)
      for (int orow = 0; orow < HO; orow++)
        for (int ocol = 0; ocol < WO; ocol++) begin
          int wi;
          wi = (img * HO + orow) * WO + ocol;
          qlast[wi] = img * W * H + (orow * S - PD + K - 1) * W
                    + (ocol * S - PD + K - 1);
          for (int o = 0; o < D_OUT; o++) begin
            s = 0;
            for (int c = 0; c < D_IN; c++) begin
              if (DEPTHWISE && c != o) continue;
              for (int kr = 0; kr < K; kr++)
                for (int kc = 0; kc < K; kc++) begin
                  rr = orow * S - PD + kr;
                  cc = ocol * S - PD + kc;
                  if (rr < 0 || rr >= H || cc < 0 || cc >= W) continue;
                  s += pix[img * W * H + rr * W + cc][c]
                     * (DEPTHWISE ? ref_weight(WSEED, o, 0, kr * K + kc)
                                  : ref_weight(WSEED, o, c, kr * K + kc));
                end
            end
            expv[wi][o] = s;
          end
        end
  end

  // ---------------- driver ----------------
  initial begin
    int unsigned r;
    r = SEED * 7 + 3;
    done = 1'b0;
    n_gaps = 0;
    for (int i = 0; i < J; i++) for (int m = 0; m < P; m++) x[i][m] = '0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    start_cycle = cyc + 1;
    for (int n = 0; n < NBEAT; n++)
      for (int g = 0; g < G; g++)
        for (int k = 0; k < HN; k++) begin
          if (GAPS) begin
            r = r * 1103515245 + 12345;
            while (r[20:18] == 3'd0) begin
              en <= 1'b0;
              n_gaps++;
              @(posedge clk);
              r = r * 1103515245 + 12345;
            end
          end
          en <= 1'b1;
          for (int i = 0; i < J; i++)
            for (int m = 0; m < P; m++)
              x[i][m] <= (P * n + m < NPIX) ? act_t'(pix[P * n + m][i * G + g])
                                            : act_t'(0);
          @(posedge clk);
        end
    en <= 1'b0;
    repeat (6) @(posedge clk);
    done = 1'b1;
  end

  // ---------------- monitor ----------------
  int got [P][D_OUT];
  int widx;

  initial begin
    cyc = 0; checks = 0; failures = 0; widx = 0;
    n_windows = 0; n_invalid = 0; n_padded = 0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && en) begin
      // mechanisms seen at the layer input
      for (int a = 0; a < P; a++) begin
        if (m_pad[a]) n_padded++;
        if (!m_wv[a]) n_invalid++;
      end
    end
    for (int a = 0; a < P; a++)
      if (rst_n && y_valid[a]) begin
        int g, k;
        bit last;
        if (DEPTHWISE) begin
          g = int'(y_cfg);
          for (int i = 0; i < J; i++) got[a][i * G + g] = int'(y[a][i]);
          last = (g == G - 1);
        end else begin
          k = int'(y_cfg) % HN;
          for (int m = 0; m < NM; m++) got[a][m * HN + k] = int'(y[a][m]);
          last = (k == HN - 1);
        end
        if (last && widx < NWIN) begin
          for (int o = 0; o < D_OUT; o++) begin
            checks++;
            if (got[a][o] != expv[widx][o]) begin
              failures++;
              if (failures < 10)
                $display("mismatch W%0d P%0d window %0d neuron %0d: got %0d exp %0d",
                         W, P, widx, o, got[a][o], expv[widx][o]);
            end
          end
          if (!GAPS) begin
            int exp_cyc;
            exp_cyc = start_cycle + (qlast[widx] / P) * T + T - 1 + 2;
            checks++;
            if (cyc != exp_cyc) begin
              failures++;
              if (failures < 10)
                $display("window %0d at cycle %0d, expected %0d", widx, cyc, exp_cyc);
            end
          end
          widx++;
          n_windows++;
        end
      end
  end

  final begin
    if (widx != NWIN) $display("harness W%0d P%0d: %0d of %0d windows", W, P, widx, NWIN);
  end

  // count missing windows as failures once done
  always @(posedge done) begin
    checks++;
    if (widx != NWIN) failures++;
  end

endmodule
