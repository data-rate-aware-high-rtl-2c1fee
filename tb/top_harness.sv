// top_harness -- end-to-end check of cf_accel_top.
//
// Streams NIMG random images plus one more random image (which lets the last
// rows of the depthwise layer come out) into the accelerator, P pixels per
// cycle, each feature group held H1 cycles, with random idle input cycles
// when GAPS is set. The expected output of the NIMG images is computed here
// layer by layer: 3x3 stride-2 convolution with padding 1, ReLU/shift/
// saturate, 3x3 depthwise convolution with padding 1, ReLU/shift/saturate,
// 1x1 convolution, all with the weight hash copied below. Every output pixel
// (C3 channels) is compared in raster order.
// FULL instantiates the accelerator with its default parameters; the other
// parameters must then equal those defaults.
// Counted mechanisms: idle input cycles, zero-padded windows in both
// convolution layers, windows skipped by the stride, the pruned KPU design,
// and image boundaries crossed inside the stream.
module top_harness
  import cf_pkg::*;
#(
  parameter bit FULL   = 1'b0,
  parameter int IMG_W  = 8,
  parameter int IMG_H  = 6,
  parameter int P      = 2,
  parameter int C_IN   = 3,
  parameter int C1     = 4,
  parameter int J1     = 3,
  parameter int H1     = 1,
  parameter int C3     = 2,
  parameter int SHIFT1 = 6,
  parameter int SHIFT2 = 5,
  parameter int NIMG   = 2,
  parameter bit GAPS   = 1'b1,
  parameter int SEED   = 1
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_gaps,
  output int   n_pad1,
  output int   n_pad2,
  output int   n_skip,
  output int   n_pruned,
  output int   n_pixels
);
  localparam int G1 = C_IN / J1;
  localparam int W2 = (IMG_W + 2 - 3) / P + 1;
  localparam int H2 = (IMG_H + 2 - 3) / P + 1;
  localparam int NI = NIMG + 1;

  logic rst_n = 1'b1, en = 1'b0;
  act_t x [J1][P];
  acc_t y [C3];
  logic y_valid;
  logic [P-1:0] m_wv1, m_pad1;
  logic m_wv2, m_pad2, m_en2;
  logic [P-1:0] m_used;

  if (FULL) begin : g_full
    cf_accel_top dut (.clk, .rst_n, .en, .x, .y, .y_valid);
    assign m_wv1  = dut.u_l1.u_ctrl.win_valid;
    for (genvar a = 0; a < P; a++) begin : g_m
      assign m_pad1[a] = dut.u_l1.u_ctrl.pad_win[a] != '0;
    end
    assign m_wv2  = dut.u_l2.u_ctrl.win_valid[0];
    assign m_pad2 = dut.u_l2.u_ctrl.pad_tr != '0;
    assign m_en2  = dut.u_l2.en;
    assign m_used = dut.u_l1.USED;
  end else begin : g_small
    cf_accel_top #(.IMG_W(IMG_W), .IMG_H(IMG_H), .P(P), .C_IN(C_IN), .C1(C1),
                   .J1(J1), .H1(H1), .C3(C3), .SHIFT1(SHIFT1), .SHIFT2(SHIFT2)) dut (
      .clk, .rst_n, .en, .x, .y, .y_valid);
    assign m_wv1  = dut.u_l1.u_ctrl.win_valid;
    for (genvar a = 0; a < P; a++) begin : g_m
      assign m_pad1[a] = dut.u_l1.u_ctrl.pad_win[a] != '0;
    end
    assign m_wv2  = dut.u_l2.u_ctrl.win_valid[0];
    assign m_pad2 = dut.u_l2.u_ctrl.pad_tr != '0;
    assign m_en2  = dut.u_l2.en;
    assign m_used = dut.u_l1.USED;
  end

  function automatic int rw(int seed, int o, int i, int t);
    logic [31:0] v;
    v = 32'(seed) * 32'h9E37_79B1 ^ 32'(o) * 32'h85EB_CA6B
      ^ 32'(i) * 32'hC2B2_AE35 ^ 32'(t) * 32'h27D4_EB2F;
    v = v ^ (v >> 15);
    v = v * 32'h2C1B_3C6D;
    v = v ^ (v >> 12);
    return (v[3] ? -16 : 0) + int'(v[3:0]);
  endfunction

  function automatic int rq(int v, int sh);
    int s;
    if (v < 0) return 0;
    s = v >>> sh;
    return (s > 127) ? 127 : s;
  endfunction

  int img  [NI][IMG_H][IMG_W][C_IN];
  int a1   [H2][W2][C1];
  int a2   [H2][W2][C1];
  int expv [NIMG][H2][W2][C3];
  int wt1  [C1][C_IN][9];
  int wt2  [C1][9];
  int wt3  [C3][C1];

  initial begin
    int unsigned rs;
    rs = SEED;
    for (int n = 0; n < NI; n++)
      for (int r = 0; r < IMG_H; r++)
        for (int c = 0; c < IMG_W; c++)
          for (int ch = 0; ch < C_IN; ch++) begin
            rs = rs * 1103515245 + 12345;
            img[n][r][c][ch] = int'(rs[23:16]) - 128;
          end
    for (int o = 0; o < C1; o++) begin
      for (int i = 0; i < C_IN; i++) for (int t = 0; t < 9; t++) wt1[o][i][t] = rw(101, o, i, t);
      for (int t = 0; t < 9; t++) wt2[o][t] = rw(102, o, 0, t);
    end
    for (int o = 0; o < C3; o++) for (int i = 0; i < C1; i++) wt3[o][i] = rw(103, o, i, 0);
    for (int n = 0; n < NIMG; n++) begin
      for (int orow = 0; orow < H2; orow++)
        for (int ocol = 0; ocol < W2; ocol++)
          for (int o = 0; o < C1; o++) begin
            int s, r, c;
            s = 0;
            for (int kr = 0; kr < 3; kr++)
              for (int kc = 0; kc < 3; kc++) begin
                r = orow * P - 1 + kr;
                c = ocol * P - 1 + kc;
                if (r >= 0 && r < IMG_H && c >= 0 && c < IMG_W)
                  for (int i = 0; i < C_IN; i++) s += img[n][r][c][i] * wt1[o][i][kr*3+kc];
              end
            a1[orow][ocol][o] = rq(s, SHIFT1);
          end
      for (int orow = 0; orow < H2; orow++)
        for (int ocol = 0; ocol < W2; ocol++)
          for (int o = 0; o < C1; o++) begin
            int s, r, c;
            s = 0;
            for (int kr = 0; kr < 3; kr++)
              for (int kc = 0; kc < 3; kc++) begin
                r = orow - 1 + kr;
                c = ocol - 1 + kc;
                if (r >= 0 && r < H2 && c >= 0 && c < W2) s += a1[r][c][o] * wt2[o][kr*3+kc];
              end
            a2[orow][ocol][o] = rq(s, SHIFT2);
          end
      for (int orow = 0; orow < H2; orow++)
        for (int ocol = 0; ocol < W2; ocol++)
          for (int o = 0; o < C3; o++) begin
            int s;
            s = 0;
            for (int i = 0; i < C1; i++) s += a2[orow][ocol][i] * wt3[o][i];
            expv[n][orow][ocol][o] = s;
          end
    end
  end

  // driver
  initial begin
    int unsigned rs;
    int q;
    rs = SEED * 3 + 1;
    done = 1'b0; n_gaps = 0;
    for (int i = 0; i < J1; i++) for (int m = 0; m < P; m++) x[i][m] = '0;
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n * P < NI * IMG_W * IMG_H; n++)
      for (int g = 0; g < G1; g++)
        for (int k = 0; k < H1; k++) begin
          rs = rs * 1103515245 + 12345;
          while (GAPS && rs[20:18] == 3'd0) begin
            en = 1'b0;
            n_gaps++;
            @(posedge clk);
            #1;
            rs = rs * 1103515245 + 12345;
          end
          en = 1'b1;
          for (int m = 0; m < P; m++) begin
            q = n * P + m;
            for (int i = 0; i < J1; i++)
              x[i][m] = (q < NI * IMG_W * IMG_H)
                      ? act_t'(img[q / (IMG_W * IMG_H)][(q / IMG_W) % IMG_H][q % IMG_W][i * G1 + g])
                      : act_t'(0);
          end
          @(posedge clk);
          #1;
        end
    en = 1'b0;
    repeat (12) @(posedge clk);
    done = 1'b1;
  end

  // monitor
  int oidx;
  initial begin
    checks = 0; failures = 0; oidx = 0;
    n_pad1 = 0; n_pad2 = 0; n_skip = 0; n_pruned = 0; n_pixels = 0;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (en)
        for (int a = 0; a < P; a++) begin
          if (m_wv1[a] && m_pad1[a]) n_pad1++;
          if (!m_wv1[a]) n_skip++;
        end
      if (m_en2 && m_wv2 && m_pad2) n_pad2++;
      if (y_valid && oidx < NIMG * H2 * W2) begin
        int n, r, c;
        n = oidx / (H2 * W2);
        r = (oidx / W2) % H2;
        c = oidx % W2;
        for (int o = 0; o < C3; o++) begin
          checks++;
          if (int'(y[o]) != expv[n][r][c][o]) begin
            failures++;
            if (failures < 6)
              $display("image %0d pixel (%0d,%0d) channel %0d: got %0d exp %0d",
                       n, r, c, o, y[o], expv[n][r][c][o]);
          end
        end
        oidx++;
        n_pixels++;
      end
    end
  end

  always @(posedge done) begin
    checks++;
    if (oidx != NIMG * H2 * W2) begin
      failures++;
      $display("%0d of %0d output pixels", oidx, NIMG * H2 * W2);
    end
    for (int a = 0; a < P; a++) if (!m_used[a]) n_pruned++;
  end
endmodule
