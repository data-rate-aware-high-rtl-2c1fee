// conv_layer_sp -- convolutional or depthwise layer taking one pixel per beat.
//
// D_OUT/HN MACs (one MAC for a depthwise layer), each grouping J transposed
// KPUs. KPU slot i of every MAC receives input feature i*G+g during group g
// (G = D_IN/J); each group is held HN cycles while the KPU works through HN
// kernels, so one pixel lasts T = HN*G valid cycles and the KPU delays are T
// times longer. The MAC sums its J KPUs and accumulates over the G groups
// through its HN-deep feedback (in depthwise mode it passes every KPU output
// on, one channel each). The layer's window_ctrl counts the position of the
// stream and supplies the KPU zero-padding selects and the validity of the
// window that ends on the current pixel.
//
// Input: x[i] with `en` (cycles with `en` low are ignored). Output: y[m] is
// neuron m*HN+k for configuration y_cfg = g*HN+k (depthwise: channel m*G+g),
// valid when y_valid; two cycles after the input that completes the window.
//
// Follows the paper's convolutional layer figure (MACs of j KPUs, adder and
// hD feedback, d_out/h MACs) and its single-pixel KPU. Channel mapping,
// stride and padding handling are this design's own.
module conv_layer_sp
  import cf_pkg::*;
#(
  parameter int W         = 5,
  parameter int H         = 5,
  parameter int K         = 3,
  parameter int S         = 1,
  parameter int PD        = 1,
  parameter int D_IN      = 2,
  parameter int D_OUT     = 2,
  parameter int J         = 1,
  parameter int HN        = 1,
  parameter bit DEPTHWISE = 1'b0,
  parameter int WSEED     = 2,
  localparam int G  = D_IN / J,
  localparam int T  = HN * G,
  localparam int NM = DEPTHWISE ? 1 : D_OUT / HN,
  localparam int NY = DEPTHWISE ? J : NM,
  localparam int PW = $clog2(T + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  act_t          x [J],
  output acc_t          y [NY],
  output logic          y_valid,
  output logic [PW-1:0] y_cfg
);
  localparam int K2 = K * K;

  initial begin
    assert (D_IN % J == 0) else $error("J must divide D_IN");
    assert (D_OUT % HN == 0) else $error("HN must divide D_OUT");
    assert (!DEPTHWISE || (D_OUT == D_IN && HN == 1))
      else $error("depthwise layers use a channel multiplier of one");
  end

  logic [PW-1:0] phase;
  logic [0:0]    win_valid;
  logic [K2-1:0] pad_win_unused [1];
  logic [K2-1:0] pad_tr;
  logic          win_valid_d;

  window_ctrl #(.W(W), .H(H), .K(K), .S(S), .PD(PD), .P(1), .T(T)) u_ctrl (
    .clk, .rst_n, .en, .phase, .win_valid, .pad_win(pad_win_unused), .pad_tr
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) win_valid_d <= 1'b0;
    else        win_valid_d <= win_valid[0];

  logic          vflag [NM];
  logic [PW-1:0] cfg   [NM];

  for (genvar m = 0; m < NM; m++) begin : g_mac
    wgt_t wk [J][K2];
    acc_t ps [J];
    logic ps_en [J];
    acc_t ym [DEPTHWISE ? J : 1];

    mac_unit #(.J(J), .HN(HN), .G(G), .K2(K2), .DEPTHWISE(DEPTHWISE),
               .MIDX(m), .WSEED(WSEED)) u_mac (
      .clk, .rst_n, .phase, .w(wk), .psum(ps), .ps_en(ps_en[0]),
      .ps_valid(win_valid_d), .y(ym), .y_valid(vflag[m]), .y_cfg(cfg[m])
    );

    for (genvar i = 0; i < J; i++) begin : g_kpu
      kpu_tr #(.K(K), .W(W), .T(T)) u_kpu (
        .clk, .rst_n, .en, .x(x[i]), .pad(pad_tr), .w(wk[i]),
        .y(ps[i]), .y_en(ps_en[i])
      );
    end

    if (DEPTHWISE) begin : g_dwy
      for (genvar i = 0; i < J; i++) begin : g_y
        assign y[i] = ym[i];
      end
    end else begin : g_y1
      assign y[m] = ym[0];
    end
  end

  assign y_valid = vflag[0];
  assign y_cfg   = cfg[0];

endmodule
