// cf_accel_top -- three continuous-flow layers: the stem of a MobileNetV2
// built at the two-pixel input rate (6 features per clock).
//
//   L1  conv_layer_mp  3x3 convolution, stride 2, padding 1, C_IN -> C1
//                      channels, P pixels per beat (two-pixel KPUs);
//   L2  conv_layer_sp  3x3 depthwise convolution, stride 1, padding 1, on the
//                      half-size image, one pixel per beat (transposed KPUs);
//   L3  fc_layer       pointwise (1x1) convolution C1 -> C3 (FCUs).
//
// The input stream carries P pixels of C_IN features each per cycle with
// `en` high, raster order, images back to back. Because L1 has stride P
// (= 2), every output window of L1 ends on the same pixel lane; only that
// KPU design is built and its outputs form a one-pixel stream with gaps,
// which drives L2 directly (`en` of L2 = output valid of L1). L2 feeds L3
// the same way. Between the layers the accumulators are brought back to
// 8 bits (ReLU, shift, saturation, cf_pkg::requant); L3's outputs are the
// raw accumulators (the projection layer of MobileNetV2 has no activation).
//
// Channel order: L1 emits, in configuration k, neurons m*H1+k on its C1/H1
// outputs. L2 takes these as feature group k on J2 = C1/H1 lanes, which is
// exactly its own order (lane i, group g = channel i*G+g), and passes them on
// unchanged; L3 takes them the same way. Hence H2 = H3 = 1.
//
// Output: y[f] is output channel f of one output pixel, valid when y_valid
// (one pixel per valid cycle, raster order of the C3-channel output image).
// The configuration outputs of the three layers (cfg1, cfg2, k3) are left
// unread: each layer consumes its predecessor's results in the order they
// are produced, so the order itself carries the channel index.
// Latency: 2 (L1) + 1 + 2 (L2) + 1 + 1 (L3) cycles after the input cycle
// that completes the receptive field.
//
// The layer types, the two-pixel first layer and the 6/1 rate follow the
// paper's MobileNetV2 evaluation; the layer sizes are those of MobileNetV2's
// first layers (not listed in the paper); requantisation, the seeds of the
// weight ROMs and the wiring between layers are this design's own.
module cf_accel_top
  import cf_pkg::*;
#(
  parameter int IMG_W  = 224,
  parameter int IMG_H  = 224,
  parameter int P      = 2,    // pixels per beat at the input
  parameter int C_IN   = 3,
  parameter int C1     = 32,
  parameter int J1     = 3,    // features per lane per cycle in L1
  parameter int H1     = 1,    // kernels per KPU in L1
  parameter int C3     = 16,
  parameter int SHIFT1 = 6,
  parameter int SHIFT2 = 5,
  localparam int W2  = (IMG_W + 2 - 3) / P + 1,
  localparam int H2  = (IMG_H + 2 - 3) / P + 1,
  localparam int NM1 = C1 / H1,
  localparam int G2  = H1,
  localparam int PW1 = $clog2(H1 * (C_IN / J1) + 1)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  act_t x [J1][P],
  output acc_t y [C3],
  output logic y_valid
);
  // ---------------- L1: two-pixel stride-2 convolution ----------------
  acc_t          y1 [P][NM1];
  logic [P-1:0]  v1;
  logic [PW1-1:0] cfg1;

  conv_layer_mp #(.W(IMG_W), .H(IMG_H), .K(3), .S(P), .PD(1), .P(P),
                  .D_IN(C_IN), .D_OUT(C1), .J(J1), .HN(H1), .WSEED(101)) u_l1 (
    .clk, .rst_n, .en, .x, .y(y1), .y_valid(v1), .y_cfg(cfg1)
  );

  // the one KPU design that produces outputs
  function automatic int used_lane();
    for (int a = 0; a < P; a++)
      if (design_used(a, IMG_W, IMG_H, 3, P, 1, P)) return a;
    return 0;
  endfunction
  localparam int LANE = used_lane();

  initial begin
    int n;
    n = 0;
    for (int a = 0; a < P; a++) n += int'(design_used(a, IMG_W, IMG_H, 3, P, 1, P));
    assert (n == 1) else $error("the first layer must leave exactly one KPU design");
  end

  act_t x2 [NM1];
  logic en2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en2 <= 1'b0;
      for (int i = 0; i < NM1; i++) x2[i] <= '0;
    end else begin
      en2 <= v1[LANE];
      for (int i = 0; i < NM1; i++) x2[i] <= requant(y1[LANE][i], SHIFT1);
    end
  end

  // ---------------- L2: depthwise convolution ----------------
  acc_t y2 [NM1];
  logic v2;
  logic [$clog2(G2+1)-1:0] cfg2;

  conv_layer_sp #(.W(W2), .H(H2), .K(3), .S(1), .PD(1), .D_IN(C1), .D_OUT(C1),
                  .J(NM1), .HN(1), .DEPTHWISE(1'b1), .WSEED(102)) u_l2 (
    .clk, .rst_n, .en(en2), .x(x2), .y(y2), .y_valid(v2), .y_cfg(cfg2)
  );

  act_t x3 [1][NM1];
  logic en3;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en3 <= 1'b0;
      for (int i = 0; i < NM1; i++) x3[0][i] <= '0;
    end else begin
      en3 <= v2;
      for (int i = 0; i < NM1; i++) x3[0][i] <= requant(y2[i], SHIFT2);
    end
  end

  // ---------------- L3: pointwise convolution ----------------
  acc_t y3 [1][C3];
  logic [0:0] k3;

  fc_layer #(.P(1), .D_IN(C1), .D_OUT(C3), .J(NM1), .HN(1), .WSEED(103)) u_l3 (
    .clk, .rst_n, .en(en3), .x(x3), .y(y3), .y_valid, .y_k(k3)
  );

  assign y = y3[0];

endmodule
