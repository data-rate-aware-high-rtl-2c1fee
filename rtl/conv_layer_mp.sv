// conv_layer_mp -- convolutional layer that takes P pixels per beat.
//
// The input stream carries, per beat, J features of each of P consecutive
// pixels (raster order, images back to back). A KPU must see a whole KxK
// window at once, but the window's pixels arrive on different lanes and in
// different beats. For every lane a there is therefore one KPU "design": the
// one whose windows end on the pixel of lane a. For it, tap (kr,kc) is
// wired to lane cf_pkg::tap_lane() of the shared feature buffer, delayed by
// cf_pkg::tap_delay() beats (both fixed at elaboration). Each design is
// built as a full set of MACs (D_OUT/HN MACs of J KPUs, or one depthwise MAC
// of J KPUs), so the layer holds P*D_OUT/HN MACs. A design whose windows are
// never valid (e.g. stride 2 with two pixels per beat and an even width) is
// not built at all; the delayed valid and MAC flags of such a design stay
// unread, and only the first built design's flags drive y_cfg.
//
// Validity and zero padding of every design's window come from window_ctrl,
// counted from the position of the stream. One beat lasts T = HN*D_IN/J
// cycles: each feature group is held HN cycles, there are D_IN/J groups.
//
// Output: y[a][m] is the result of MAC m of design a (neuron m*HN+k for
// configuration y_cfg = g*HN+k, or, depthwise, channel m*G+g), valid when
// y_valid[a]. Latency: two cycles from the last input of the window.
//
// Follows the paper's two-pixel convolution figure (2*d/h MACs sharing both
// pixel inputs), its two-pixel KPU figure and its pixel-order figures
// (delay and lane of each tap, pruning of unused designs, counter-derived pad
// and valid signals). Stride, padding and channel mapping are parameters or
// choices of this design.
module conv_layer_mp
  import cf_pkg::*;
#(
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
  localparam int G  = D_IN / J,
  localparam int T  = HN * G,
  localparam int NM = DEPTHWISE ? 1 : D_OUT / HN,
  localparam int NY = DEPTHWISE ? J : NM,
  localparam int PW = $clog2(T + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  act_t          x [J][P],
  output acc_t          y [P][NY],
  output logic [P-1:0]  y_valid,
  output logic [PW-1:0] y_cfg
);
  localparam int K2   = K * K;
  localparam int DMAX = max_delay(K, W, P);

  function automatic logic [P-1:0] used_mask();
    logic [P-1:0] u;
    for (int a = 0; a < P; a++) u[a] = design_used(a, W, H, K, S, PD, P);
    return u;
  endfunction

  localparam logic [P-1:0] USED = used_mask();

  initial begin
    assert (D_IN % J == 0) else $error("J must divide D_IN");
    assert (D_OUT % HN == 0) else $error("HN must divide D_OUT");
    assert (!DEPTHWISE || (D_OUT == D_IN && HN == 1))
      else $error("depthwise layers use a channel multiplier of one");
    assert (P <= W) else $error("more pixel lanes than image columns");
  end

  logic [PW-1:0]  phase;
  logic [P-1:0]   win_valid;
  logic [K2-1:0]  pad_win [P];
  logic [K2-1:0]  pad_tr_unused;
  act_t           tap [J][P][DMAX+1];
  logic [P-1:0]   win_valid_d;

  window_ctrl #(.W(W), .H(H), .K(K), .S(S), .PD(PD), .P(P), .T(T)) u_ctrl (
    .clk, .rst_n, .en, .phase, .win_valid, .pad_win, .pad_tr(pad_tr_unused)
  );

  mp_feature_buffer #(.J(J), .P(P), .DMAX(DMAX), .T(T)) u_buf (
    .clk, .rst_n, .en, .x, .tap
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) win_valid_d <= '0;
    else        win_valid_d <= win_valid;

  logic [PW-1:0] cfg [P][NM];

  for (genvar a = 0; a < P; a++) begin : g_design
    if (USED[a]) begin : g_used
      logic [NM-1:0] vflag;
      for (genvar m = 0; m < NM; m++) begin : g_mac
        wgt_t wk [J][K2];
        acc_t ps [J];
        logic ps_en [J];
        acc_t ym [DEPTHWISE ? J : 1];

        mac_unit #(.J(J), .HN(HN), .G(G), .K2(K2), .DEPTHWISE(DEPTHWISE),
                   .MIDX(m), .WSEED(WSEED)) u_mac (
          .clk, .rst_n, .phase, .w(wk), .psum(ps), .ps_en(ps_en[0]),
          .ps_valid(win_valid_d[a]), .y(ym), .y_valid(vflag[m]),
          .y_cfg(cfg[a][m])
        );

        for (genvar i = 0; i < J; i++) begin : g_kpu
          act_t kt [K2];
          for (genvar t = 0; t < K2; t++) begin : g_tap
            assign kt[t] = tap[i][tap_lane(t / K, t % K, K, W, P, a)]
                              [tap_delay(t / K, t % K, K, W, P, a)];
          end
          kpu_mp #(.K(K)) u_kpu (
            .clk, .rst_n, .en, .tap(kt), .pad(pad_win[a]), .w(wk[i]),
            .y(ps[i]), .y_en(ps_en[i])
          );
        end

        if (DEPTHWISE) begin : g_dwy
          for (genvar i = 0; i < J; i++) begin : g_y
            assign y[a][i] = ym[i];
          end
        end else begin : g_y1
          assign y[a][m] = ym[0];
        end
      end
      assign y_valid[a] = vflag[0];
    end else begin : g_pruned
      for (genvar m = 0; m < NY; m++) begin : g_y
        assign y[a][m] = '0;
      end
      for (genvar m = 0; m < NM; m++) begin : g_c
        assign cfg[a][m] = '0;
      end
      assign y_valid[a] = 1'b0;
    end
  end

  // every design shares the configuration counter; take it from any design
  always_comb begin
    y_cfg = '0;
    for (int a = 0; a < P; a++)
      if (USED[a]) y_cfg = cfg[a][0];
  end

endmodule
