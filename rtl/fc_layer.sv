// fc_layer -- pointwise convolution / fully connected layer.
//
// D_OUT/HN fully connected units share the same J input features; each unit
// computes HN neurons in turn, so one pixel takes T = HN*D_IN/J valid cycles
// (HN cycles per group of J features, D_IN/J groups). To take P pixels per
// beat the set of units is repeated P times, one set per pixel lane, all
// driven by the same configuration counter.
//
// Input: x[m][i] is feature i*G+g of lane m during group g (G = D_IN/J); the
// source holds each group for HN cycles with `en` high (continuous flow;
// cycles with `en` low are ignored). Output: y[m][f] is neuron f*HN+y_k of
// lane m, valid (y_valid) one cycle after the last group's input.
//
// Follows the paper's fully connected layer figure (units sharing the j
// inputs, d_out/h units) and its rule that a multi-pixel layer doubles the
// number of units; the counter is this design's own.
module fc_layer
  import cf_pkg::*;
#(
  parameter int P     = 1,
  parameter int D_IN  = 8,
  parameter int D_OUT = 4,
  parameter int J     = 4,
  parameter int HN    = 2,
  parameter int WSEED = 3,
  parameter int IN_W  = DATA_W,
  localparam int G  = D_IN / J,
  localparam int T  = HN * G,
  localparam int NF = D_OUT / HN,
  localparam int PW = $clog2(T + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  logic signed [IN_W-1:0] x [P][J],
  output acc_t                   y [P][NF],
  output logic                   y_valid,
  output logic [$clog2(HN+1)-1:0] y_k
);
  initial begin
    assert (D_IN % J == 0) else $error("J must divide D_IN");
    assert (D_OUT % HN == 0) else $error("HN must divide D_OUT");
  end

  logic [PW-1:0] phase;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)                      phase <= '0;
    else if (en && int'(phase) == T - 1) phase <= '0;
    else if (en)                     phase <= phase + 1'b1;

  logic                    v [P][NF];
  logic [$clog2(HN+1)-1:0] k [P][NF];

  for (genvar m = 0; m < P; m++) begin : g_lane
    for (genvar f = 0; f < NF; f++) begin : g_fcu
      fcu #(.J(J), .HN(HN), .G(G), .FIDX(f), .WSEED(WSEED), .IN_W(IN_W)) u_fcu (
        .clk, .rst_n, .en, .phase,
        .x(x[m]), .y(y[m][f]), .y_valid(v[m][f]), .y_k(k[m][f])
      );
    end
  end

  assign y_valid = v[0][0];
  assign y_k     = k[0][0];

endmodule
