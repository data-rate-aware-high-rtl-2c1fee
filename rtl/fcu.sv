// fcu -- fully connected unit.
//
// J multipliers, each with its own weight ROM of C = HN*G entries selected by
// the configuration index `phase`. The J products are added together with
// the partial result of the same neuron from the previous feature group,
// which comes back through an HN-deep delay line ("hD" feedback). The inputs
// of one group are held for HN cycles while the unit computes its HN neurons
// in turn; after G = d_in/J groups the sums are complete.
//
// Channel mapping (this design's own choice): input lane i in group g is
// feature i*G+g; configuration phase = g*HN+k belongs to neuron FIDX*HN+k.
// ROM contents are cf_pkg::weight(WSEED, neuron, feature, 0).
// Timing: y is registered one cycle after the input; y_valid is set for the
// HN results of the last group, y_k gives the neuron within the unit.
//
// Follows the paper's FCU figure (ROMs indexed by i, multipliers, adder, hD
// feedback). Clearing the feedback for the first group and the output
// register are this design's own choices.
module fcu
  import cf_pkg::*;
#(
  parameter int J     = 4,
  parameter int HN    = 2,
  parameter int G     = 2,
  parameter int FIDX  = 0,
  parameter int WSEED = 1,
  parameter int IN_W  = DATA_W,
  localparam int C  = HN * G,
  localparam int PW = $clog2(C + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  logic [PW-1:0]          phase,
  input  logic signed [IN_W-1:0] x [J],
  output acc_t                   y,
  output logic                   y_valid,
  output logic [$clog2(HN+1)-1:0] y_k
);
  // weight ROMs: constant contents, read by configuration index
  // (2**PW entries so that every phase value has one; the spare ones are 0)
  wgt_t ROM [2**PW][J];
  for (genvar c = 0; c < 2**PW; c++) begin : g_rc
    for (genvar i = 0; i < J; i++) begin : g_ri
      localparam wgt_t V = (c >= C) ? wgt_t'(0)
                         : weight(WSEED, FIDX * HN + c % HN, i * G + c / HN, 0);
      assign ROM[c][i] = V;
    end
  end

  acc_t fb_line [HN];
  acc_t acc;
  logic first;

  assign first = int'(phase) < HN;
  always_comb begin
    acc = first ? acc_t'(0) : fb_line[HN-1];
    for (int i = 0; i < J; i++)
      acc += acc_t'(x[i]) * acc_t'(ROM[phase][i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < HN; k++) fb_line[k] <= '0;
      y       <= '0;
      y_valid <= 1'b0;
      y_k     <= '0;
    end else begin
      if (en) begin
        fb_line[0] <= acc;
        for (int k = 1; k < HN; k++) fb_line[k] <= fb_line[k-1];
      end
      y       <= acc;
      y_valid <= en && int'(phase) >= C - HN;
      y_k     <= $bits(y_k)'(int'(phase) % HN);
    end
  end

endmodule
