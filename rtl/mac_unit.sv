// mac_unit -- multiply-accumulate unit of a convolutional layer.
//
// A MAC groups J KPUs. It holds their weights in a ROM of C = HN*G
// configurations (HN kernels computed in turn, G = d_in/J feature groups)
// and presents configuration `phase` on w[][] in the same cycle. One cycle
// later the J KPU sums arrive (psum, ps_en). In normal mode they are added
// and accumulated over the G feature groups: the sum of the current group is
// added to the partial result of the same kernel from the previous group,
// which waits in an HN-deep delay line (the "hD" feedback). After the last
// group the result of kernel k is output; y_cfg tells which configuration
// (phase) produced it. In depthwise mode (DEPTHWISE=1) the adders are
// removed: every KPU output is a result of its own channel, every cycle.
//
// Channel mapping (this design's own choice): in group g, KPU slot i sees
// input feature i*G+g; in configuration phase = g*HN+k the MAC computes
// output neuron MIDX*HN+k. The ROM holds cf_pkg::weight(WSEED, neuron,
// feature, tap). Timing: y is registered, one cycle after psum.
//
// Follows the paper's MAC box (KPUs, adder, hD feedback); the reset of the
// feedback at the first group, the ROM organisation and the output register
// are this design's own.
module mac_unit
  import cf_pkg::*;
#(
  parameter int J         = 3,  // KPUs per MAC
  parameter int HN        = 1,  // kernels per KPU (h)
  parameter int G         = 1,  // feature groups (d_in/J)
  parameter int K2        = 9,  // taps per KPU
  parameter bit DEPTHWISE = 1'b0,
  parameter int MIDX      = 0,  // index of this MAC in the layer
  parameter int WSEED     = 1,
  localparam int C  = HN * G,
  localparam int NY = DEPTHWISE ? J : 1,
  localparam int PW = $clog2(C + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [PW-1:0] phase,
  output wgt_t          w     [J][K2],
  input  acc_t          psum  [J],
  input  logic          ps_en,
  input  logic          ps_valid,   // the window of psum is a real output
  output acc_t          y     [NY],
  output logic          y_valid,
  output logic [PW-1:0] y_cfg
);
  // weight ROM: constant contents, read by configuration index
  // (2**PW entries so that every phase value has one; the spare ones are 0)
  wgt_t ROM [2**PW][J][K2];
  for (genvar c = 0; c < 2**PW; c++) begin : g_rc
    for (genvar i = 0; i < J; i++) begin : g_ri
      for (genvar t = 0; t < K2; t++) begin : g_rt
        localparam wgt_t V = (c >= C) ? wgt_t'(0)
                           : DEPTHWISE ? weight(WSEED, i * G + c, 0, t)
                           : weight(WSEED, MIDX * HN + c % HN, i * G + c / HN, t);
        assign ROM[c][i][t] = V;
      end
    end
  end

  always_comb
    for (int i = 0; i < J; i++)
      for (int t = 0; t < K2; t++)
        w[i][t] = ROM[phase][i][t];

  logic [PW-1:0] phase_d;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) phase_d <= '0;
    else        phase_d <= phase;

  if (DEPTHWISE) begin : g_dw
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < J; i++) y[i] <= '0;
        y_valid <= 1'b0;
        y_cfg   <= '0;
      end else begin
        for (int i = 0; i < J; i++) y[i] <= psum[i];
        y_valid <= ps_en && ps_valid;
        y_cfg   <= phase_d;
      end
    end
  end else begin : g_acc
    acc_t fb_line [HN];
    acc_t s, acc;
    logic first;

    assign first = int'(phase_d) < HN;         // group 0
    always_comb begin
      s = '0;
      for (int i = 0; i < J; i++) s += psum[i];
      acc = s + (first ? acc_t'(0) : fb_line[HN-1]);
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int k = 0; k < HN; k++) fb_line[k] <= '0;
        y[0]    <= '0;
        y_valid <= 1'b0;
        y_cfg   <= '0;
      end else begin
        if (ps_en) begin
          fb_line[0] <= acc;
          for (int k = 1; k < HN; k++) fb_line[k] <= fb_line[k-1];
        end
        y[0]    <= acc;
        y_valid <= ps_en && ps_valid && int'(phase_d) >= C - HN;
        y_cfg   <= phase_d;
      end
    end
  end

endmodule
