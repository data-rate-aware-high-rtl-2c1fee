// kpu_mp -- non-transposed kernel processing unit for multi-pixel layers.
//
// The K*K inputs are taps of the layer's shared feature buffer, already
// delayed so that all pixels of one sliding window are present in the same
// cycle (which lane and which delay feed tap t is fixed at elaboration, see
// cf_pkg::tap_lane/tap_delay). Each tap passes a 2:1 zero-padding select,
// is multiplied by its weight, and the K*K products are added in a tree.
// Timing: y is registered and valid (y_en) one cycle after the taps.
//
// Follows the paper's two-pixel KPU figure (delayed inputs, pad muxes,
// multipliers, adders at the bottom); moving the input delays into a buffer
// shared by all KPUs of the layer is what the text proposes. The output
// register is this design's own choice.
module kpu_mp
  import cf_pkg::*;
#(
  parameter int K = 3
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  input  act_t           tap [K*K],
  input  logic [K*K-1:0] pad,
  input  wgt_t           w   [K*K],
  output acc_t           y,
  output logic           y_en
);
  acc_t sum;

  always_comb begin
    act_t xs;
    sum = '0;
    for (int t = 0; t < K * K; t++) begin
      xs   = pad[t] ? act_t'(0) : tap[t];
      sum += acc_t'(xs) * acc_t'(w[t]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y    <= '0;
      y_en <= 1'b0;
    end else begin
      y    <= sum;
      y_en <= en;
    end
  end

endmodule
