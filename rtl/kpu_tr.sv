// kpu_tr -- transposed kernel processing unit (single pixel per beat).
//
// The current input feature x is broadcast to all K*K multipliers. Each
// multiplier input has a 2:1 select that replaces x by zero when pad[t] is
// set (implicit zero padding). The products are summed along a chain in
// tap order w0, w1, ..., w(K*K-1): between two taps of one kernel row the
// partial sum waits one pixel (D), between the last tap of a row and the
// first of the next it waits W-K+1 pixels (LD, a line delay). So the sum
// leaving the last tap is the full window that ends on the current pixel.
//
// One pixel lasts T cycles (the layer interleaves T weight configurations:
// h kernels times d_in/j feature groups), so every delay is T times longer
// and advances only on cycles with `en` set; w[] may change every cycle.
// Timing: y is registered, valid one cycle after the input (y_en).
//
// Follows the paper's KPU figure (multipliers, pad muxes, D/LD chain); the
// scaling of the delays by T is the "adjusting the delays" the text mentions,
// the register at the output is this design's own choice.
module kpu_tr
  import cf_pkg::*;
#(
  parameter int K = 3,   // kernel size
  parameter int W = 5,   // image width
  parameter int T = 1    // cycles per pixel
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  input  act_t           x,
  input  logic [K*K-1:0] pad,
  input  wgt_t           w [K*K],
  output acc_t           y,
  output logic           y_en
);
  localparam int NT = K * K;
  localparam int LD = W - K + 1;

  // delay after tap t (in pixels)
  function automatic int dly(int t);
    return (t % K == K - 1) ? LD : 1;
  endfunction

  acc_t prod [NT];
  acc_t sum  [NT];   // partial sum after tap t (combinational)
  acc_t dout [NT];   // partial sum entering tap t (delayed)

  always_comb begin
    act_t xs;
    for (int t = 0; t < NT; t++) begin
      xs      = pad[t] ? act_t'(0) : x;
      prod[t] = acc_t'(xs) * acc_t'(w[t]);
    end
  end

  assign dout[0] = '0;

  for (genvar t = 0; t < NT; t++) begin : g_tap
    assign sum[t] = dout[t] + prod[t];
    if (t < NT - 1) begin : g_dly
      localparam int DEPTH = dly(t) * T;
      acc_t line [DEPTH];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < DEPTH; i++) line[i] <= '0;
        end else if (en) begin
          line[0] <= sum[t];
          for (int i = 1; i < DEPTH; i++) line[i] <= line[i-1];
        end
      end
      assign dout[t+1] = line[DEPTH-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y    <= '0;
      y_en <= 1'b0;
    end else begin
      y    <= sum[NT-1];
      y_en <= en;
    end
  end

endmodule
