// mp_feature_buffer -- shared input delay line of a multi-pixel layer.
//
// For each of the J input features and each of the P pixel lanes it keeps
// the last DMAX beats of the stream. tap[i][m][d] is feature i of lane m
// delayed by d beats (d = 0 is the current input). One beat lasts T valid
// cycles, so the line is DMAX*T entries deep and shifts on every cycle with
// `en` set; tap d is entry d*T-1. All KPUs of the layer read from this one
// buffer instead of holding their own delays.
//
// The paper says the input features are buffered once and shared with all
// KPUs; the shift-register organisation is this design's own choice.
module mp_feature_buffer
  import cf_pkg::*;
#(
  parameter int J    = 1,   // features per lane per cycle
  parameter int P    = 2,   // pixel lanes
  parameter int DMAX = 6,   // deepest delay, in beats
  parameter int T    = 1    // cycles per beat
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  act_t x   [J][P],
  output act_t tap [J][P][DMAX+1]
);
  localparam int DEPTH = (DMAX * T > 0) ? DMAX * T : 1;

  act_t line [J][P][DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < J; i++)
        for (int m = 0; m < P; m++)
          for (int d = 0; d < DEPTH; d++) line[i][m][d] <= '0;
    end else if (en) begin
      for (int i = 0; i < J; i++)
        for (int m = 0; m < P; m++) begin
          line[i][m][0] <= x[i][m];
          for (int d = 1; d < DEPTH; d++) line[i][m][d] <= line[i][m][d-1];
        end
    end
  end

  always_comb
    for (int i = 0; i < J; i++)
      for (int m = 0; m < P; m++) begin
        tap[i][m][0] = x[i][m];
        for (int d = 1; d <= DMAX; d++) tap[i][m][d] = line[i][m][d*T-1];
      end

endmodule
