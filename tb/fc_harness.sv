// fc_harness -- streams random pixels through one fc_layer configuration.
// Each pixel is sent as D_IN/J groups of J features (lane i of group g =
// feature i*G+g), every group held HN cycles, optionally with random idle
// cycles; P pixels travel side by side. Every result is compared with the
// dot product of the pixel with the hashed weights of its neuron, and the
// output must come one cycle after the last group's cycle.
module fc_harness
  import cf_pkg::*;
#(
  parameter int P = 2, D_IN = 8, D_OUT = 4, J = 4, HN = 2, WSEED = 3,
  parameter int NPIX = 20, parameter bit GAPS = 1'b1, parameter int SEED = 1
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_gaps
);
  localparam int G = D_IN / J, NF = D_OUT / HN;
  logic rst_n = 1'b1, en = 1'b0;
  logic signed [DATA_W-1:0] x [P][J];
  acc_t y [P][NF];
  logic y_valid;
  logic [$clog2(HN+1)-1:0] y_k;

  fc_layer #(.P(P), .D_IN(D_IN), .D_OUT(D_OUT), .J(J), .HN(HN), .WSEED(WSEED)) dut (.*);

  function automatic int rw(int seed, int o, int i, int t);
    logic [31:0] v;
    v = 32'(seed) * 32'h9E37_79B1 ^ 32'(o) * 32'h85EB_CA6B
      ^ 32'(i) * 32'hC2B2_AE35 ^ 32'(t) * 32'h27D4_EB2F;
    v = v ^ (v >> 15);
    v = v * 32'h2C1B_3C6D;
    v = v ^ (v >> 12);
    return (v[3] ? -16 : 0) + int'(v[3:0]);
  endfunction

  int pix [NPIX][P][D_IN];

  initial begin
    int unsigned rs;
    checks = 0; failures = 0; n_gaps = 0; done = 1'b0;
    rs = SEED;
    for (int n = 0; n < NPIX; n++)
      for (int m = 0; m < P; m++)
        for (int c = 0; c < D_IN; c++) begin
          rs = rs * 1103515245 + 12345;
          pix[n][m][c] = int'(rs[23:16]) - 128;
        end
    for (int m = 0; m < P; m++) for (int i = 0; i < J; i++) x[m][i] = '0;
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < NPIX; n++)
      for (int g = 0; g < G; g++)
        for (int k = 0; k < HN; k++) begin
          rs = rs * 1103515245 + 12345;
          while (GAPS && rs[19:18] == 2'd0) begin
            en = 1'b0;
            n_gaps++;
            @(posedge clk);
            #1;
            checks++;
            if (y_valid) failures++;
            rs = rs * 1103515245 + 12345;
          end
          en = 1'b1;
          for (int m = 0; m < P; m++)
            for (int i = 0; i < J; i++) x[m][i] = pix[n][m][i * G + g];
          @(posedge clk);
          #1;
          en = 1'b0;
          checks++;
          if (y_valid != (g == G - 1)) failures++;
          if (g == G - 1) begin
            checks++;
            if (int'(y_k) != k) failures++;
            for (int m = 0; m < P; m++)
              for (int f = 0; f < NF; f++) begin
                int s;
                s = 0;
                for (int c = 0; c < D_IN; c++) s += pix[n][m][c] * rw(WSEED, f * HN + k, c, 0);
                checks++;
                if (int'(y[m][f]) != s) begin
                  failures++;
                  if (failures < 5) $display("pixel %0d lane %0d neuron %0d: got %0d exp %0d",
                                             n, m, f * HN + k, y[m][f], s);
                end
              end
          end
        end
    done = 1'b1;
  end
endmodule
