// tb_fcu -- self-checking test of one fully connected unit.
// j=4 inputs, h=3 neurons, 3 feature groups (9 configurations), unit index
// 2. Random input groups are held h cycles each; after the last group the h
// results must equal the dot products with the hashed ROM weights of
// neurons 6, 7 and 8, one per cycle, one cycle after their inputs.
module tb_fcu;
  import cf_pkg::*;
  localparam int J = 4, HN = 3, G = 3, C = HN * G, FIDX = 2, WSEED = 12;
  logic clk = 1'b0, rst_n = 1'b1, en = 1'b0;
  always #5 clk = ~clk;
  logic [$clog2(C+1)-1:0] phase;
  logic signed [DATA_W-1:0] x [J];
  acc_t y;
  logic y_valid;
  logic [$clog2(HN+1)-1:0] y_k;

  fcu #(.J(J), .HN(HN), .G(G), .FIDX(FIDX), .WSEED(WSEED)) dut (.*);

  function automatic int rw(int seed, int o, int i, int t);
    logic [31:0] v;
    v = 32'(seed) * 32'h9E37_79B1 ^ 32'(o) * 32'h85EB_CA6B
      ^ 32'(i) * 32'hC2B2_AE35 ^ 32'(t) * 32'h27D4_EB2F;
    v = v ^ (v >> 15);
    v = v * 32'h2C1B_3C6D;
    v = v ^ (v >> 12);
    return (v[3] ? -16 : 0) + int'(v[3:0]);
  endfunction

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int pix [J * G];
    #1 rst_n = 1'b0;
    phase = '0;
    for (int i = 0; i < J; i++) x[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < 40; n++) begin
      for (int c = 0; c < J * G; c++) pix[c] = int'($urandom % 256) - 128;
      for (int g = 0; g < G; g++)
        for (int k = 0; k < HN; k++) begin
          en = 1'b1;
          phase = ($bits(phase))'(g * HN + k);
          for (int i = 0; i < J; i++) x[i] = pix[i * G + g];
          @(posedge clk);
          #1;
          en = 1'b0;
          checks++;
          if (y_valid != (g == G - 1)) failures++;
          if (g == G - 1) begin
            int s;
            s = 0;
            for (int c = 0; c < J * G; c++) s += pix[c] * rw(WSEED, FIDX * HN + k, c, 0);
            checks += 2;
            if (int'(y) != s) failures++;
            if (int'(y_k) != k) failures++;
          end
          if (($urandom % 4) == 0) begin
            @(posedge clk);
            #1;
            checks++;
            if (y_valid) failures++;
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
