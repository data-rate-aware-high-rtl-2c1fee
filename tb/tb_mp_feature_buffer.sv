// tb_mp_feature_buffer -- self-checking test of the shared delay line.
// J=2 features, P=2 lanes, delays 0..4 beats of T=3 cycles, random idle
// cycles. Every tap is compared with the input history of enabled cycles.
module tb_mp_feature_buffer;
  import cf_pkg::*;
  localparam int J = 2, P = 2, DMAX = 4, T = 3;
  logic clk = 1'b0, rst_n = 1'b1, en = 1'b0;
  always #5 clk = ~clk;

  act_t x [J][P];
  act_t tap [J][P][DMAX+1];
  int checks = 0, failures = 0;
  int hist [$][J][P];

  mp_feature_buffer #(.J(J), .P(P), .DMAX(DMAX), .T(T)) dut (.*);

  initial begin : watchdog
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 1'b0;
    for (int i = 0; i < J; i++) for (int m = 0; m < P; m++) x[i][m] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < 1000; n++) begin
      int cur [J][P];
      #1;
      en = ($urandom % 4) != 0;
      for (int i = 0; i < J; i++)
        for (int m = 0; m < P; m++) begin
          x[i][m] = act_t'($urandom);
          cur[i][m] = int'(x[i][m]);
        end
      #1;
      // taps seen in this cycle: d beats back = d*T enabled cycles back
      for (int i = 0; i < J; i++)
        for (int m = 0; m < P; m++)
          for (int d = 0; d <= DMAX; d++) begin
            int e, idx;
            idx = hist.size() - d * T;
            if (d == 0) e = cur[i][m];
            else if (idx >= 0) e = hist[idx][i][m];
            else e = 0;
            checks++;
            if (int'(tap[i][m][d]) != e) failures++;
          end
      if (en) hist.push_back(cur);
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
