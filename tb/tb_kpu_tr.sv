// tb_kpu_tr -- self-checking test of the transposed KPU.
// Two instances: a 3x3 kernel on a 5-wide image with one cycle per pixel,
// and with two cycles per pixel (two weight sets used alternately). Inputs,
// pad selects and idle cycles are random. The reference keeps the history of
// enabled cycles: the output after cycle c is sum over taps t of
// w[phase][t] * x(c - off_t*T) with x replaced by 0 where the pad select of
// tap t was set at that time, off_t = (2-kr)*W + (2-kc) pixels.
module tb_kpu_tr;
  import cf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1, en = 1'b0;
  always #5 clk = ~clk;

  localparam int W = 5;
  act_t x;
  logic [8:0] pad;
  wgt_t w1 [9], w2 [9];
  wgt_t wset [2][9];
  acc_t y1, y2;
  logic e1, e2;
  int checks = 0, failures = 0;

  kpu_tr #(.K(3), .W(W), .T(1)) dut1 (.clk, .rst_n, .en, .x, .pad, .w(w1), .y(y1), .y_en(e1));
  kpu_tr #(.K(3), .W(W), .T(2)) dut2 (.clk, .rst_n, .en, .x, .pad, .w(w2), .y(y2), .y_en(e2));

  int xh [$];          // x seen on enabled cycles (0 where padded, per tap)
  logic [8:0] ph [$];

  function automatic int ref_y(int T, int c, wgt_t ws [2][9]);
    int s, idx;
    s = 0;
    for (int kr = 0; kr < 3; kr++)
      for (int kc = 0; kc < 3; kc++) begin
        idx = c - ((2 - kr) * W + (2 - kc)) * T;
        if (idx >= 0 && !ph[idx][kr*3+kc])
          s += xh[idx] * int'(ws[(T == 1) ? 0 : c % 2][kr*3+kc]);
      end
    return s;
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c;
    #1 rst_n = 1'b0;
    for (int s = 0; s < 2; s++) for (int t = 0; t < 9; t++) wset[s][t] = wgt_t'($urandom);
    x = '0; pad = '0;
    for (int t = 0; t < 9; t++) begin w1[t] = wset[0][t]; w2[t] = wset[0][t]; end
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    c = 0;
    for (int n = 0; n < 1500; n++) begin
      en = ($urandom % 4) != 0;
      x = act_t'($urandom);
      for (int t = 0; t < 9; t++) pad[t] = ($urandom % 6) == 0;
      for (int t = 0; t < 9; t++) w2[t] = wset[c % 2][t];
      if (en) begin xh.push_back(int'(x)); ph.push_back(pad); end
      @(posedge clk);
      #1;
      if (en) begin
        checks += 2;
        if (!e1 || int'(y1) != ref_y(1, c, wset)) begin
          failures++;
          if (failures < 5) $display("T=1 cycle %0d: got %0d exp %0d", c, y1, ref_y(1, c, wset));
        end
        if (!e2 || int'(y2) != ref_y(2, c, wset)) begin
          failures++;
          if (failures < 5) $display("T=2 cycle %0d: got %0d exp %0d", c, y2, ref_y(2, c, wset));
        end
        c++;
      end else begin
        checks++;
        if (e1 || e2) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
