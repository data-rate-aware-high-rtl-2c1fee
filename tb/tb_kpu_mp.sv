// tb_kpu_mp -- self-checking test of the non-transposed KPU.
// Random taps, weights and pad selects every cycle; the registered output
// must equal the sum of the unpadded products one cycle later.
module tb_kpu_mp;
  import cf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1, en = 1'b0;
  always #5 clk = ~clk;

  act_t tap [9];
  wgt_t w [9];
  logic [8:0] pad;
  acc_t y;
  logic y_en;
  int checks = 0, failures = 0, exp_q [$];
  int n_pad = 0;

  kpu_mp #(.K(3)) dut (.*);

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 1'b0;
    for (int t = 0; t < 9; t++) begin tap[t] = '0; w[t] = '0; end
    pad = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int n = 0; n < 500; n++) begin
      int s;
      s = 0;
      for (int t = 0; t < 9; t++) begin
        tap[t] = act_t'($urandom);
        w[t]   = wgt_t'($urandom);
        pad[t] = ($urandom % 4) == 0;
        if (!pad[t]) s += int'(tap[t]) * int'(w[t]);
      end
      if (pad != 0) n_pad++;
      en = ($urandom % 5) != 0;
      exp_q.push_back(en ? s : 32'h7fff_ffff);
      @(posedge clk);
      #1;
      begin
        int e;
        e = exp_q.pop_front();
        checks++;
        if (e == 32'h7fff_ffff) begin
          if (y_en) failures++;
        end else if (!y_en || int'(y) != e) begin
          failures++;
          if (failures < 5) $display("cycle %0d: got %0d exp %0d", n, y, e);
        end
      end
    end
    checks++;
    if (n_pad == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
