// tb_window_ctrl -- self-checking test of the layer position counter.
// Configurations: the 5x5 two-pixel example (no padding, images ending in
// the middle of a beat), stride 2 with padding, three lanes with two cycles
// per beat, and a single-pixel stream with padding (checks the pad selects
// of the transposed KPU). See wc_harness for the reference.
module tb_window_ctrl;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic dn [4];
  int ck [4], fl [4], nv [4], np [4];

  wc_harness #(.W(5), .H(5), .S(1), .PD(0), .P(2), .T(1), .SEED(3)) h0 (
    .clk, .done(dn[0]), .checks(ck[0]), .failures(fl[0]), .n_valid(nv[0]), .n_padded(np[0]));
  wc_harness #(.W(6), .H(6), .S(2), .PD(1), .P(2), .T(1), .SEED(4)) h1 (
    .clk, .done(dn[1]), .checks(ck[1]), .failures(fl[1]), .n_valid(nv[1]), .n_padded(np[1]));
  wc_harness #(.W(7), .H(4), .S(1), .PD(1), .P(3), .T(2), .SEED(5)) h2 (
    .clk, .done(dn[2]), .checks(ck[2]), .failures(fl[2]), .n_valid(nv[2]), .n_padded(np[2]));
  wc_harness #(.W(6), .H(5), .S(1), .PD(1), .P(1), .T(1), .SEED(6)) h3 (
    .clk, .done(dn[3]), .checks(ck[3]), .failures(fl[3]), .n_valid(nv[3]), .n_padded(np[3]));

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    wait (dn[0] && dn[1] && dn[2] && dn[3]);
    for (int i = 0; i < 4; i++) begin
      $display("config %0d: checks=%0d failures=%0d valid=%0d padded=%0d", i, ck[i], fl[i], nv[i], np[i]);
      checks += ck[i];
      failures += fl[i];
    end
    checks++;
    if (np[1] == 0 || nv[0] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
