// tb_fc_layer -- self-checking test of the pointwise / fully connected layer.
// A: two pixel lanes, 8 -> 4 neurons, j=4, h=2, random idle cycles;
// B: one lane, 6 -> 6, j=2, h=3 (9 cycles per pixel), no idle cycles;
// C: one lane, 4 -> 3, j=4, h=1 (one pixel per cycle).
module tb_fc_layer;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic dn [3];
  int ck [3], fl [3], ng [3];
  fc_harness #(.P(2), .D_IN(8), .D_OUT(4), .J(4), .HN(2), .GAPS(1'b1), .SEED(5)) hA (
    .clk, .done(dn[0]), .checks(ck[0]), .failures(fl[0]), .n_gaps(ng[0]));
  fc_harness #(.P(1), .D_IN(6), .D_OUT(6), .J(2), .HN(3), .GAPS(1'b0), .SEED(6), .WSEED(4)) hB (
    .clk, .done(dn[1]), .checks(ck[1]), .failures(fl[1]), .n_gaps(ng[1]));
  fc_harness #(.P(1), .D_IN(4), .D_OUT(3), .J(4), .HN(1), .GAPS(1'b0), .SEED(7), .WSEED(5)) hC (
    .clk, .done(dn[2]), .checks(ck[2]), .failures(fl[2]), .n_gaps(ng[2]));
  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    wait (dn[0] && dn[1] && dn[2]);
    for (int i = 0; i < 3; i++) begin
      $display("config %0d: checks=%0d failures=%0d gaps=%0d", i, ck[i], fl[i], ng[i]);
      checks += ck[i];
      failures += fl[i];
    end
    checks++;
    if (ng[0] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
