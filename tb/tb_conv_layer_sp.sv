// tb_conv_layer_sp -- self-checking test of the single-pixel convolution
// layer built from transposed KPUs.
//   A  5x5, 3x3, padding 1, 2 -> 2 channels, one pixel per cycle;
//   B  6x4, stride 2, padding 1, 4 -> 6 channels, j=2, h=3 (6 cycles per
//      pixel) with random idle cycles;
//   C  depthwise 4 channels, 7x5, padding 1, all channels at once;
//   D  5x6, no padding, 3 -> 2 channels, j=1 (3 cycles per pixel).
// Every window is compared with a direct convolution; without idle cycles
// its output cycle is checked as well (see conv_harness).
module tb_conv_layer_sp;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic dn [4];
  int ck [4], fl [4], nw [4], ni [4], np [4], ng [4];

  conv_harness #(.SP(1'b1), .W(5), .H(5), .K(3), .S(1), .PD(1), .P(1), .D_IN(2),
                 .D_OUT(2), .J(2), .HN(1), .NIMG(2), .SEED(21), .WSEED(8)) hA (
    .clk, .done(dn[0]), .checks(ck[0]), .failures(fl[0]), .n_windows(nw[0]),
    .n_invalid(ni[0]), .n_padded(np[0]), .n_gaps(ng[0]));
  conv_harness #(.SP(1'b1), .W(6), .H(4), .K(3), .S(2), .PD(1), .P(1), .D_IN(4),
                 .D_OUT(6), .J(2), .HN(3), .NIMG(2), .GAPS(1'b1), .SEED(22),
                 .WSEED(9)) hB (
    .clk, .done(dn[1]), .checks(ck[1]), .failures(fl[1]), .n_windows(nw[1]),
    .n_invalid(ni[1]), .n_padded(np[1]), .n_gaps(ng[1]));
  conv_harness #(.SP(1'b1), .W(7), .H(5), .K(3), .S(1), .PD(1), .P(1), .D_IN(4),
                 .D_OUT(4), .J(4), .HN(1), .DEPTHWISE(1'b1), .NIMG(2), .SEED(23),
                 .WSEED(10)) hC (
    .clk, .done(dn[2]), .checks(ck[2]), .failures(fl[2]), .n_windows(nw[2]),
    .n_invalid(ni[2]), .n_padded(np[2]), .n_gaps(ng[2]));
  conv_harness #(.SP(1'b1), .W(5), .H(6), .K(3), .S(1), .PD(0), .P(1), .D_IN(3),
                 .D_OUT(2), .J(1), .HN(1), .NIMG(2), .SEED(24), .WSEED(11)) hD (
    .clk, .done(dn[3]), .checks(ck[3]), .failures(fl[3]), .n_windows(nw[3]),
    .n_invalid(ni[3]), .n_padded(np[3]), .n_gaps(ng[3]));

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    wait (dn[0] && dn[1] && dn[2] && dn[3]);
    @(posedge clk);
    for (int i = 0; i < 4; i++) begin
      $display("config %0d: checks=%0d failures=%0d windows=%0d invalid=%0d padded=%0d gaps=%0d",
               i, ck[i], fl[i], nw[i], ni[i], np[i], ng[i]);
      checks += ck[i];
      failures += fl[i];
    end
    checks += 3;
    if (np[0] + np[1] + np[2] == 0) failures++;   // zero padding
    if (ni[1] + ni[3] == 0) failures++;           // skipped windows
    if (ng[1] == 0) failures++;                   // idle input cycles
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
