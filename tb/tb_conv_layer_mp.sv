// tb_conv_layer_mp -- self-checking test of the multi-pixel convolution layer.
//
// Four configurations run side by side, each checked window by window
// against a direct convolution (see conv_harness):
//   A  5x5 image, 3x3 kernel, two pixels per beat, no padding: the example
//      of the two-pixel KPU and pixel-order figures; images end in the
//      middle of a beat;
//   B  6x6, stride 2, padding 1, 3 -> 4 channels: one KPU design is never
//      used and must have been pruned;
//   C  7x5, padding 1, 4 -> 4 channels, j=2, h=2 (4 cycles per beat) with
//      random idle cycles;
//   D  depthwise 4 channels, j=2, three pixels per beat.
// Without idle cycles the output cycle of every window is checked as well.
module tb_conv_layer_mp;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic dn [4];
  int ck [4], fl [4], nw [4], ni [4], np [4], ng [4];

  conv_harness #(.W(5), .H(5), .K(3), .S(1), .PD(0), .P(2), .D_IN(1), .D_OUT(1),
                 .J(1), .HN(1), .NIMG(3), .SEED(11)) hA (
    .clk, .done(dn[0]), .checks(ck[0]), .failures(fl[0]), .n_windows(nw[0]),
    .n_invalid(ni[0]), .n_padded(np[0]), .n_gaps(ng[0]));
  conv_harness #(.W(6), .H(6), .K(3), .S(2), .PD(1), .P(2), .D_IN(3), .D_OUT(4),
                 .J(3), .HN(1), .NIMG(2), .SEED(12), .WSEED(5)) hB (
    .clk, .done(dn[1]), .checks(ck[1]), .failures(fl[1]), .n_windows(nw[1]),
    .n_invalid(ni[1]), .n_padded(np[1]), .n_gaps(ng[1]));
  conv_harness #(.W(7), .H(5), .K(3), .S(1), .PD(1), .P(2), .D_IN(4), .D_OUT(4),
                 .J(2), .HN(2), .NIMG(2), .GAPS(1'b1), .SEED(13), .WSEED(6)) hC (
    .clk, .done(dn[2]), .checks(ck[2]), .failures(fl[2]), .n_windows(nw[2]),
    .n_invalid(ni[2]), .n_padded(np[2]), .n_gaps(ng[2]));
  conv_harness #(.W(5), .H(4), .K(3), .S(1), .PD(1), .P(3), .D_IN(4), .D_OUT(4),
                 .J(2), .HN(1), .DEPTHWISE(1'b1), .NIMG(2), .SEED(14), .WSEED(7)) hD (
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
    // pruning: with stride 2, two lanes and an even width only the design
    // anchored on lane 1 (odd columns) is built
    checks += 2;
    if (hB.g_mp.dut.USED != 2'b10) failures++;
    if (hA.g_mp.dut.USED != 2'b11) failures++;
    // every mechanism must have happened somewhere
    checks += 3;
    if (np[1] + np[2] + np[3] == 0) failures++;   // zero padding
    if (ni[0] + ni[1] == 0) failures++;           // invalid / stride-skipped windows
    if (ng[2] == 0) failures++;                   // idle input cycles
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
