// tb_cf_accel_top -- end-to-end test of the accelerator at reduced sizes.
// A: 8x6 images, 3 -> 4 -> 4 -> 2 channels, all input features at once,
//    random idle cycles;
// B: 10x8 images, one input feature per cycle (j=1) and two kernels per KPU
//    in the first layer (6 cycles per beat), so that the depthwise and
//    pointwise layers receive their channels in two groups; no idle cycles.
// Both must make every mechanism happen: idle input cycles, zero padding in
// both convolutions, stride-skipped windows, a pruned KPU design and
// several images in one stream.
module tb_cf_accel_top;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic dn [2];
  int ck [2], fl [2], ng [2], p1 [2], p2 [2], sk [2], pr [2], np [2];

  top_harness #(.IMG_W(8), .IMG_H(6), .C_IN(3), .C1(4), .J1(3), .H1(1), .C3(2),
                .NIMG(2), .GAPS(1'b1), .SEED(3)) hA (
    .clk, .done(dn[0]), .checks(ck[0]), .failures(fl[0]), .n_gaps(ng[0]),
    .n_pad1(p1[0]), .n_pad2(p2[0]), .n_skip(sk[0]), .n_pruned(pr[0]), .n_pixels(np[0]));
  top_harness #(.IMG_W(10), .IMG_H(8), .C_IN(3), .C1(4), .J1(1), .H1(2), .C3(3),
                .SHIFT1(5), .SHIFT2(4), .NIMG(2), .GAPS(1'b0), .SEED(4)) hB (
    .clk, .done(dn[1]), .checks(ck[1]), .failures(fl[1]), .n_gaps(ng[1]),
    .n_pad1(p1[1]), .n_pad2(p2[1]), .n_skip(sk[1]), .n_pruned(pr[1]), .n_pixels(np[1]));

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    wait (dn[0] && dn[1]);
    @(posedge clk);
    for (int i = 0; i < 2; i++) begin
      $display("config %0d: checks=%0d failures=%0d pixels=%0d gaps=%0d pad1=%0d pad2=%0d skipped=%0d pruned=%0d",
               i, ck[i], fl[i], np[i], ng[i], p1[i], p2[i], sk[i], pr[i]);
      checks += ck[i];
      failures += fl[i];
    end
    checks += 5;
    if (ng[0] == 0) failures++;
    if (p1[0] + p1[1] == 0) failures++;
    if (p2[0] + p2[1] == 0) failures++;
    if (sk[0] + sk[1] == 0) failures++;
    if (pr[0] + pr[1] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
