// tb_cf_accel_top_full -- the accelerator at its default size: 224x224x3
// images at two pixels per cycle, 32 channels after the stride-2 and the
// depthwise layer, 16 after the pointwise layer. One image is checked pixel
// by pixel against the layer-by-layer reference (a second image follows it
// in the stream so that the last output rows come out); the whole image must
// pass in 224*224/2 input cycles, since the input never stalls.
module tb_cf_accel_top_full;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic dn;
  int ck, fl, ng, p1, p2, sk, pr, np;
  int cycles = 0;

  top_harness #(.FULL(1'b1), .IMG_W(224), .IMG_H(224), .P(2), .C_IN(3), .C1(32),
                .J1(3), .H1(1), .C3(16), .SHIFT1(6), .SHIFT2(5), .NIMG(1),
                .GAPS(1'b0), .SEED(9)) h (
    .clk, .done(dn), .checks(ck), .failures(fl), .n_gaps(ng), .n_pad1(p1),
    .n_pad2(p2), .n_skip(sk), .n_pruned(pr), .n_pixels(np));

  int checks = 0, failures = 0;
  int first_out = -1, last_out = -1;

  always @(posedge clk) begin
    cycles <= cycles + 1;
    if (h.y_valid) begin
      if (first_out < 0) first_out = cycles;
      last_out = cycles;
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    wait (dn);
    @(posedge clk);
    $display("checks=%0d failures=%0d pixels=%0d pad1=%0d pad2=%0d skipped=%0d pruned=%0d",
             ck, fl, np, p1, p2, sk, pr);
    $display("outputs from cycle %0d to %0d", first_out, last_out);
    checks = ck + 4;
    failures = fl;
    if (p1 == 0) failures++;
    if (p2 == 0) failures++;
    if (sk == 0) failures++;
    if (pr != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
