// tb_cf_pkg -- checks the elaboration-time helpers of cf_pkg.
//  * tap lane and delay of the two-pixel 3x3 KPU on a 5x5 image: the design
//    anchored on lane 0 takes w0 from lane 0 delayed 6 beats, w1 from lane 1
//    delayed 6, w2 from lane 0 delayed 5 and w8 from lane 0 undelayed; all
//    nine taps are also checked against the checkerboard pixel order;
//  * which KPU designs are used with stride 1 and stride 2;
//  * the (j,h) selection for a few rates, worked out by hand.
module tb_cf_pkg;
  import cf_pkg::*;
  int checks = 0, failures = 0;

  task automatic expect_eq(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    // figure values, design anchored on lane 0 (first window)
    expect_eq(tap_lane(0, 0, 3, 5, 2, 0), 0, "w0 lane");
    expect_eq(tap_delay(0, 0, 3, 5, 2, 0), 6, "w0 delay");
    expect_eq(tap_lane(0, 1, 3, 5, 2, 0), 1, "w1 lane");
    expect_eq(tap_delay(0, 1, 3, 5, 2, 0), 6, "w1 delay");
    expect_eq(tap_lane(0, 2, 3, 5, 2, 0), 0, "w2 lane");
    expect_eq(tap_delay(0, 2, 3, 5, 2, 0), 5, "w2 delay");
    expect_eq(tap_lane(2, 2, 3, 5, 2, 0), 0, "w8 lane");
    expect_eq(tap_delay(2, 2, 3, 5, 2, 0), 0, "w8 delay");
    // every tap of both designs against the pixel order of a 5x5 image:
    // pixel (r,c) travels on lane (5r+c) mod 2 in beat (5r+c) div 2
    for (int a = 0; a < 2; a++)
      for (int kr = 0; kr < 3; kr++)
        for (int kc = 0; kc < 3; kc++) begin
          int q_last, q;
          q_last = 2 * 5 + 2 + a;               // first (a=0) / second (a=1) window
          q = kr * 5 + kc + a;
          expect_eq(tap_lane(kr, kc, 3, 5, 2, a), q % 2, "lane");
          expect_eq(tap_delay(kr, kc, 3, 5, 2, a), q_last / 2 - q / 2, "delay");
        end
    // both designs are needed at stride 1; at stride 2 on the 5x5 image only
    // the first one (its second window is skipped) -- unless images do not
    // fill whole beats: 25 pixels shift the lanes of the next image
    expect_eq(int'(design_used(0, 5, 5, 3, 1, 0, 2)), 1, "stride 1 lane 0");
    expect_eq(int'(design_used(1, 5, 5, 3, 1, 0, 2)), 1, "stride 1 lane 1");
    expect_eq(int'(design_used(1, 6, 6, 3, 2, 0, 2)), 0, "stride 2 even width lane 1");
    expect_eq(int'(design_used(0, 6, 6, 3, 2, 0, 2)), 1, "stride 2 even width lane 0");
    expect_eq(int'(design_used(0, 224, 224, 3, 2, 1, 2)), 0, "MobileNetV2 stem lane 0");
    expect_eq(int'(design_used(1, 224, 224, 3, 2, 1, 2)), 1, "MobileNetV2 stem lane 1");
    expect_eq(int'(design_used(0, 5, 5, 3, 2, 0, 2)), 1, "stride 2 5x5 lane 0");
    expect_eq(int'(design_used(1, 5, 5, 3, 2, 0, 2)), 1, "stride 2 5x5 lane 1 (odd images)");
    expect_eq(max_delay(3, 5, 2), 6, "deepest delay");
    // (j,h) selection
    expect_eq(select_j(3, 32, 3, 1), 3, "3/1 j");
    expect_eq(select_h(3, 32, 3, 1), 1, "3/1 h");
    expect_eq(select_j(3, 32, 3, 4), 3, "3/4 j");
    expect_eq(select_h(3, 32, 3, 4), 4, "3/4 h");
    expect_eq(select_j(32, 64, 5, 3), 32, "5/3 j");
    expect_eq(select_h(32, 64, 5, 3), 16, "5/3 h");
    expect_eq(select_j(12, 18, 5, 4), 12, "5/4 j");
    expect_eq(select_h(12, 18, 5, 4), 9, "5/4 h");
    // requantisation
    expect_eq(int'(requant(-5, 2)), 0, "relu");
    expect_eq(int'(requant(1000, 3)), 125, "shift");
    expect_eq(int'(requant(100000, 3)), 127, "saturate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
