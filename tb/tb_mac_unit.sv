// tb_mac_unit -- self-checking test of the MAC unit.
// Instance A: J=3 KPU inputs, h=2 kernels, G=3 feature groups (6
// configurations); instance B: depthwise, J=4, G=2. The phase counter runs
// through the configurations with random idle cycles; random KPU sums arrive
// one cycle after each phase. Checked: the weights presented for each
// configuration against the weight hash and the channel mapping, the
// accumulation over the groups (one result per kernel after the last group,
// through the h-deep feedback) and, in depthwise mode, the pass-through.
module tb_mac_unit;
  import cf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = ~clk;

  localparam int JA = 3, HA = 2, GA = 3, CA = HA * GA, MIDX = 2, SEEDA = 7;
  localparam int JB = 4, GB = 2, SEEDB = 9;

  logic [$clog2(CA+1)-1:0] pa;
  logic [$clog2(GB+1)-1:0] pb;
  wgt_t wa [JA][9], wb [JB][9];
  acc_t sa [JA], sb [JB];
  logic ena, enb, va, vb;
  acc_t ya [1], yb [JB];
  logic yva, yvb;
  logic [$clog2(CA+1)-1:0] ca;
  logic [$clog2(GB+1)-1:0] cb;

  mac_unit #(.J(JA), .HN(HA), .G(GA), .K2(9), .MIDX(MIDX), .WSEED(SEEDA)) dut_a (
    .clk, .rst_n, .phase(pa), .w(wa), .psum(sa), .ps_en(ena), .ps_valid(va),
    .y(ya), .y_valid(yva), .y_cfg(ca));
  mac_unit #(.J(JB), .HN(1), .G(GB), .K2(9), .DEPTHWISE(1'b1), .WSEED(SEEDB)) dut_b (
    .clk, .rst_n, .phase(pb), .w(wb), .psum(sb), .ps_en(enb), .ps_valid(vb),
    .y(yb), .y_valid(yvb), .y_cfg(cb));

  function automatic int rw(int seed, int o, int i, int t);
    logic [31:0] v;
    v = 32'(seed) * 32'h9E37_79B1 ^ 32'(o) * 32'h85EB_CA6B
      ^ 32'(i) * 32'hC2B2_AE35 ^ 32'(t) * 32'h27D4_EB2F;
    v = v ^ (v >> 15);
    v = v * 32'h2C1B_3C6D;
    v = v ^ (v >> 12);
    return (v[3] ? -16 : 0) + int'(v[3:0]);
  endfunction

  int checks = 0, failures = 0, n_results = 0;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int accum [HA];
    int pha, phb, exp_a, exp_b [JB];
    bit chk_a, chk_b;
    #1 rst_n = 1'b0;
    pa = '0; pb = '0; ena = 0; enb = 0; va = 0; vb = 0;
    for (int i = 0; i < JA; i++) sa[i] = '0;
    for (int i = 0; i < JB; i++) sb[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    pha = 0; phb = 0;
    chk_a = 0; chk_b = 0;
    for (int n = 0; n < 600; n++) begin
      // present this cycle's phase; check the ROM read
      pa = ($bits(pa))'(pha);
      pb = ($bits(pb))'(phb);
      #1;
      for (int i = 0; i < JA; i++)
        for (int t = 0; t < 9; t++) begin
          checks++;
          if (int'(wa[i][t]) != rw(SEEDA, MIDX * HA + pha % HA, i * GA + pha / HA, t)) failures++;
        end
      for (int i = 0; i < JB; i++)
        for (int t = 0; t < 9; t++) begin
          checks++;
          if (int'(wb[i][t]) != rw(SEEDB, i * GB + phb, 0, t)) failures++;
        end
      @(posedge clk);
      #1;
      // results of the previous cycle's sums
      if (chk_a) begin
        checks++;
        if (!yva || int'(ya[0]) != exp_a) begin
          failures++;
          if (failures < 5) $display("A: got %0d exp %0d", ya[0], exp_a);
        end
        n_results++;
      end else begin
        checks++;
        if (yva) failures++;
      end
      if (chk_b) begin
        for (int i = 0; i < JB; i++) begin
          checks++;
          if (!yvb || int'(yb[i]) != exp_b[i]) failures++;
        end
      end
      // KPU sums for the phase presented one cycle ago
      ena = ($urandom % 4) != 0;
      enb = ena;
      va = 1'b1;
      vb = ($urandom % 3) != 0;
      for (int i = 0; i < JA; i++) sa[i] = acc_t'(int'($urandom % 2001) - 1000);
      for (int i = 0; i < JB; i++) sb[i] = acc_t'(int'($urandom % 2001) - 1000);
      chk_a = 0; chk_b = 0;
      if (ena) begin
        int s;
        s = 0;
        for (int i = 0; i < JA; i++) s += int'(sa[i]);
        if (pha / HA == 0) accum[pha % HA] = s;
        else accum[pha % HA] += s;
        if (pha / HA == GA - 1) begin chk_a = 1; exp_a = accum[pha % HA]; end
        for (int i = 0; i < JB; i++) exp_b[i] = int'(sb[i]);
        chk_b = vb;
        pha = (pha + 1) % CA;
        phb = (phb + 1) % GB;
      end
    end
    checks++;
    if (n_results == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
