// tb_eltwise3d: self-checking test of the element-wise layer.
// Instance 1 adds two equally shaped streams (normal mode) whose producers
// stall at random, so the rate equalisation (consume both inputs together)
// is exercised. Instance 2 multiplies a 3-position x 4-channel volume by a
// 4-value broadcast vector, for three volumes with a new vector each.
// Expected values are computed here with saturating Q7.9 integer arithmetic.
module tb_eltwise3d;
  import x3d_pkg::*;
  localparam int C = 4, NPIX = 3, NVOL = 3;
  localparam int NADD = 500;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  // ---------------- add, normal mode
  logic a1v, a1r, a2v, a2r, aov, aor;
  fm_t  a1d, a2d, aod;
  fm_t  x1 [NADD], x2 [NADD];
  int   s1 = 0, s2 = 0, ra = 0;

  eltwise3d #(.OP(ELT_ADD), .MODE(ELT_NORMAL)) u_add (
    .clk, .rst_n, .in1_valid(a1v), .in1_ready(a1r), .in1_data(a1d),
    .in2_valid(a2v), .in2_ready(a2r), .in2_data(a2d),
    .out_valid(aov), .out_ready(aor), .out_data(aod));

  // ---------------- mul, broadcast mode
  logic m1v, m1r, m2v, m2r, mov, mor;
  fm_t  m1d, m2d, mod_;
  fm_t  fmv [NVOL*NPIX*C], vec [NVOL*C];
  int   t1 = 0, t2 = 0, rm = 0;

  eltwise3d #(.OP(ELT_MUL), .MODE(ELT_BROADCAST), .C(C), .NPIX(NPIX)) u_mul (
    .clk, .rst_n, .in1_valid(m1v), .in1_ready(m1r), .in1_data(m1d),
    .in2_valid(m2v), .in2_ready(m2r), .in2_data(m2d),
    .out_valid(mov), .out_ready(mor), .out_data(mod_));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int sat(input longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction

  initial begin
    for (int i = 0; i < NADD; i++) begin
      x1[i] = fm_t'($urandom_range(0, 65535));
      x2[i] = fm_t'($urandom_range(0, 65535));
    end
    for (int i = 0; i < NVOL*NPIX*C; i++) fmv[i] = fm_t'($urandom_range(0, 8191)) - fm_t'(4096);
    for (int i = 0; i < NVOL*C; i++)      vec[i] = fm_t'($urandom_range(0, 1023) - 256);
    fmv[0] = 16'sh7FFF; vec[0] = 16'sh0400;   // 2.0 x max: saturates
    {a1v, a2v, m1v, m2v} = '0; {a1d, a2d, m1d, m2d} = '0; aor = 1; mor = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    while (ra < NADD || rm < NVOL*NPIX*C) begin
      if (!a1v || a1r) a1v = (s1 < NADD) && $urandom_range(0, 3) != 0;
      if (!a2v || a2r) a2v = (s2 < NADD) && $urandom_range(0, 1) != 0;
      a1d = x1[s1 < NADD ? s1 : 0]; a2d = x2[s2 < NADD ? s2 : 0];
      aor = $urandom_range(0, 3) != 0;
      if (!m1v || m1r) m1v = (t1 < NVOL*NPIX*C) && $urandom_range(0, 3) != 0;
      if (!m2v || m2r) m2v = (t2 < NVOL*C) && $urandom_range(0, 3) != 0;
      m1d = fmv[t1 < NVOL*NPIX*C ? t1 : 0]; m2d = vec[t2 < NVOL*C ? t2 : 0];
      mor = $urandom_range(0, 3) != 0;
      @(negedge clk);
    end
    // second vector must not have been taken before the first volume ended
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (a1v && a1r) begin
      s1 <= s1 + 1;
      check(a2v && a2r, "add consumes both inputs together");
    end
    if (a2v && a2r) s2 <= s2 + 1;
    if (aov && aor) begin
      check(int'(aod) == sat(longint'(x1[ra]) + longint'(x2[ra])),
            $sformatf("add %0d: got %0d", ra, aod));
      ra <= ra + 1;
    end
    if (m1v && m1r) t1 <= t1 + 1;
    if (m2v && m2r) begin
      t2 <= t2 + 1;
      check(t1 == (t2 / C) * NPIX * C, "vector loaded only between volumes");
    end
    if (mov && mor) begin
      int v, c, e;
      v = rm / (NPIX * C);
      c = rm % C;
      e = sat((longint'(fmv[rm]) * longint'(vec[v*C + c])) >>> 9);
      check(int'(mod_) == e, $sformatf("mul %0d: got %0d exp %0d", rm, mod_, e));
      rm <= rm + 1;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
