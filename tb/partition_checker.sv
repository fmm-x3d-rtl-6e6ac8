// partition_checker: stimulus and reference model for x3d_partition.
//
// It writes random weights and biases for every convolution of the block
// through the cfg port, streams NVOL random input volumes, and compares
// every output word with a layer-by-layer model of the block computed here
// with plain nested loops: ReLU, point-wise conv_a, ReLU, depth-wise 3x3x3
// conv_b (spatial stride STRIDE, padding 1), squeeze-and-excitation from the
// previous volume's channel means (zeros for the first volume), swish,
// point-wise conv_c, plus the shortcut (point-wise strided conv or identity)
// of the ReLU'd input, all in Q7.9 with floor and saturation. With STALL set
// the input and output handshakes are stalled at random. It counts input
// stalls and output back-pressure cycles for the caller.
module partition_checker
  import x3d_pkg::*;
#(
  parameter int C_IN = 4, C_INNER = 6, C_SE = 2, C_OUT = 5,
  parameter int D = 3, H = 4, W = 4, STRIDE = 2,
  parameter bit HAS_SE = 1'b1, SC_CONV = 1'b1,
  parameter int NVOL = 2, parameter bit STALL = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic        cfg_we,
  output logic [2:0]  cfg_sel,
  output logic [31:0] cfg_addr,
  output wt_t         cfg_wdata,
  output logic        in_valid,
  input  logic        in_ready,
  output fm_t         in_data,
  input  logic        out_valid,
  output logic        out_ready,
  input  fm_t         out_data,
  output int          checks,
  output int          failures,
  output int          in_stalls,
  output int          out_stalls,
  output logic        done
);
  localparam int OH = (H - 1) / STRIDE + 1;
  localparam int OW = (W - 1) / STRIDE + 1;
  localparam int NIN  = D * H * W * C_IN;
  localparam int NOUT = D * OH * OW * C_OUT;

  // weights per layer: 0 a, 1 b, 2 c, 3 shortcut, 4 SE reduce, 5 SE expand
  int wa[], wb[], wc[], wsc[], ws1[], ws2[];
  int ba[], bb[], bc[], bsc[], bs1[], bs2[];
  int x[], expo[];
  int sent = 0, rcvd = 0, extra = 0;
  bit running = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %m: %s", msg);
    end
  endtask

  function automatic int sat(input longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction

  function automatic int relu(input int v);
    return (v < 0) ? 0 : v;
  endfunction

  function automatic int sig(input int v);
    int a, y;
    a = (v < 0) ? -v : v;
    if (a >= 2560)      y = 512;
    else if (a >= 1216) y = a / 32 + 432;
    else if (a >= 512)  y = a / 8 + 320;
    else                y = a / 4 + 256;
    return (v < 0) ? 512 - y : y;
  endfunction

  function automatic int qmul(input int a, input int b);
    return sat((longint'(a) * longint'(b)) >>> 9);
  endfunction

  // direct convolution; in/out indexed ((d*h+y)*w+x)*c+ch
  function automatic void conv(input int in[], output int out[],
                               input int ci, co, d, h, w, kd, kh, kw, sd, sh, sw,
                               input int pd, ph, pw, g, input int wt[], input int bias[]);
    int od, oh, ow, cpg, copg, n;
    od = (d + 2*pd - kd) / sd + 1;
    oh = (h + 2*ph - kh) / sh + 1;
    ow = (w + 2*pw - kw) / sw + 1;
    cpg = ci / g; copg = co / g; n = kd*kh*kw*cpg;
    out = new[od*oh*ow*co];
    for (int z = 0; z < od; z++) for (int y = 0; y < oh; y++) for (int q = 0; q < ow; q++)
      for (int o = 0; o < co; o++) begin
        longint acc;
        acc = longint'(bias[o]) * 1024;
        for (int a = 0; a < kd; a++) for (int b = 0; b < kh; b++) for (int c = 0; c < kw; c++) begin
          int zz, yy, qq;
          zz = z*sd - pd + a; yy = y*sh - ph + b; qq = q*sw - pw + c;
          if (zz >= 0 && zz < d && yy >= 0 && yy < h && qq >= 0 && qq < w)
            for (int l = 0; l < cpg; l++)
              acc += longint'(in[((zz*h + yy)*w + qq)*ci + (o / copg)*cpg + l]) *
                     longint'(wt[o*n + ((a*kh + b)*kw + c)*cpg + l]);
        end
        out[((z*oh + y)*ow + q)*co + o] = sat(acc >>> 10);
      end
  endfunction

  function automatic void rnd(ref int arr[], input int n, input int lo, input int hi);
    arr = new[n];
    foreach (arr[i]) arr[i] = lo + int'($urandom_range(0, hi - lo));
  endfunction

  task automatic load(input int sel, input int wt[], input int bias[]);
    for (int i = 0; i < wt.size() + bias.size(); i++) begin
      cfg_we = 1; cfg_sel = 3'(sel); cfg_addr = 32'(i);
      cfg_wdata = wt_t'((i < wt.size()) ? wt[i] : bias[i - wt.size()]);
      @(negedge clk);
    end
    cfg_we = 0;
  endtask

  // sizes as run-time variables, so that the model's loops stay loops
  int ci_r, cn_r, cs_r, co_r, d_r, h_r, w_r, s_r, oh_r, ow_r;

  task automatic build_reference();
    int prev_mean[];
    ci_r = C_IN; cn_r = C_INNER; cs_r = C_SE; co_r = C_OUT;
    d_r = D; h_r = H; w_r = W; s_r = STRIDE; oh_r = OH; ow_r = OW;
    prev_mean = new[cn_r];
    foreach (prev_mean[i]) prev_mean[i] = 0;
    expo = new[NVOL * NOUT];
    for (int v = 0; v < NVOL; v++) begin
      int r0[], a[], r1[], b[], m[], sc[], c[], s1[], s2[], mean_in[], sv[];
      r0 = new[NIN];
      foreach (r0[i]) r0[i] = relu(x[v*NIN + i]);
      conv(r0, a, ci_r, cn_r, d_r, h_r, w_r, 1, 1, 1, 1, 1, 1, 0, 0, 0, 1, wa, ba);
      r1 = new[a.size()];
      foreach (a[i]) r1[i] = relu(a[i]);
      conv(r1, b, cn_r, cn_r, d_r, h_r, w_r, 3, 3, 3, 1, s_r, s_r, 1, 1, 1, cn_r, wb, bb);
      m = new[b.size()];
      if (HAS_SE) begin
        longint sums[];
        longint recip;
        // scale vector from the previous volume's means
        mean_in = new[cn_r];
        foreach (mean_in[i]) mean_in[i] = prev_mean[i];
        conv(mean_in, s1, cn_r, cs_r, 1, 1, 1, 1, 1, 1, 1, 1, 1, 0, 0, 0, 1, ws1, bs1);
        foreach (s1[i]) s1[i] = relu(s1[i]);
        conv(s1, s2, cs_r, cn_r, 1, 1, 1, 1, 1, 1, 1, 1, 1, 0, 0, 0, 1, ws2, bs2);
        sv = new[cn_r];
        foreach (sv[i]) sv[i] = sig(s2[i]);
        foreach (b[i]) m[i] = qmul(b[i], sv[i % cn_r]);
        // this volume's means, used by the next volume
        sums = new[cn_r];
        foreach (sums[i]) sums[i] = 0;
        foreach (b[i]) sums[i % cn_r] += longint'(b[i]);
        recip = ((longint'(1) << 24) + (d_r*oh_r*ow_r) / 2) / (d_r*oh_r*ow_r);
        foreach (prev_mean[i]) prev_mean[i] = sat((sums[i] * recip) >>> 24);
      end else begin
        foreach (b[i]) m[i] = b[i];
      end
      foreach (m[i]) m[i] = qmul(m[i], sig(m[i]));   // swish
      conv(m, c, cn_r, co_r, d_r, oh_r, ow_r, 1, 1, 1, 1, 1, 1, 0, 0, 0, 1, wc, bc);
      if (SC_CONV) conv(r0, sc, ci_r, co_r, d_r, h_r, w_r, 1, 1, 1, 1, s_r, s_r, 0, 0, 0, 1, wsc, bsc);
      else         sc = r0;
      foreach (c[i]) expo[v*NOUT + i] = sat(longint'(c[i]) + longint'(sc[i]));
    end
  endtask

  initial begin
    checks = 0; failures = 0; in_stalls = 0; out_stalls = 0; done = 0;
    cfg_we = 0; cfg_sel = 0; cfg_addr = 0; cfg_wdata = 0;
    in_valid = 0; in_data = 0; out_ready = 1;
    rnd(wa, C_INNER*C_IN, -160, 160);   rnd(ba, C_INNER, -64, 64);
    rnd(wb, C_INNER*27, -200, 200);     rnd(bb, C_INNER, -64, 64);
    rnd(wc, C_OUT*C_INNER, -160, 160);  rnd(bc, C_OUT, -64, 64);
    rnd(wsc, C_OUT*C_IN, -160, 160);    rnd(bsc, C_OUT, -64, 64);
    rnd(ws1, C_SE*C_INNER, -300, 300);  rnd(bs1, C_SE, -64, 64);
    rnd(ws2, C_INNER*C_SE, -600, 600);  rnd(bs2, C_INNER, -256, 256);
    rnd(x, NVOL*NIN, -1024, 1024);
    x[0] = 32767;
    build_reference();
    @(posedge rst_n);
    @(negedge clk);
    load(0, wa, ba);
    load(1, wb, bb);
    load(2, wc, bc);
    if (SC_CONV) load(3, wsc, bsc);
    if (HAS_SE) begin
      load(4, ws1, bs1);
      load(5, ws2, bs2);
    end
    running = 1;
    while (rcvd < NVOL*NOUT) begin
      if (!in_valid || in_ready) in_valid = (sent < NVOL*NIN) && (!STALL || $urandom_range(0, 7) != 0);
      in_data   = fm_t'(x[sent < NVOL*NIN ? sent : 0]);
      out_ready = !STALL || $urandom_range(0, 3) != 0;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (50) @(negedge clk);
    check(sent == NVOL*NIN && extra == 0, "all input taken, no extra output");
    done = 1;
  end

  always @(posedge clk) if (running) begin
    if (in_valid && in_ready) sent <= sent + 1;
    if (in_valid && !in_ready) in_stalls <= in_stalls + 1;
    if (out_valid && !out_ready) out_stalls <= out_stalls + 1;
    if (out_valid && out_ready) begin
      if (rcvd < NVOL*NOUT) begin
        check(int'(out_data) == expo[rcvd],
              $sformatf("out %0d (vol %0d) got %0d exp %0d", rcvd, rcvd / NOUT, out_data, expo[rcvd]));
        rcvd <= rcvd + 1;
      end else begin
        extra <= extra + 1;
      end
    end
  end
endmodule
