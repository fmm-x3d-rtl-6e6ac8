// tb_gap3d: self-checking test of global average pooling with previous-volume
// statistics. Four volumes of NPIX positions x C channels are streamed in.
// For volume v the block must emit, before it has consumed that volume, the
// per-channel means of volume v-1 (zeros for v = 0), computed here as
// floor(sum * round(2^24/NPIX) / 2^24) and also compared with the exact mean
// to within one LSB. The number of cycles before the first mean appears is
// checked (one cycle after the volume's first word), and vol_done must pulse once
// per volume.
module tb_gap3d;
  import x3d_pkg::*;
  localparam int C = 3, NPIX = 7, NVOL = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, vol_done;
  fm_t  in_data, out_data;
  int checks = 0, failures = 0;
  fm_t  x [NVOL*NPIX*C];
  int   sent = 0, rcvd = 0, dones = 0, cyc = 0, first_out_cyc = -1, first_in_cyc = -1;
  longint sums [NVOL][C];

  gap3d #(.C(C), .NPIX(NPIX)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int v = 0; v < NVOL; v++) for (int c = 0; c < C; c++) sums[v][c] = 0;
    for (int i = 0; i < NVOL*NPIX*C; i++) begin
      x[i] = fm_t'($urandom_range(0, 16383)) - fm_t'(6000);
      sums[i / (NPIX*C)][i % C] += longint'(x[i]);
    end
    in_valid = 0; in_data = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    while (rcvd < NVOL*C || sent < NVOL*NPIX*C) begin
      if (!in_valid || in_ready) in_valid = (sent < NVOL*NPIX*C) && $urandom_range(0, 4) != 0;
      in_data = x[sent < NVOL*NPIX*C ? sent : 0];
      out_ready = $urandom_range(0, 2) != 0;
      @(negedge clk);
    end
    repeat (2) @(negedge clk);
    check(dones == NVOL, "vol_done once per volume");
    check(first_out_cyc == first_in_cyc + 1, "first means one cycle after the first input word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (in_valid && in_ready) begin
      sent <= sent + 1;
      if (first_in_cyc < 0) first_in_cyc <= cyc;
      check(!out_valid || rcvd < (sent / (NPIX*C)) * C + C, "no vector before its volume starts");
    end
    if (vol_done) dones <= dones + 1;
    if (out_valid && first_out_cyc < 0) first_out_cyc <= cyc;
    if (out_valid && out_ready) begin
      int v, c;
      longint e, recip;
      real ex;
      v = rcvd / C; c = rcvd % C;
      // means for volume v come from volume v-1, before volume v is complete
      check(sent < (v + 1) * NPIX * C, "mean sent before its volume ends");
      recip = ((longint'(1) << 24) + NPIX / 2) / NPIX;
      e  = (v == 0) ? 0 : (sums[v-1][c] * recip) >>> 24;
      ex = (v == 0) ? 0.0 : real'(sums[v-1][c]) / real'(NPIX);
      check(longint'(out_data) == e, $sformatf("vol %0d ch %0d got %0d exp %0d", v, c, out_data, e));
      check(real'(out_data) - ex < 1.0 && ex - real'(out_data) < 1.01, "mean accuracy");
      rcvd <= rcvd + 1;
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
