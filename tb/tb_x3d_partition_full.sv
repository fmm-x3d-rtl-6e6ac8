// tb_x3d_partition_full: the partition at its default size (the first
// block of the last X3D-M stage: 16 x 16 x 16 x 96 in, inner width 432,
// 16 x 8 x 8 x 192 out) taken through two complete clips, so that the second
// clip uses the squeeze-and-excitation statistics of the first. Every output
// word is compared with the layer-by-layer model in partition_checker; the
// input and output handshakes are not stalled, so the run measures the
// partition's own initiation interval, which is printed in cycles per clip.
module tb_x3d_partition_full;
  import x3d_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we, in_valid, in_ready, out_valid, out_ready;
  logic [2:0] cfg_sel; logic [31:0] cfg_addr; wt_t cfg_wdata; fm_t in_data, out_data;
  int ck, fl, is, os, cyc = 0, first_out = -1, vol_end = 0, outs = 0;
  logic done;

  always #5 clk = ~clk;

  x3d_partition dut (.*);

  partition_checker #(.C_IN(96), .C_INNER(432), .C_SE(32), .C_OUT(192), .D(16), .H(16),
                      .W(16), .STRIDE(2), .HAS_SE(1), .SC_CONV(1), .NVOL(2), .STALL(0)) k (
    .clk, .rst_n, .cfg_we, .cfg_sel, .cfg_addr, .cfg_wdata,
    .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data,
    .checks(ck), .failures(fl), .in_stalls(is), .out_stalls(os), .done);

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (out_valid && out_ready) begin
      outs <= outs + 1;
      if (first_out < 0) first_out <= cyc;
      if (outs == 16*8*8*192 - 1) vol_end <= cyc;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done);
    $display("clip 0 done at cycle %0d, last output at cycle %0d, input stall cycles %0d",
             vol_end, cyc, is);
    $display("cycles per clip in steady state: %0d", cyc - 50 - vol_end);
    $display("TB_RESULT checks=%0d failures=%0d", ck + (is > 0 ? 1 : 0), fl + (is > 0 ? 0 : 1));
    $finish;
  end

  initial begin
    repeat (60000000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", ck, fl + 1);
    $finish;
  end
endmodule
