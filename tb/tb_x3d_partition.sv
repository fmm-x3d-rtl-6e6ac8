// tb_x3d_partition: end-to-end test of the streaming X3D partition at small
// sizes. Three partitions run side by side, each fed and checked word for
// word by partition_checker against a layer-by-layer model:
//   t1  Type 1 shape (SE + projection shortcut), stride 2, three volumes;
//   t2  SE + identity shortcut (the usual X3D inner block with SE), stride 1,
//       two volumes;
//   t3  Type 3 shape (no SE, identity shortcut), stride 1, two volumes.
// Random stalls are applied on both the input and output handshakes.
// Besides the data it counts how often each mechanism of the design
// happened and fails if one never did: input stalls caused by the folded
// convolutions, output back-pressure, words held in the shortcut branch
// buffers, squeeze-and-excitation vectors loaded by the broadcast multiply,
// and GAP statistics handed over from one volume to the next.
module tb_x3d_partition;
  import x3d_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks, failures;

  always #5 clk = ~clk;

  // ------------------------------------------------------------ Type 1
  logic t1_cfg_we, t1_iv, t1_ir, t1_ov, t1_or;
  logic [2:0] t1_sel; logic [31:0] t1_addr; wt_t t1_wd; fm_t t1_id, t1_od;
  int t1_ck, t1_fl, t1_is, t1_os; logic t1_done;

  x3d_partition #(.C_IN(4), .C_INNER(6), .C_SE(2), .C_OUT(5), .D(3), .H(4), .W(5),
                  .STRIDE(2), .HAS_SE(1), .SC_CONV(1), .P_MAC_A(2), .P_MAC_B(9),
                  .P_MAC_C(3), .P_MAC_SC(4), .P_MAC_SE(2), .M_DEPTH(16)) t1 (
    .clk, .rst_n, .cfg_we(t1_cfg_we), .cfg_sel(t1_sel), .cfg_addr(t1_addr), .cfg_wdata(t1_wd),
    .in_valid(t1_iv), .in_ready(t1_ir), .in_data(t1_id),
    .out_valid(t1_ov), .out_ready(t1_or), .out_data(t1_od));

  partition_checker #(.C_IN(4), .C_INNER(6), .C_SE(2), .C_OUT(5), .D(3), .H(4), .W(5),
                      .STRIDE(2), .HAS_SE(1), .SC_CONV(1), .NVOL(3), .STALL(1)) k1 (
    .clk, .rst_n, .cfg_we(t1_cfg_we), .cfg_sel(t1_sel), .cfg_addr(t1_addr), .cfg_wdata(t1_wd),
    .in_valid(t1_iv), .in_ready(t1_ir), .in_data(t1_id),
    .out_valid(t1_ov), .out_ready(t1_or), .out_data(t1_od),
    .checks(t1_ck), .failures(t1_fl), .in_stalls(t1_is), .out_stalls(t1_os), .done(t1_done));

  // --------------------------------------------- SE with identity shortcut
  logic t2_cfg_we, t2_iv, t2_ir, t2_ov, t2_or;
  logic [2:0] t2_sel; logic [31:0] t2_addr; wt_t t2_wd; fm_t t2_id, t2_od;
  int t2_ck, t2_fl, t2_is, t2_os; logic t2_done;

  x3d_partition #(.C_IN(4), .C_INNER(7), .C_SE(3), .C_OUT(4), .D(3), .H(4), .W(3),
                  .STRIDE(1), .HAS_SE(1), .SC_CONV(0), .P_MAC_A(4), .P_MAC_B(27),
                  .P_MAC_C(2), .P_MAC_SC(1), .P_MAC_SE(7), .M_DEPTH(32)) t2 (
    .clk, .rst_n, .cfg_we(t2_cfg_we), .cfg_sel(t2_sel), .cfg_addr(t2_addr), .cfg_wdata(t2_wd),
    .in_valid(t2_iv), .in_ready(t2_ir), .in_data(t2_id),
    .out_valid(t2_ov), .out_ready(t2_or), .out_data(t2_od));

  partition_checker #(.C_IN(4), .C_INNER(7), .C_SE(3), .C_OUT(4), .D(3), .H(4), .W(3),
                      .STRIDE(1), .HAS_SE(1), .SC_CONV(0), .NVOL(2), .STALL(1)) k2 (
    .clk, .rst_n, .cfg_we(t2_cfg_we), .cfg_sel(t2_sel), .cfg_addr(t2_addr), .cfg_wdata(t2_wd),
    .in_valid(t2_iv), .in_ready(t2_ir), .in_data(t2_id),
    .out_valid(t2_ov), .out_ready(t2_or), .out_data(t2_od),
    .checks(t2_ck), .failures(t2_fl), .in_stalls(t2_is), .out_stalls(t2_os), .done(t2_done));

  // ------------------------------------------------------------ Type 3
  logic t3_cfg_we, t3_iv, t3_ir, t3_ov, t3_or;
  logic [2:0] t3_sel; logic [31:0] t3_addr; wt_t t3_wd; fm_t t3_id, t3_od;
  int t3_ck, t3_fl, t3_is, t3_os; logic t3_done;

  x3d_partition #(.C_IN(3), .C_INNER(5), .C_SE(2), .C_OUT(3), .D(4), .H(3), .W(3),
                  .STRIDE(1), .HAS_SE(0), .SC_CONV(0), .P_MAC_A(3), .P_MAC_B(4),
                  .P_MAC_C(5), .P_MAC_SC(1), .P_MAC_SE(1)) t3 (
    .clk, .rst_n, .cfg_we(t3_cfg_we), .cfg_sel(t3_sel), .cfg_addr(t3_addr), .cfg_wdata(t3_wd),
    .in_valid(t3_iv), .in_ready(t3_ir), .in_data(t3_id),
    .out_valid(t3_ov), .out_ready(t3_or), .out_data(t3_od));

  partition_checker #(.C_IN(3), .C_INNER(5), .C_SE(2), .C_OUT(3), .D(4), .H(3), .W(3),
                      .STRIDE(1), .HAS_SE(0), .SC_CONV(0), .NVOL(2), .STALL(1)) k3 (
    .clk, .rst_n, .cfg_we(t3_cfg_we), .cfg_sel(t3_sel), .cfg_addr(t3_addr), .cfg_wdata(t3_wd),
    .in_valid(t3_iv), .in_ready(t3_ir), .in_data(t3_id),
    .out_valid(t3_ov), .out_ready(t3_or), .out_data(t3_od),
    .checks(t3_ck), .failures(t3_fl), .in_stalls(t3_is), .out_stalls(t3_os), .done(t3_done));

  // ------------------------------------------------------ mechanism counters
  int sc_buf_max1 = 0, sc_buf_max3 = 0, se_loads = 0, gap_handover = 0;
  logic mul_loading_q = 1'b1;

  always @(posedge clk) if (rst_n) begin
    if (int'(t1.u_buf_sc.level) > sc_buf_max1) sc_buf_max1 <= int'(t1.u_buf_sc.level);
    if (int'(t3.u_buf_sc.level) > sc_buf_max3) sc_buf_max3 <= int'(t3.u_buf_sc.level);
    mul_loading_q <= t1.g_se.u_mul.loading;
    if (mul_loading_q && !t1.g_se.u_mul.loading) se_loads <= se_loads + 1;
    if (t1.g_se.u_gap.vol_done) gap_handover <= gap_handover + 1;
  end

  task automatic mech(input string name, input int n);
    $display("mechanism %-28s %0d", name, n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL: mechanism %s never happened", name); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (t1_done && t2_done && t3_done);
    checks   = t1_ck + t2_ck + t3_ck;
    failures = t1_fl + t2_fl + t3_fl;
    mech("input stall (type 1)", t1_is);
    mech("input stall (type 3)", t3_is);
    mech("input stall (SE + identity)", t2_is);
    mech("output back-pressure", t1_os + t2_os + t3_os);
    mech("shortcut buffer use (type 1)", sc_buf_max1);
    mech("shortcut buffer use (type 3)", sc_buf_max3);
    mech("SE broadcast vector loads", se_loads);
    mech("GAP previous-volume handover", gap_handover);
    checks++;
    if (se_loads != 3 || gap_handover != 3) begin
      failures++;
      $display("FAIL: expected 3 SE loads and 3 GAP handovers, got %0d and %0d", se_loads, gap_handover);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", t1_ck + t2_ck + t3_ck, t1_fl + t2_fl + t3_fl + 1);
    $finish;
  end
endmodule
