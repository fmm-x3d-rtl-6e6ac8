// tb_conv3d: self-checking test of the streaming 3D convolution.
// Five configurations cover the convolution kinds of X3D: a full 3x3x3
// convolution with padding, a depth-wise 3x3x3 one with spatial stride 2
// (exact cycle count checked), point-wise 1x1x1 with one multiplier, a
// 1x3x3 spatial and a 5x1x1 temporal depth-wise convolution, each over two
// or three volumes.
module tb_conv3d;
  logic clk = 0, rst_n = 0;
  int   ck [5], fl [5];
  logic dn [5];
  int   checks, failures;

  always #5 clk = ~clk;

  conv3d_case #(.CIN(2), .COUT(3), .D(3), .H(4), .W(5), .P_MAC(5), .NVOL(2), .STALL(1))
    c0 (.clk, .rst_n, .checks(ck[0]), .failures(fl[0]), .done(dn[0]));
  conv3d_case #(.CIN(3), .COUT(3), .D(4), .H(5), .W(5), .SH(2), .SW(2), .GROUPS(3),
                .P_MAC(27), .NVOL(2), .STALL(0))
    c1 (.clk, .rst_n, .checks(ck[1]), .failures(fl[1]), .done(dn[1]));
  conv3d_case #(.CIN(5), .COUT(4), .D(2), .H(3), .W(3), .KD(1), .KH(1), .KW(1),
                .PD(0), .PH(0), .PW(0), .P_MAC(1), .NVOL(3), .STALL(0))
    c2 (.clk, .rst_n, .checks(ck[2]), .failures(fl[2]), .done(dn[2]));
  conv3d_case #(.CIN(4), .COUT(4), .D(2), .H(6), .W(6), .KD(1), .PD(0), .SH(2), .SW(2),
                .GROUPS(4), .P_MAC(4), .NVOL(2), .STALL(1))
    c3 (.clk, .rst_n, .checks(ck[3]), .failures(fl[3]), .done(dn[3]));
  conv3d_case #(.CIN(2), .COUT(2), .D(6), .H(2), .W(2), .KD(5), .KH(1), .KW(1), .PD(2),
                .PH(0), .PW(0), .GROUPS(2), .P_MAC(2), .NVOL(2), .STALL(1))
    c4 (.clk, .rst_n, .checks(ck[4]), .failures(fl[4]), .done(dn[4]));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (dn[0] && dn[1] && dn[2] && dn[3] && dn[4]);
    checks = 0; failures = 0;
    for (int i = 0; i < 5; i++) begin checks += ck[i]; failures += fl[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    checks = 0; failures = 1;
    for (int i = 0; i < 5; i++) begin checks += ck[i]; failures += fl[i]; end
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
