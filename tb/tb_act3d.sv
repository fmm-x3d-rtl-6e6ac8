// tb_act3d: self-checking test of the activation layer in all three types.
// Three instances (ReLU, sigmoid, swish) receive the same random and corner
// Q7.9 values under random output back-pressure. Expected values are worked
// out here in real arithmetic from the PLAN segment formulas and floored to
// the Q7.9 grid; the sigmoid is also compared with the exact logistic
// function (PLAN error is below 0.02). One result per cycle is checked when
// the output is always ready.
module tb_act3d;
  import x3d_pkg::*;
  localparam int NV = 600;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_ready;
  fm_t  in_data;
  logic [2:0] ir, ov;
  fm_t  od [3];
  int checks = 0, failures = 0;
  fm_t  vals [NV];
  int   sent = 0;
  int   rcv [3] = '{0, 0, 0};
  logic in_ready;
  int   full_rate_cycles = 0, full_rate_outs = 0;

  act3d #(.ACT(ACT_RELU))    u_relu (.clk, .rst_n, .in_valid, .in_ready(ir[0]), .in_data,
                                     .out_valid(ov[0]), .out_ready, .out_data(od[0]));
  act3d #(.ACT(ACT_SIGMOID)) u_sig  (.clk, .rst_n, .in_valid, .in_ready(ir[1]), .in_data,
                                     .out_valid(ov[1]), .out_ready, .out_data(od[1]));
  act3d #(.ACT(ACT_SWISH))   u_sw   (.clk, .rst_n, .in_valid, .in_ready(ir[2]), .in_data,
                                     .out_valid(ov[2]), .out_ready, .out_data(od[2]));
  assign in_ready = &ir;

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic real plan(input real x);
    real a, y;
    a = (x < 0) ? -x : x;
    if (a >= 5.0)        y = 1.0;
    else if (a >= 2.375) y = $floor(a * 512.0 / 32.0) / 512.0 + 0.84375;
    else if (a >= 1.0)   y = $floor(a * 512.0 / 8.0) / 512.0 + 0.625;
    else                 y = $floor(a * 512.0 / 4.0) / 512.0 + 0.5;
    return (x < 0) ? 1.0 - y : y;
  endfunction

  function automatic int expect_val(input int t, input int xi);
    real x, s;
    int  r;
    x = real'(xi) / 512.0;
    case (t)
      0: r = (xi < 0) ? 0 : xi;
      1: r = int'(plan(x) * 512.0);
      default: begin
        s = plan(x) * 512.0;            // exact Q7.9 integer
        r = int'($floor(real'(xi) * s / 512.0));
        if (r > 32767) r = 32767;
        if (r < -32768) r = -32768;
      end
    endcase
    return r;
  endfunction

  initial begin
    for (int i = 0; i < NV; i++) vals[i] = fm_t'($urandom_range(0, 65535));
    vals[0] = 0; vals[1] = 16'sh7FFF; vals[2] = 16'sh8000; vals[3] = 512; vals[4] = -512;
    vals[5] = 1216; vals[6] = -1216; vals[7] = 2560; vals[8] = -2560; vals[9] = 511;
    for (int i = 10; i < 200; i++) vals[i] = fm_t'($urandom_range(0, 6000)) - fm_t'(3000);
    in_valid = 0; in_data = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    while (rcv[0] < NV) begin
      in_valid  = sent < NV;
      in_data   = vals[sent < NV ? sent : 0];
      out_ready = (sent < 300) ? 1'b1 : ($urandom_range(0, 2) != 0);
      @(negedge clk);
    end
    check(rcv[1] == NV && rcv[2] == NV, "all outputs");
    // rate: 1 element per cycle while output always ready (first 300 words)
    check(full_rate_outs >= full_rate_cycles - 2 && full_rate_cycles > 250, "rate of one per cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) sent <= sent + 1;
    if (sent > 0 && sent < 300) begin
      full_rate_cycles <= full_rate_cycles + 1;
      if (ov[0] && out_ready) full_rate_outs <= full_rate_outs + 1;
    end
    for (int t = 0; t < 3; t++) begin
      if (ov[t] && out_ready) begin
        int e;
        e = expect_val(t, int'(vals[rcv[t]]));
        check(int'(od[t]) == e, $sformatf("type %0d x=%0d got %0d exp %0d", t, vals[rcv[t]], od[t], e));
        if (t == 1) begin
          real x, ex;
          x  = real'(vals[rcv[t]]) / 512.0;
          ex = 1.0 / (1.0 + $exp(-x));
          check((real'(od[t]) / 512.0 - ex) < 0.021 && (ex - real'(od[t]) / 512.0) < 0.021,
                $sformatf("sigmoid accuracy x=%f", x));
        end
        rcv[t] <= rcv[t] + 1;
      end
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
