// tb_stream_fifo: self-checking test of the branch-buffer FIFO.
// Sends a numbered sequence through a depth-5 FIFO with random valid and
// ready patterns and checks order, completeness, the occupancy bound, that
// a full FIFO refuses input, and the one-cycle latency of an empty FIFO.
module tb_stream_fifo;
  localparam int DEPTH  = 5;
  localparam int NWORDS = 400;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] level;
  int checks = 0, failures = 0;
  int sent = 0, rcvd = 0, full_seen = 0;
  bit sb_on = 0;

  stream_fifo #(.W(16), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    in_valid = 0; in_data = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency: a word written into an empty FIFO is visible one cycle later
    @(negedge clk); in_valid = 1; in_data = 16'hABCD;
    @(negedge clk); in_valid = 0;
    check(out_valid && out_data == 16'hABCD, "one-cycle latency");
    out_ready = 1; @(negedge clk); out_ready = 0;
    check(!out_valid, "empty after pop");
    sb_on = 1;
    while (rcvd < NWORDS) begin
      in_valid  = (sent < NWORDS) && ($urandom_range(0, 3) != 0);
      in_data   = 16'(sent);
      out_ready = (rcvd < 200) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 1) == 0);
      @(negedge clk);
    end
    in_valid = 0;
    @(negedge clk);
    check(level == 0, "empty at end");
    check(full_seen > 0, "full state reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && sb_on) begin
    if (in_valid && in_ready) sent <= sent + 1;
    if (out_valid && out_ready) begin
      check(out_data == 16'(rcvd), $sformatf("order: got %0d exp %0d", out_data, rcvd));
      rcvd <= rcvd + 1;
    end
    check(level <= DEPTH, "level bound");
    if (level == DEPTH) begin
      full_seen <= full_seen + 1;
      check(!in_ready, "full refuses input");
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
