// tb_stream_fork: self-checking test of the two-way stream fork.
// A numbered sequence is offered with random valid; the two outputs have
// independent random ready. Each output must see every word exactly once and
// in order, and the input may only advance once both outputs took the word.
module tb_stream_fork;
  localparam int NWORDS = 300;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, a_valid, a_ready, b_valid, b_ready;
  logic [15:0] in_data, a_data, b_data;
  int checks = 0, failures = 0;
  int sent = 0, ra = 0, rb = 0, split = 0;

  stream_fork #(.W(16)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    in_valid = 0; in_data = 0; a_ready = 0; b_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    while (ra < NWORDS || rb < NWORDS) begin
      if (!in_valid || in_ready) begin
        in_valid = (sent < NWORDS) && ($urandom_range(0, 2) != 0);
      end
      in_data = 16'(sent);
      a_ready = $urandom_range(0, 2) != 0;
      b_ready = $urandom_range(0, 2) == 0;
      @(negedge clk);
    end
    check(sent == NWORDS, "all words retired");
    check(split > 0, "outputs accepted one word in different cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      sent <= sent + 1;
      check(ra + (a_valid && a_ready) > sent && rb + (b_valid && b_ready) > sent,
            "input retired before both outputs took it");
    end
    if (a_valid && a_ready) begin
      check(a_data == 16'(ra), $sformatf("a order %0d/%0d", a_data, ra));
      ra <= ra + 1;
    end
    if (b_valid && b_ready) begin
      check(b_data == 16'(rb), $sformatf("b order %0d/%0d", b_data, rb));
      rb <= rb + 1;
    end
    if ((a_valid && a_ready) != (b_valid && b_ready)) split <= split + 1;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
