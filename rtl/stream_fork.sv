// stream_fork: copies one stream onto two outgoing arcs.
//
// A node of the streaming graph whose output feeds two consumers (the start
// of a shortcut or of a squeeze-and-excitation branch) is followed by a fork.
// Each input word is offered to both outputs and is retired only when both
// have taken it. A per-output "taken" flag lets the two consumers accept the
// same word in different cycles, so neither output valid depends on the
// other output's ready. The graph-level fork is the source design's; this
// eager-fork circuit is this implementation's choice.
//
// Interface: valid/ready streams in, a and b. in_ready is combinational in
// a_ready and b_ready; outputs carry in_data unchanged (zero latency).
module stream_fork #(
  parameter int W = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         a_valid,
  input  logic         a_ready,
  output logic [W-1:0] a_data,
  output logic         b_valid,
  input  logic         b_ready,
  output logic [W-1:0] b_data
);
  logic a_done, b_done;   // output has already taken the current word
  logic a_ok, b_ok;

  assign a_valid  = in_valid && !a_done;
  assign b_valid  = in_valid && !b_done;
  assign a_data   = in_data;
  assign b_data   = in_data;
  assign a_ok     = a_done || a_ready;
  assign b_ok     = b_done || b_ready;
  assign in_ready = a_ok && b_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_done <= 1'b0;
      b_done <= 1'b0;
    end else if (in_valid) begin
      if (a_ok && b_ok) begin
        a_done <= 1'b0;
        b_done <= 1'b0;
      end else begin
        a_done <= a_ok;
        b_done <= b_ok;
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_ready |=> in_valid && $stable(in_data));
endmodule
