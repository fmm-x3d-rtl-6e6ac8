// stream_fifo: branch buffer placed on an arc of the streaming graph.
//
// Where the data flow forks and later merges again (shortcut of a bottleneck
// block, squeeze-and-excitation branch), the two sides of the branch reach
// the merge point with different delays. Each side therefore gets a buffer
// whose depth absorbs that difference, so that the merge node sees both of
// its inputs at the same rate and the producer is not stalled. That such
// buffers exist and are sized per branch follows the source design; the FIFO
// itself (circular buffer, valid/ready on both sides, registered full/empty)
// is this implementation's choice.
//
// Interface: in_valid/in_ready/in_data and out_valid/out_ready/out_data, a
// word moves when valid and ready are both high on a rising clock edge.
// in_ready and out_valid depend only on state, so the FIFO cuts every
// combinational valid/ready path. Latency is one cycle; throughput is one
// word per cycle. level reports the occupancy.
module stream_fifo #(
  parameter int W     = 16,
  parameter int DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [W-1:0]               in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [W-1:0]               out_data,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic push, pop;

  assign in_ready  = (count != ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign level     = count;
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] nxt(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= nxt(wr_ptr);
      if (pop)  rd_ptr <= nxt(rd_ptr);
      count <= count + ($bits(count))'(push) - ($bits(count))'(pop);
    end
  end

  // Valid/ready rule: a presented word stays put until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
