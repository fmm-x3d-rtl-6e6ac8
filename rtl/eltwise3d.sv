// eltwise3d: two-input element-wise layer (addition or multiplication).
//
// It merges two branches of the streaming graph. In normal mode (M = normal)
// both inputs carry feature maps of the same shape and element i of the
// output combines element i of each input; the layer consumes from both
// inputs together, so its rate is the lower of the two input rates, as the
// source design specifies. In broadcast mode (M = broadcast) input 2 carries
// one value per channel per volume (the squeeze-and-excitation scale
// vector): the layer first takes the C values of input 2 into a small
// register file and then applies value c to channel c of every one of the
// NPIX positions of input 1, after which it loads the next vector.
//
// Streams are channel-fastest (position-major, channel-minor). Addition is
// saturating; multiplication is Q7.9 x Q7.9 truncated and saturated to Q7.9
// (this implementation's choice of rounding). The result is registered:
// latency one cycle, one element per cycle.
module eltwise3d
  import x3d_pkg::*;
#(
  parameter elt_op_e   OP   = ELT_ADD,
  parameter elt_mode_e MODE = ELT_NORMAL,
  parameter int        C    = 8,     // channels (broadcast vector length)
  parameter int        NPIX = 16     // positions D*H*W per volume (broadcast)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in1_valid,
  output logic in1_ready,
  input  fm_t  in1_data,
  input  logic in2_valid,
  output logic in2_ready,
  input  fm_t  in2_data,
  output logic out_valid,
  input  logic out_ready,
  output fm_t  out_data
);
  localparam int CW = (C > 1) ? $clog2(C) : 1;
  localparam int PW = (NPIX > 1) ? $clog2(NPIX) : 1;

  logic   adv;           // output register can take a new result
  logic   fire;          // a result is produced this cycle
  fm_t    b_op;          // second operand
  fm_t    f;
  fm_t    vec [C];       // broadcast vector
  logic   loading;       // broadcast: filling vec
  logic [CW-1:0] ch;     // channel index (broadcast)
  logic [PW-1:0] pix;    // position index (broadcast)

  assign adv = !out_valid || out_ready;

  always_comb begin
    if (MODE == ELT_BROADCAST) begin
      b_op      = vec[ch];
      in2_ready = loading;
      in1_ready = !loading && adv;
      fire      = !loading && adv && in1_valid;
    end else begin
      b_op      = in2_data;
      in1_ready = adv && in2_valid;
      in2_ready = adv && in1_valid;
      fire      = adv && in1_valid && in2_valid;
    end
    f = (OP == ELT_MUL) ? mul_fm(in1_data, b_op) : add_fm(in1_data, b_op);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (adv) begin
      out_valid <= fire;
      if (fire) out_data <= f;
    end
  end

  always_ff @(posedge clk) begin
    if (MODE == ELT_BROADCAST && loading && in2_valid) vec[ch] <= in2_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      loading <= (MODE == ELT_BROADCAST);
      ch      <= '0;
      pix     <= '0;
    end else if (MODE == ELT_BROADCAST) begin
      if (loading) begin
        if (in2_valid) begin
          if (ch == CW'(C-1)) begin
            ch      <= '0;
            loading <= 1'b0;
          end else begin
            ch <= ch + 1'b1;
          end
        end
      end else if (fire) begin
        if (ch == CW'(C-1)) begin
          ch <= '0;
          if (pix == PW'(NPIX-1)) begin
            pix     <= '0;
            loading <= 1'b1;
          end else begin
            pix <= pix + 1'b1;
          end
        end else begin
          ch <= ch + 1'b1;
        end
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
