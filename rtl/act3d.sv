// act3d: element-wise activation layer (ReLU, sigmoid or swish).
//
// The activation is applied to every element of the stream independently,
// so the layer consumes and produces one element per cycle, as the source
// design states for activation layers. The type is fixed at build time by
// the ACT parameter (T of the layer configuration). ReLU and swish
// (x * sigmoid(x)) are those of the source design; the sigmoid circuit is
// this implementation's choice: the PLAN piecewise-linear approximation in
// x3d_pkg, built from shifts and adds only, on Q7.9 words.
//
// Interface: valid/ready streams. The result is registered: latency one
// cycle, throughput one element per cycle; in_ready = !out_valid || out_ready.
module act3d
  import x3d_pkg::*;
#(
  parameter act_e ACT = ACT_RELU
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  fm_t  in_data,
  output logic out_valid,
  input  logic out_ready,
  output fm_t  out_data
);
  fm_t f;

  always_comb begin
    unique case (ACT)
      ACT_RELU:    f = relu_fm(in_data);
      ACT_SIGMOID: f = sigmoid_fm(in_data);
      ACT_SWISH:   f = swish_fm(in_data);
      default:     f = in_data;
    endcase
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_data <= f;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
