// x3d_partition: one X3D bottleneck block as a streaming pipeline.
//
// X3D-M is split into 26 partitions, each mapped to its own FPGA
// configuration and run over a batch of clips. Every partition is one
// residual bottleneck block, in one of three shapes:
//   Type 1  ReLU -> point-wise conv -> ReLU -> depth-wise 3x3x3 conv ->
//           squeeze-and-excitation (GAP -> conv -> ReLU -> conv -> sigmoid,
//           broadcast-multiplied into the main path) -> swish ->
//           point-wise conv, added to a point-wise (projection) shortcut conv
//           of the block input.
//   Type 2  as drawn, the same graph as Type 1 (SE and shortcut conv).
//   Type 3  as Type 1 without squeeze-and-excitation and with an identity
//           shortcut.
// HAS_SE and SC_CONV select the shape (1/1 = Types 1 and 2, 0/0 = Type 3)
// and are independent: HAS_SE = 1 with SC_CONV = 0 gives the SE block with
// an identity shortcut that X3D uses inside a stage.
// Every layer is its own hardware block connected by valid/ready streams
// of 16-bit Q7.9 words, position-major and channel-fastest. Forks copy a
// stream onto the two sides of a branch; the side that runs ahead (the
// shortcut) is given a FIFO deep enough to hold what it produces while the
// main path is still filling its 3x3x3 window (one output frame plus a few
// rows, SC_DEPTH), so the merge never deadlocks.
//
// The squeeze-and-excitation branch uses the previous-volume GAP: the
// scale vector applied to clip b is computed from the averages of clip b-1
// (zeros for the first clip after reset), so the main path never waits for
// a whole feature map. This is the configuration the source design proposes
// as its faster variant ("GAP-approx").
//
// Interface: in_* carries the block input (D x H x W x C_IN), out_* the
// block output (D x OH x OW x C_OUT). Weights and biases of the six
// convolutions are written before use through cfg_*, cfg_sel choosing the
// layer (0 conv_a, 1 conv_b, 2 conv_c, 3 shortcut, 4 SE reduce, 5 SE
// expand) and cfg_addr the word inside it (see conv3d). The off-chip memory
// readers and writers that feed and drain the streams are outside this
// module.
//
// Default sizes are the first block of the last stage (res5) of X3D-M on
// 16 x 256 x 256 clips: input 16 x 16 x 16 x 96, inner width 432, SE width
// 32, output 16 x 8 x 8 x 192. These sizes and the P_MAC_* values are this
// implementation's choice: the source design gives neither per-layer sizes
// nor the folding its design-space exploration selected.
module x3d_partition
  import x3d_pkg::*;
#(
  parameter int C_IN     = 96,
  parameter int C_INNER  = 432,
  parameter int C_SE     = 32,
  parameter int C_OUT    = 192,
  parameter int D        = 16,
  parameter int H        = 16,
  parameter int W        = 16,
  parameter int STRIDE   = 2,      // spatial stride of conv_b and shortcut
  parameter bit HAS_SE   = 1'b1,
  parameter bit SC_CONV  = 1'b1,
  parameter int P_MAC_A  = 32,
  parameter int P_MAC_B  = 27,
  parameter int P_MAC_C  = 48,
  parameter int P_MAC_SC = 32,
  parameter int P_MAC_SE = 32,
  parameter int M_DEPTH  = 1024,   // main-path buffer in front of the SE multiply
  // derived
  parameter int OH       = (H - 1) / STRIDE + 1,
  parameter int OW       = (W - 1) / STRIDE + 1,
  parameter int SC_DEPTH = SC_CONV ? (OH * OW + 4 * OW + 8) * C_OUT
                                   : (H * W + 4 * W + 8) * C_IN
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [2:0]  cfg_sel,
  input  logic [31:0] cfg_addr,
  input  wt_t         cfg_wdata,
  input  logic        in_valid,
  output logic        in_ready,
  input  fm_t         in_data,
  output logic        out_valid,
  input  logic        out_ready,
  output fm_t         out_data
);
  // stream wires: <name>_v / _r / _d
  logic r0_v, r0_r;   fm_t r0_d;    // input ReLU
  logic fa_v, fa_r;   fm_t fa_d;    // fork0 -> main
  logic fb_v, fb_r;   fm_t fb_d;    // fork0 -> shortcut
  logic ca_v, ca_r;   fm_t ca_d;    // conv_a
  logic r1_v, r1_r;   fm_t r1_d;    // ReLU after conv_a
  logic cb_v, cb_r;   fm_t cb_d;    // conv_b
  logic se_v, se_r;   fm_t se_d;    // main path after SE
  logic sw_v, sw_r;   fm_t sw_d;    // swish
  logic cc_v, cc_r;   fm_t cc_d;    // conv_c
  logic sc_v, sc_r;   fm_t sc_d;    // shortcut before its buffer
  logic sq_v, sq_r;   fm_t sq_d;    // shortcut after its buffer

  logic [5:0] we;   // per-layer weight write enables

  always_comb begin
    for (int i = 0; i < 6; i++) we[i] = cfg_we && (cfg_sel == 3'(i));
  end

  act3d #(.ACT(ACT_RELU)) u_relu_in (
    .clk, .rst_n,
    .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(r0_v), .out_ready(r0_r), .out_data(r0_d));

  stream_fork #(.W(DATA_W)) u_fork0 (
    .clk, .rst_n,
    .in_valid(r0_v), .in_ready(r0_r), .in_data(r0_d),
    .a_valid(fa_v), .a_ready(fa_r), .a_data(fa_d),
    .b_valid(fb_v), .b_ready(fb_r), .b_data(fb_d));

  // ------------------------------------------------------------ main path
  conv3d #(.CIN(C_IN), .COUT(C_INNER), .D(D), .H(H), .W(W),
           .KD(1), .KH(1), .KW(1), .SD(1), .SH(1), .SW(1),
           .PD(0), .PH(0), .PW(0), .GROUPS(1), .P_MAC(P_MAC_A)) u_conv_a (
    .clk, .rst_n,
    .cfg_we(we[0]), .cfg_addr(cfg_addr),
    .cfg_wdata,
    .in_valid(fa_v), .in_ready(fa_r), .in_data(fa_d),
    .out_valid(ca_v), .out_ready(ca_r), .out_data(ca_d));

  act3d #(.ACT(ACT_RELU)) u_relu_a (
    .clk, .rst_n,
    .in_valid(ca_v), .in_ready(ca_r), .in_data(ca_d),
    .out_valid(r1_v), .out_ready(r1_r), .out_data(r1_d));

  conv3d #(.CIN(C_INNER), .COUT(C_INNER), .D(D), .H(H), .W(W),
           .KD(3), .KH(3), .KW(3), .SD(1), .SH(STRIDE), .SW(STRIDE),
           .PD(1), .PH(1), .PW(1), .GROUPS(C_INNER), .P_MAC(P_MAC_B)) u_conv_b (
    .clk, .rst_n,
    .cfg_we(we[1]), .cfg_addr(cfg_addr),
    .cfg_wdata,
    .in_valid(r1_v), .in_ready(r1_r), .in_data(r1_d),
    .out_valid(cb_v), .out_ready(cb_r), .out_data(cb_d));

  if (HAS_SE) begin : g_se
    logic m_v,  m_r;   fm_t m_d;    // fork1 -> main buffer
    logic g_v,  g_r;   fm_t g_d;    // fork1 -> GAP
    logic mq_v, mq_r;  fm_t mq_d;   // main buffer out
    logic gp_v, gp_r;  fm_t gp_d;   // GAP out
    logic s1_v, s1_r;  fm_t s1_d;   // SE reduce conv
    logic s2_v, s2_r;  fm_t s2_d;   // ReLU
    logic s3_v, s3_r;  fm_t s3_d;   // SE expand conv
    logic s4_v, s4_r;  fm_t s4_d;   // sigmoid
    logic sv_v, sv_r;  fm_t sv_d;   // scale vector buffer out
    logic gap_done;

    stream_fork #(.W(DATA_W)) u_fork1 (
      .clk, .rst_n,
      .in_valid(cb_v), .in_ready(cb_r), .in_data(cb_d),
      .a_valid(m_v), .a_ready(m_r), .a_data(m_d),
      .b_valid(g_v), .b_ready(g_r), .b_data(g_d));

    stream_fifo #(.W(DATA_W), .DEPTH(M_DEPTH)) u_buf_main (
      .clk, .rst_n,
      .in_valid(m_v), .in_ready(m_r), .in_data(m_d),
      .out_valid(mq_v), .out_ready(mq_r), .out_data(mq_d), .level());

    gap3d #(.C(C_INNER), .NPIX(D * OH * OW)) u_gap (
      .clk, .rst_n,
      .in_valid(g_v), .in_ready(g_r), .in_data(g_d),
      .out_valid(gp_v), .out_ready(gp_r), .out_data(gp_d),
      .vol_done(gap_done));

    conv3d #(.CIN(C_INNER), .COUT(C_SE), .D(1), .H(1), .W(1),
             .KD(1), .KH(1), .KW(1), .SD(1), .SH(1), .SW(1),
             .PD(0), .PH(0), .PW(0), .GROUPS(1), .P_MAC(P_MAC_SE)) u_conv_se1 (
      .clk, .rst_n,
      .cfg_we(we[4]), .cfg_addr(cfg_addr),
      .cfg_wdata,
      .in_valid(gp_v), .in_ready(gp_r), .in_data(gp_d),
      .out_valid(s1_v), .out_ready(s1_r), .out_data(s1_d));

    act3d #(.ACT(ACT_RELU)) u_relu_se (
      .clk, .rst_n,
      .in_valid(s1_v), .in_ready(s1_r), .in_data(s1_d),
      .out_valid(s2_v), .out_ready(s2_r), .out_data(s2_d));

    conv3d #(.CIN(C_SE), .COUT(C_INNER), .D(1), .H(1), .W(1),
             .KD(1), .KH(1), .KW(1), .SD(1), .SH(1), .SW(1),
             .PD(0), .PH(0), .PW(0), .GROUPS(1), .P_MAC(P_MAC_SE)) u_conv_se2 (
      .clk, .rst_n,
      .cfg_we(we[5]), .cfg_addr(cfg_addr),
      .cfg_wdata,
      .in_valid(s2_v), .in_ready(s2_r), .in_data(s2_d),
      .out_valid(s3_v), .out_ready(s3_r), .out_data(s3_d));

    act3d #(.ACT(ACT_SIGMOID)) u_sigmoid (
      .clk, .rst_n,
      .in_valid(s3_v), .in_ready(s3_r), .in_data(s3_d),
      .out_valid(s4_v), .out_ready(s4_r), .out_data(s4_d));

    stream_fifo #(.W(DATA_W), .DEPTH(C_INNER)) u_buf_scale (
      .clk, .rst_n,
      .in_valid(s4_v), .in_ready(s4_r), .in_data(s4_d),
      .out_valid(sv_v), .out_ready(sv_r), .out_data(sv_d), .level());

    eltwise3d #(.OP(ELT_MUL), .MODE(ELT_BROADCAST), .C(C_INNER),
                .NPIX(D * OH * OW)) u_mul (
      .clk, .rst_n,
      .in1_valid(mq_v), .in1_ready(mq_r), .in1_data(mq_d),
      .in2_valid(sv_v), .in2_ready(sv_r), .in2_data(sv_d),
      .out_valid(se_v), .out_ready(se_r), .out_data(se_d));
  end else begin : g_no_se
    assign se_v = cb_v;
    assign se_d = cb_d;
    assign cb_r = se_r;
  end

  act3d #(.ACT(ACT_SWISH)) u_swish (
    .clk, .rst_n,
    .in_valid(se_v), .in_ready(se_r), .in_data(se_d),
    .out_valid(sw_v), .out_ready(sw_r), .out_data(sw_d));

  conv3d #(.CIN(C_INNER), .COUT(C_OUT), .D(D), .H(OH), .W(OW),
           .KD(1), .KH(1), .KW(1), .SD(1), .SH(1), .SW(1),
           .PD(0), .PH(0), .PW(0), .GROUPS(1), .P_MAC(P_MAC_C)) u_conv_c (
    .clk, .rst_n,
    .cfg_we(we[2]), .cfg_addr(cfg_addr),
    .cfg_wdata,
    .in_valid(sw_v), .in_ready(sw_r), .in_data(sw_d),
    .out_valid(cc_v), .out_ready(cc_r), .out_data(cc_d));

  // -------------------------------------------------------------- shortcut
  if (SC_CONV) begin : g_sc_conv
    conv3d #(.CIN(C_IN), .COUT(C_OUT), .D(D), .H(H), .W(W),
             .KD(1), .KH(1), .KW(1), .SD(1), .SH(STRIDE), .SW(STRIDE),
             .PD(0), .PH(0), .PW(0), .GROUPS(1), .P_MAC(P_MAC_SC)) u_conv_sc (
      .clk, .rst_n,
      .cfg_we(we[3]), .cfg_addr(cfg_addr),
      .cfg_wdata,
      .in_valid(fb_v), .in_ready(fb_r), .in_data(fb_d),
      .out_valid(sc_v), .out_ready(sc_r), .out_data(sc_d));
  end else begin : g_sc_id
    assign sc_v = fb_v;
    assign sc_d = fb_d;
    assign fb_r = sc_r;
  end

  stream_fifo #(.W(DATA_W), .DEPTH(SC_DEPTH)) u_buf_sc (
    .clk, .rst_n,
    .in_valid(sc_v), .in_ready(sc_r), .in_data(sc_d),
    .out_valid(sq_v), .out_ready(sq_r), .out_data(sq_d), .level());

  // ----------------------------------------------------------------- merge
  eltwise3d #(.OP(ELT_ADD), .MODE(ELT_NORMAL), .C(C_OUT), .NPIX(D * OH * OW)) u_add (
    .clk, .rst_n,
    .in1_valid(cc_v), .in1_ready(cc_r), .in1_data(cc_d),
    .in2_valid(sq_v), .in2_ready(sq_r), .in2_data(sq_d),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data));

  initial begin
    assert (SC_CONV || (C_IN == C_OUT && STRIDE == 1))
      else $error("identity shortcut needs C_IN == C_OUT and STRIDE == 1");
  end
endmodule
