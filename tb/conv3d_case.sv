// conv3d_case: one configuration of the conv3d test. It loads random
// weights and biases through the cfg port, streams NVOL random input volumes
// under optional random valid/ready stalls, and compares every output word
// with a direct nested-loop convolution computed here (zero padding, groups,
// strides, Q6.10 weights, Q7.9 data and bias, floor and saturate). With
// STALL = 0 it also checks that a volume takes exactly the documented number
// of cycles. checks/failures are accumulated into the caller's counters
// through the outputs; done rises when every word has been seen.
module conv3d_case
  import x3d_pkg::*;
#(
  parameter int CIN = 2, COUT = 2, D = 3, H = 3, W = 3,
  parameter int KD = 3, KH = 3, KW = 3, SD = 1, SH = 1, SW = 1,
  parameter int PD = 1, PH = 1, PW = 1, GROUPS = 1, P_MAC = 4,
  parameter int NVOL = 2, parameter bit STALL = 1
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int OD = (D + 2*PD - KD) / SD + 1;
  localparam int OH = (H + 2*PH - KH) / SH + 1;
  localparam int OW = (W + 2*PW - KW) / SW + 1;
  localparam int CPG = CIN / GROUPS, COPG = COUT / GROUPS;
  localparam int N = KD*KH*KW*CPG;
  localparam int NIN = D*H*W*CIN, NOUT = OD*OH*OW*COUT;

  logic cfg_we, in_valid, in_ready, out_valid, out_ready;
  logic [31:0] cfg_addr;
  wt_t  cfg_wdata;
  fm_t  in_data, out_data;

  conv3d #(.CIN(CIN), .COUT(COUT), .D(D), .H(H), .W(W), .KD(KD), .KH(KH), .KW(KW),
           .SD(SD), .SH(SH), .SW(SW), .PD(PD), .PH(PH), .PW(PW), .GROUPS(GROUPS),
           .P_MAC(P_MAC)) dut (.*);

  wt_t wts [COUT*N];
  fm_t bs  [COUT];
  fm_t x   [NVOL*NIN];
  int  exp_out [NVOL*NOUT];
  int  extra = 0;
  int  sent = 0, rcvd = 0, cyc = 0, vol_start = 0;
  bit  loaded = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL conv(%0d,%0d,%0d g%0d): %s", KD, KH, KW, GROUPS, msg); end
  endtask

  initial begin
    checks = 0; failures = 0; done = 0;
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; in_valid = 0; in_data = 0; out_ready = 1;
    for (int i = 0; i < COUT*N; i++) wts[i] = wt_t'($urandom_range(0, 1023)) - wt_t'(512);
    for (int i = 0; i < COUT; i++)   bs[i]  = fm_t'($urandom_range(0, 511)) - fm_t'(256);
    for (int i = 0; i < NVOL*NIN; i++) x[i] = fm_t'($urandom_range(0, 4095)) - fm_t'(2048);
    x[0] = 16'sh7FFF;
    // reference convolution
    for (int v = 0; v < NVOL; v++)
      for (int od = 0; od < OD; od++) for (int oh = 0; oh < OH; oh++) for (int ow = 0; ow < OW; ow++)
        for (int co = 0; co < COUT; co++) begin
          longint acc;
          acc = longint'(bs[co]) * 1024;
          for (int kd = 0; kd < KD; kd++) for (int kh = 0; kh < KH; kh++) for (int kw = 0; kw < KW; kw++)
            for (int cl = 0; cl < CPG; cl++) begin
              int d, h, w, ci;
              d = od*SD - PD + kd; h = oh*SH - PH + kh; w = ow*SW - PW + kw;
              ci = (co / COPG) * CPG + cl;
              if (d >= 0 && d < D && h >= 0 && h < H && w >= 0 && w < W)
                acc += longint'(x[v*NIN + ((d*H + h)*W + w)*CIN + ci]) *
                       longint'(wts[co*N + ((kd*KH + kh)*KW + kw)*CPG + cl]);
            end
          acc = acc >>> 10;
          exp_out[v*NOUT + ((od*OH + oh)*OW + ow)*COUT + co] =
            (acc > 32767) ? 32767 : (acc < -32768) ? -32768 : int'(acc);
        end
    @(posedge rst_n);
    @(negedge clk);
    for (int i = 0; i < COUT*N + COUT; i++) begin
      cfg_we = 1; cfg_addr = 32'(i);
      cfg_wdata = (i < COUT*N) ? wts[i] : wt_t'(bs[i - COUT*N]);
      @(negedge clk);
    end
    cfg_we = 0;
    loaded = 1;
    while (rcvd < NVOL*NOUT) begin
      if (!in_valid || in_ready) in_valid = (sent < NVOL*NIN) && (!STALL || $urandom_range(0, 3) != 0);
      in_data   = x[sent < NVOL*NIN ? sent : 0];
      out_ready = !STALL || $urandom_range(0, 2) != 0;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (50) @(negedge clk);
    check(rcvd == NVOL*NOUT && sent == NVOL*NIN && extra == 0, "no extra output");
    done = 1;
  end

  always @(posedge clk) if (loaded) begin
    cyc <= cyc + 1;
    if (out_valid && out_ready && rcvd >= NVOL*NOUT) extra <= extra + 1;
    if (in_valid && in_ready) sent <= sent + 1;
    if (out_valid && out_ready && rcvd < NVOL*NOUT) begin
      check(int'(out_data) == exp_out[rcvd], $sformatf("out %0d got %0d exp %0d", rcvd, out_data, exp_out[rcvd]));
      rcvd <= rcvd + 1;
      if (!STALL && (rcvd % NOUT) == NOUT - 1) begin
        int expc;
        // input words + per output position: 1 + COUT*(ceil(N/P)+1)
        expc = NIN + OD*OH*OW*(1 + COUT*((N + P_MAC - 1)/P_MAC + 1));
        check(cyc + 1 - vol_start >= expc - 2 && cyc + 1 - vol_start <= expc + 2,
              $sformatf("volume cycles %0d expected %0d", cyc + 1 - vol_start, expc));
        vol_start <= cyc + 2;
      end
    end
  end
endmodule
