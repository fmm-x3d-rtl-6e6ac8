// conv3d: streaming 3D convolution layer with a folded dot-product engine.
//
// The layer covers every convolution kind of X3D through its build-time
// configuration <Ks, Sr, Pad, Gp>: kernel KD x KH x KW, strides SD/SH/SW,
// zero padding PD/PH/PW and GROUPS (1 = full convolution, GROUPS = CIN =
// COUT = depth-wise; a 1x1x1 kernel gives a point-wise convolution, 1xKxK
// and Kx1x1 kernels the spatial-only and temporal-only ones). P_MAC is the
// number of multiply-accumulates done in parallel: a dot product of length
// N = KD*KH*KW*CIN/GROUPS takes ceil(N/P_MAC) cycles, so P_MAC = N gives one
// dot product per cycle and P_MAC = 1 gives 1/N, as in the source design.
//
// How it works (own choice; the source design leaves the convolution's
// internals to its fpgaConvNet heritage). Input words arrive one per cycle,
// position-major and channel-fastest, and are written into a circular window
// buffer that holds exactly the span a window can cover:
//   RING = ((KD-1)*H*W + (KH-1)*W + KW) * CIN words.
// Output positions are produced in raster order. An output position can be
// computed as soon as its window's last in-range input position (the
// clamped far corner of the window) has fully arrived; input is then held
// off while, for each output channel, the dot product is accumulated P_MAC
// products per cycle and the result is presented on the output. A window
// element is read at (last written address - its distance in the stream
// from the last written element); elements in the padding read as zero.
// Weights (Q6.10) and biases (Q7.9, e.g. folded batch normalisation, own
// choice) are held on chip and written through the cfg port: address
// co*N + n for weight n of output channel co, NW + co for bias co.
// Accumulation is in 48 bits; the result is truncated to Q7.9 and saturated.
//
// Timing: with input always valid and output always ready, one batch
// element (volume) takes D*H*W*CIN cycles of input plus, per output
// position, 1 + COUT*(ceil(N/P_MAC)+1) cycles. Volumes follow back to back.
module conv3d
  import x3d_pkg::*;
#(
  parameter int CIN    = 4,
  parameter int COUT   = 4,
  parameter int D      = 4,
  parameter int H      = 4,
  parameter int W      = 4,
  parameter int KD     = 3,
  parameter int KH     = 3,
  parameter int KW     = 3,
  parameter int SD     = 1,
  parameter int SH     = 1,
  parameter int SW     = 1,
  parameter int PD     = 1,
  parameter int PH     = 1,
  parameter int PW     = 1,
  parameter int GROUPS = 1,
  parameter int P_MAC  = 4,
  // derived, not to be overridden
  parameter int N      = KD * KH * KW * (CIN / GROUPS),
  parameter int NW     = COUT * N
) (
  input  logic              clk,
  input  logic              rst_n,
  // weight / bias load port
  input  logic              cfg_we,
  input  logic [31:0]       cfg_addr,
  input  wt_t               cfg_wdata,
  // input feature-map stream
  input  logic              in_valid,
  output logic              in_ready,
  input  fm_t               in_data,
  // output feature-map stream
  output logic              out_valid,
  input  logic              out_ready,
  output fm_t               out_data
);
  localparam int OD   = (D + 2 * PD - KD) / SD + 1;
  localparam int OH   = (H + 2 * PH - KH) / SH + 1;
  localparam int OW   = (W + 2 * PW - KW) / SW + 1;
  localparam int CPG  = CIN / GROUPS;     // input channels per group
  localparam int COPG = COUT / GROUPS;    // output channels per group
  localparam int NPIX = D * H * W;
  localparam int RING = ((KD - 1) * H * W + (KH - 1) * W + KW) * CIN;
  localparam int RAW  = (RING > 1) ? $clog2(RING) : 1;

  typedef enum logic [1:0] {S_IN, S_COMP, S_OUT} state_e;
  state_e state;

  fm_t  ring [RING];
  wt_t  wmem [NW];
  fm_t  bias [COUT];

  logic [RAW-1:0] wptr;        // next ring address to write
  int             in_c;        // channel of the next input word
  int             pix_done;    // complete input positions of this volume
  int             od, oh, ow;  // next output position
  int             co;          // output channel being computed
  int             nbase;       // first kernel element of this cycle's chunk
  logic           out_done;    // all outputs of this volume produced
  acc_t           acc;
  acc_t           lane_sum;
  int             trig;        // input position that completes (od,oh,ow)
  logic           pending;

  // ---------------------------------------------------------------- trigger
  function automatic int clampi(input int v, input int hi);
    return (v > hi) ? hi : v;
  endfunction

  always_comb begin
    trig = (clampi(od * SD - PD + KD - 1, D - 1) * H +
            clampi(oh * SH - PH + KH - 1, H - 1)) * W +
            clampi(ow * SW - PW + KW - 1, W - 1);
    pending = !out_done && (trig < pix_done);
  end

  // ------------------------------------------------------ dot-product lanes
  always_comb begin
    int   n, kidx, kd, kh, kw, ci, d, h, w, lin_el, lin_last, span, addr;
    int   last_wr;
    logic ok;
    fm_t  x;
    wt_t  wv;
    lane_sum = '0;
    last_wr  = (wptr == '0) ? RING - 1 : int'(wptr) - 1;
    lin_last = pix_done * CIN - 1;
    for (int j = 0; j < P_MAC; j++) begin
      n    = nbase + j;
      kidx = n / CPG;
      kd   = kidx / (KH * KW);
      kh   = (kidx / KW) % KH;
      kw   = kidx % KW;
      ci   = (co / COPG) * CPG + (n % CPG);
      d    = od * SD - PD + kd;
      h    = oh * SH - PH + kh;
      w    = ow * SW - PW + kw;
      ok   = (n < N) && (d >= 0) && (d < D) && (h >= 0) && (h < H) &&
             (w >= 0) && (w < W);
      lin_el = ((d * H + h) * W + w) * CIN + ci;
      span   = lin_last - lin_el;
      addr   = last_wr - span;
      if (addr < 0) addr = addr + RING;
      if (!ok || addr < 0 || addr >= RING) addr = 0;
      x  = ok ? ring[addr] : fm_t'(0);
      wv = (n < N) ? wmem[co * N + ((n < N) ? n : 0)] : wt_t'(0);
      lane_sum = lane_sum + acc_t'(x) * acc_t'(wv);
    end
  end

  // ------------------------------------------------------------- handshake
  assign in_ready  = (state == S_IN) && !pending && (pix_done < NPIX);
  assign out_valid = (state == S_OUT);
  assign out_data  = sat_fm(acc >>> W_FRAC);

  // ------------------------------------------------------------ memories
  always_ff @(posedge clk) begin
    if (in_valid && in_ready) ring[wptr] <= in_data;
    if (cfg_we) begin
      if (int'(cfg_addr) < NW) wmem[int'(cfg_addr)] <= cfg_wdata;
      else if (int'(cfg_addr) < NW + COUT) bias[int'(cfg_addr) - NW] <= cfg_wdata;
    end
  end

  // ------------------------------------------------------------ control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IN;
      wptr     <= '0;
      in_c     <= 0;
      pix_done <= 0;
      od       <= 0;
      oh       <= 0;
      ow       <= 0;
      co       <= 0;
      nbase    <= 0;
      out_done <= 1'b0;
      acc      <= '0;
    end else begin
      unique case (state)
        S_IN: begin
          if (pending) begin
            state <= S_COMP;
            co    <= 0;
            nbase <= 0;
            acc   <= acc_t'(bias[0]) <<< W_FRAC;
          end else if (out_done && pix_done == NPIX) begin
            // volume finished: start the next one
            out_done <= 1'b0;
            pix_done <= 0;
            od       <= 0;
            oh       <= 0;
            ow       <= 0;
          end else if (in_valid && in_ready) begin
            wptr <= (int'(wptr) == RING - 1) ? '0 : wptr + 1'b1;
            if (in_c == CIN - 1) begin
              in_c     <= 0;
              pix_done <= pix_done + 1;
            end else begin
              in_c <= in_c + 1;
            end
          end
        end
        S_COMP: begin
          acc <= acc + lane_sum;
          if (nbase + P_MAC >= N) state <= S_OUT;
          else                    nbase <= nbase + P_MAC;
        end
        S_OUT: begin
          if (out_ready) begin
            nbase <= 0;
            if (co == COUT - 1) begin
              state <= S_IN;
              co    <= 0;
              if (ow == OW - 1) begin
                ow <= 0;
                if (oh == OH - 1) begin
                  oh <= 0;
                  if (od == OD - 1) begin
                    od       <= 0;
                    out_done <= 1'b1;
                  end else begin
                    od <= od + 1;
                  end
                end else begin
                  oh <= oh + 1;
                end
              end else begin
                ow <= ow + 1;
              end
            end else begin
              co    <= co + 1;
              state <= S_COMP;
              acc   <= acc_t'(bias[co + 1]) <<< W_FRAC;
            end
          end
        end
        default: state <= S_IN;
      endcase
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
