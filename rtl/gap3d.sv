// gap3d: 3D global average pooling with previous-volume statistics.
//
// Global average pooling reduces each channel of a D x H x W x C volume to
// its mean. Computed exactly, its first output exists only after the whole
// volume has been read, which stalls the squeeze-and-excitation branch and
// forces the merge point to buffer a whole feature map. Following the
// source design's streaming optimisation, this block instead forwards the
// means of the PREVIOUS volume (batch element) as soon as a new volume
// starts (on its first word), while it accumulates the current volume's sums in on-chip
// registers; when the current volume ends its sums replace the stored ones.
// After reset the stored sums are zero, so the first volume sees means of 0
// (this implementation's choice; the source design does not say).
//
// The mean is sum * RECIP >>> RSHIFT with RECIP = round(2^RSHIFT / NPIX),
// a constant multiply instead of a divider (own choice), saturated to Q7.9.
// Input: NPIX*C words, channel-fastest. Output: C words per volume, one per
// cycle, starting the cycle after the volume's first input word is taken. If a volume
// ends while the vector for it has not been fully sent, the last input word
// is held back until the sending completes.
module gap3d
  import x3d_pkg::*;
#(
  parameter int C      = 8,
  parameter int NPIX   = 16,   // D*H*W
  parameter int RSHIFT = 24
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  fm_t  in_data,
  output logic out_valid,
  input  logic out_ready,
  output fm_t  out_data,
  output logic vol_done     // pulses when a volume's statistics are stored
);
  localparam int CW = (C > 1) ? $clog2(C) : 1;
  localparam int PW = (NPIX > 1) ? $clog2(NPIX) : 1;
  localparam longint RECIP = ((longint'(1) <<< RSHIFT) + (longint'(NPIX) >>> 1)) / longint'(NPIX);

  acc_t acc  [C];          // sums of the volume being read
  acc_t prev [C];          // sums of the last complete volume
  logic [CW-1:0] ich, och;
  logic [PW-1:0] ipix;
  logic          emit;     // the vector for the current volume is being sent
  logic          armed;    // stored statistics not yet sent for a volume
  logic          last_in;
  logic signed [ACC_W+32-1:0] prod;

  assign last_in   = (ich == CW'(C-1)) && (ipix == PW'(NPIX-1));
  assign in_ready  = !(last_in && emit);
  assign out_valid = emit;
  assign prod      = (ACC_W+32)'(prev[och]) * (ACC_W+32)'(RECIP);
  assign out_data  = sat_fm(acc_t'(prod >>> RSHIFT));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < C; i++) begin
        acc[i]  <= '0;
        prev[i] <= '0;
      end
      ich      <= '0;
      ipix     <= '0;
      och      <= '0;
      emit     <= 1'b0;
      armed    <= 1'b1;
      vol_done <= 1'b0;
    end else begin
      vol_done <= 1'b0;
      if (emit && out_ready) begin
        if (och == CW'(C-1)) begin
          och  <= '0;
          emit <= 1'b0;
        end else begin
          och <= och + 1'b1;
        end
      end
      if (in_valid && in_ready) begin
        if (ich == '0 && ipix == '0 && armed) begin
          emit  <= 1'b1;
          armed <= 1'b0;
        end
        if (last_in) begin
          for (int i = 0; i < C; i++) begin
            prev[i] <= (i == C-1) ? acc[i] + acc_t'(in_data) : acc[i];
            acc[i]  <= '0;
          end
          armed    <= 1'b1;
          vol_done <= 1'b1;
          ich      <= '0;
          ipix     <= '0;
        end else begin
          acc[ich] <= acc[ich] + acc_t'(in_data);
          if (ich == CW'(C-1)) begin
            ich  <= '0;
            ipix <= ipix + 1'b1;
          end else begin
            ich <= ich + 1'b1;
          end
        end
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
