// ddc: digital downconversion of every selected bin to a baseband detector sample.
//
// Each input (one tone of one FFT frame) is multiplied by the complex conjugate of the
// NCO phasor that was used to synthesise that tone, which removes the tone's fine
// frequency offset and leaves a fixed phase. The products of each tone are then summed
// over dec_ratio consecutive frames in a per-tone accumulator and the sum is scaled by
// dec_recip / 2^16 (the host sets dec_recip = round(65536 / dec_ratio)), giving one
// detector sample per tone every dec_ratio frames. With the frame rate fs/NFFT of 1 MHz
// assumed for fs = 4.096 GS/s, dec_ratio = 100 gives the 10 kHz detector rate.
// Samples leave 2 clocks after the last contributing input; out_sof marks tone 0's.
//
// Downconverting with the reused NCO signals and the 10 kHz detector rate follow the
// paper; the accumulate-and-dump decimator and the widths are this design's choices.
module ddc
  import kid_pkg::*;
#(
  parameter int NTONES = 4000
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [7:0]        dec_ratio,   // frames per detector sample, 1..255
  input  logic [16:0]       dec_recip,   // 65536 / dec_ratio
  input  logic              in_valid,
  input  logic              in_sof,
  input  logic [TONE_W-1:0] in_tone,
  input  cplx_t             in_data,
  input  phasor_t           in_ph,
  output logic              out_valid,
  output logic              out_sof,
  output det_sample_t       out_sample
);
  localparam int AW = DW + 8;

  logic signed [AW-1:0] acc_i [NTONES];
  logic signed [AW-1:0] acc_q [NTONES];
  logic [7:0] fcnt, fcur;
  logic       started;

  always_comb begin
    if (in_sof) fcur = (!started || fcnt + 8'd1 >= dec_ratio) ? 8'd0 : fcnt + 8'd1;
    else        fcur = fcnt;
  end

  logic signed [DW-1:0] mix_i, mix_q;
  always_comb begin
    mix_i = sat_dw((64'(in_data.re) * 64'(in_ph.c) + 64'(in_data.im) * 64'(in_ph.s)) >>> CFRAC);
    mix_q = sat_dw((64'(in_data.im) * 64'(in_ph.c) - 64'(in_data.re) * 64'(in_ph.s)) >>> CFRAC);
  end

  logic signed [AW-1:0] sum_i, sum_q;
  assign sum_i = (fcur == 8'd0) ? AW'(mix_i) : acc_i[in_tone] + AW'(mix_i);
  assign sum_q = (fcur == 8'd0) ? AW'(mix_q) : acc_q[in_tone] + AW'(mix_q);

  logic act;
  assign act = in_valid && (started || in_sof);

  always_ff @(posedge clk) begin
    if (act) begin
      acc_i[in_tone] <= sum_i;
      acc_q[in_tone] <= sum_q;
    end
  end

  // stage 1: completed sums; stage 2: scaled output
  logic                 d_valid, d_sof;
  logic [TONE_W-1:0]    d_tone;
  logic signed [AW-1:0] d_i, d_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fcnt      <= '0;
      started   <= 1'b0;
      d_valid   <= 1'b0;
      d_sof     <= 1'b0;
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
    end else begin
      if (in_valid && in_sof) started <= 1'b1;
      if (act) fcnt <= fcur;
      d_valid   <= act && (fcur + 8'd1 >= dec_ratio);
      d_sof     <= act && in_sof && (fcur + 8'd1 >= dec_ratio);
      out_valid <= d_valid;
      out_sof   <= d_sof;
    end
  end

  always_ff @(posedge clk) begin
    d_tone <= in_tone;
    d_i    <= sum_i;
    d_q    <= sum_q;
    out_sample.tone <= d_tone;
    out_sample.i    <= sat_dw((64'(d_i) * 64'(signed'({1'b0, dec_recip}))) >>> 16);
    out_sample.q    <= sat_dw((64'(d_q) * 64'(signed'({1'b0, dec_recip}))) >>> 16);
  end
endmodule
