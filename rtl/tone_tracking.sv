// tone_tracking: running average power of every detector and optional retuning.
//
// For each detector sample the power p = (I^2 + Q^2) >> 16 updates a per-tone
// exponential running average P += (p - P) >>> avg_shift (the first sample after reset
// loads P directly). The time constant is 2^avg_shift detector samples: avg_shift = 4
// gives 1.6 ms at 10 kHz, inside the 2 ms tone tracking time. With track_en set the
// block writes the NCO a new frequency offset for the tone,
//     ofs = clamp16(((P - p_ref[tone]) * gain) >>> gain_shift),
// continuously, or rounded down to multiples of 2^step_log2 when discrete is set.
// p_ref is a per-tone table written by the host (e.g. from a frequency sweep). Every
// report_div-th detector frame (0: never) each tone's P and offset are sent as a
// REC_POWER record. Outputs are registered, one clock after the input sample.
//
// The running average and the optional continuous or stepped retuning follow the
// paper; the mapping from power to frequency offset is this design's choice, since
// the paper does not give one.
module tone_tracking
  import kid_pkg::*;
#(
  parameter int NTONES = 4000
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [3:0]        avg_shift,
  input  logic              track_en,
  input  logic              discrete,
  input  logic [3:0]        step_log2,
  input  logic signed [15:0] gain,
  input  logic [4:0]        gain_shift,
  input  logic [15:0]       report_div,
  input  logic              cfg_we,
  input  logic [TONE_W-1:0] cfg_tone,
  input  logic [31:0]       cfg_pref,
  input  logic              in_valid,
  input  logic              in_sof,
  input  det_sample_t       in_sample,
  output logic              trk_we,
  output logic [TONE_W-1:0] trk_tone,
  output logic signed [15:0] trk_ofs,
  output logic              rec_valid,
  output record_t           rec
);
  logic [31:0]       pavg [NTONES];
  logic [31:0]       pref [NTONES];
  logic [NTONES-1:0] seen;
  logic [15:0]       rcnt, rcur;

  always_comb begin
    if (in_sof) rcur = (rcnt + 16'd1 >= report_div) ? 16'd0 : rcnt + 16'd1;
    else        rcur = rcnt;
  end

  logic [TONE_W-1:0]  t;
  logic [47:0]        p_full;
  logic [31:0]        p, pold, pnew;
  logic signed [33:0] diff;
  logic signed [63:0] prod;
  logic signed [15:0] ofs;
  assign t = in_sample.tone;
  always_comb begin
    p_full = 48'(64'(in_sample.i) * 64'(in_sample.i)) + 48'(64'(in_sample.q) * 64'(in_sample.q));
    p      = p_full[47:16];   // I^2 + Q^2 < 2^47 always fits
    pold   = pavg[t];
    if (!seen[t]) pnew = p;
    else          pnew = 32'($signed({2'b00, pold}) + (($signed({2'b00, p}) - $signed({2'b00, pold})) >>> avg_shift));
    diff = $signed({2'b00, pnew}) - $signed({2'b00, pref[t]});
    prod = (64'(diff) * 64'(gain)) >>> gain_shift;
    if (prod > 64'sd32767)       ofs = 16'sd32767;
    else if (prod < -64'sd32768) ofs = -16'sd32768;
    else                         ofs = prod[15:0];
    if (discrete) ofs = ofs & ~((16'sd1 <<< step_log2) - 16'sd1);
  end

  always_ff @(posedge clk) begin
    if (in_valid) pavg[t] <= pnew;
    if (cfg_we)   pref[cfg_tone] <= cfg_pref;
    trk_tone <= t;
    trk_ofs  <= ofs;
    rec.typ  <= REC_POWER;
    rec.tone <= t;
    rec.data <= {pnew, ofs};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seen      <= '0;
      rcnt      <= '0;
      trk_we    <= 1'b0;
      rec_valid <= 1'b0;
    end else begin
      if (in_valid) begin
        seen[t] <= 1'b1;
        rcnt    <= rcur;
      end
      trk_we    <= in_valid && track_en;
      rec_valid <= in_valid && report_div != 16'd0 && rcur == 16'd0;
    end
  end
endmodule
