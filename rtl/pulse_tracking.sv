// pulse_tracking: turns triggered pulses into timestamped event records (the science
// output of photon counting).
//
// It follows the pulse_detector stream. A detector-sample counter, advanced at every
// frame start (in_sof), is the time base. When a tone's pulse starts, the block stores
// the time and the matched filter value; while it lasts it keeps the largest matched
// filter value and counts samples; when it ends it emits a REC_PULSE record
//     data = {start time[23:0], peak m >>> 8 [15:0], width in samples[7:0]}
// (width saturates at 255), one clock after the end strobe.
//
// Detecting, characterising and timestamping each pulse follows the paper; which
// characteristics are kept (peak and width) and the record format are this design's
// choices.
module pulse_tracking
  import kid_pkg::*;
#(
  parameter int NTONES = 4000
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_sof,
  input  logic [TONE_W-1:0] in_tone,
  input  logic signed [DW-1:0] in_mf,
  input  logic              in_start,
  input  logic              in_in_pulse,
  input  logic              in_end,
  output logic              rec_valid,
  output record_t           rec,
  output logic [TS_W-1:0]   now
);
  logic [TS_W-1:0]      t0   [NTONES];
  logic signed [DW-1:0] peak [NTONES];
  logic [7:0]           wid  [NTONES];
  logic [TS_W-1:0]      tcnt, tcur;

  assign tcur = in_sof ? tcnt + 1'b1 : tcnt;
  assign now  = tcnt;

  always_ff @(posedge clk) begin
    if (in_valid && in_start) begin
      t0[in_tone]   <= tcur;
      peak[in_tone] <= in_mf;
      wid[in_tone]  <= 8'd1;
    end else if (in_valid && in_in_pulse) begin
      if (in_mf > peak[in_tone]) peak[in_tone] <= in_mf;
      if (wid[in_tone] != 8'hff) wid[in_tone] <= wid[in_tone] + 8'd1;
    end
    rec.typ  <= REC_PULSE;
    rec.tone <= in_tone;
    rec.data <= {t0[in_tone], 16'(peak[in_tone] >>> 8), wid[in_tone]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tcnt      <= '0;
      rec_valid <= 1'b0;
    end else begin
      if (in_valid) tcnt <= tcur;
      rec_valid <= in_valid && in_end;
    end
  end
endmodule
