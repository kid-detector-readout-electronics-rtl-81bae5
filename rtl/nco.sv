// nco: per-tone numerically controlled oscillator shared by tone synthesis and
// digital downconversion.
//
// Every tone k has a bin number, a 32-bit fine frequency word, an amplitude and a
// phase accumulator. Tone frequency = (bin + freq/2^32) * fs / NFFT: the bin picks the
// IFFT/FFT channel and the accumulated phase, advanced by freq once per FFT frame,
// makes the tone rotate within that channel. The frequency in use is the host word
// plus a signed retune offset written by the tone tracker (offset << OFS_SHIFT).
//
// Port A (synthesis) returns the phasor of a tone and advances its phase by one frame.
// Port B (downconversion, bin selection) returns the bin and the current phasor of a
// tone without changing it: the same oscillator values that made the tone are reused
// to bring it back to baseband. That leaves a fixed phase from the loop through the
// converters and detectors; the host measures it and writes it per tone as cal_phase,
// which port B adds, so that each tone comes out of the DDC on the +I axis. Writing
// a tone clears its phase, retune offset and calibration. A tone never written since
// reset has amplitude 0. Both ports answer one clock after the request. A phase is turned into
// cos/sin by a 2^LUT_BITS entry table computed at elaboration.
//
// Reusing the NCO for both IFFT synthesis and DDC follows the paper; table sizes,
// widths, the offset scaling and the port timing are this design's choices.
module nco
  import kid_pkg::*;
#(
  parameter int NTONES    = 4000,
  parameter int LOG2N     = 12,
  parameter int LUT_BITS  = 10,
  parameter int OFS_SHIFT = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // host tone table write
  input  logic              cfg_we,
  input  logic [TONE_W-1:0] cfg_tone,
  input  logic [LOG2N-1:0]  cfg_bin,
  input  logic [31:0]       cfg_freq,
  input  logic [15:0]       cfg_amp,
  // downconversion phase calibration (top 16 bits of a phase)
  input  logic              cal_we,
  input  logic [TONE_W-1:0] cal_tone,
  input  logic [15:0]       cal_phase,
  // retune offset from tone tracking
  input  logic              trk_we,
  input  logic [TONE_W-1:0] trk_tone,
  input  logic signed [15:0] trk_ofs,
  // port A: synthesis, advances phase
  input  logic              a_req,
  input  logic [TONE_W-1:0] a_tone,
  output logic              a_valid,
  output logic [TONE_W-1:0] a_tone_o,
  output logic [LOG2N-1:0]  a_bin,
  output logic [15:0]       a_amp,
  output phasor_t           a_ph,
  // port B: downconversion, read only
  input  logic              b_req,
  input  logic [TONE_W-1:0] b_tone,
  output logic              b_valid,
  output logic [TONE_W-1:0] b_tone_o,
  output logic [LOG2N-1:0]  b_bin,
  output phasor_t           b_ph
);
  localparam int L = 1 << LUT_BITS;
  typedef logic [2*CW-1:0] lut_t [L];   // {cos, sin}

  function automatic lut_t mk_lut();
    lut_t r;
    for (int k = 0; k < L; k++) begin
      r[k] = {q_cos(k, L), q_sin(k, L)};
    end
    return r;
  endfunction
  localparam lut_t LUT = mk_lut();

  logic [LOG2N-1:0]  bin_mem  [NTONES];
  logic [31:0]       freq_mem [NTONES];
  logic [15:0]       amp_mem  [NTONES];
  logic signed [15:0] ofs_mem [NTONES];
  logic [31:0]       phase_mem[NTONES];
  logic [15:0]       cal_mem  [NTONES];
  logic [NTONES-1:0] en;        // tone configured since reset; others synthesise nothing

  logic [31:0] a_phase, a_freq_eff, b_phase;
  assign b_phase = phase_mem[b_tone] + {cal_mem[b_tone], 16'd0};
  assign a_phase    = phase_mem[a_tone];
  assign a_freq_eff = freq_mem[a_tone] + (32'(ofs_mem[a_tone]) <<< OFS_SHIFT);

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      bin_mem[cfg_tone]   <= cfg_bin;
      freq_mem[cfg_tone]  <= cfg_freq;
      amp_mem[cfg_tone]   <= cfg_amp;
      phase_mem[cfg_tone] <= '0;
      ofs_mem[cfg_tone]   <= '0;
      cal_mem[cfg_tone]   <= '0;
    end else begin
      if (a_req) phase_mem[a_tone] <= a_phase + a_freq_eff;
      if (trk_we) ofs_mem[trk_tone] <= trk_ofs;
    end
    if (cal_we) cal_mem[cal_tone] <= cal_phase;
  end

  always_ff @(posedge clk) begin
    a_tone_o <= a_tone;
    a_bin    <= bin_mem[a_tone];
    a_amp    <= en[a_tone] ? amp_mem[a_tone] : 16'd0;
    a_ph     <= LUT[a_phase[31 -: LUT_BITS]];
    b_tone_o <= b_tone;
    b_bin    <= bin_mem[b_tone];
    b_ph     <= LUT[b_phase[31 -: LUT_BITS]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_valid <= 1'b0;
      b_valid <= 1'b0;
      en      <= '0;
    end else begin
      a_valid <= a_req;
      b_valid <= b_req;
      if (cfg_we) en[cfg_tone] <= 1'b1;
    end
  end

  initial assert (NTONES <= (1 << TONE_W)) else $error("NTONES exceeds tone index width");
endmodule
