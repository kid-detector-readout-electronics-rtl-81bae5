// kid_pkg: shared widths, types and table functions of the KID readout signal chain.
//
// The chain streams one converter sample per clock through a WOLA filterbank and
// FFT, selects one bin per tone, downconverts it with the same NCO phasor that
// synthesised the tone, and then processes every detector as a time-multiplexed
// stream of I/Q samples. The 12-bit converter width follows the converters named
// for the system; every other width here is a choice of this design.
package kid_pkg;

  localparam int ADC_W = 12;   // ADC sample width (12-bit converters)
  localparam int DAC_W = 12;   // DAC sample width
  localparam int DW    = 24;   // width of each real or complex component inside the chain
  localparam int CW    = 16;   // coefficient, twiddle and phasor width
  localparam int CFRAC = 14;   // fractional bits of CW values: 1.0 = 16384
  localparam int TONE_W = 12;  // tone index width (up to 4096 tones)
  localparam int TS_W   = 24;  // pulse timestamp width, in detector samples

  typedef struct packed {
    logic signed [DW-1:0] re;
    logic signed [DW-1:0] im;
  } cplx_t;

  typedef struct packed {
    logic signed [CW-1:0] c;   // cosine, Q1.14
    logic signed [CW-1:0] s;   // sine, Q1.14
  } phasor_t;

  // One downconverted detector sample.
  typedef struct packed {
    logic [TONE_W-1:0]   tone;
    logic signed [DW-1:0] i;
    logic signed [DW-1:0] q;
  } det_sample_t;

  // Readout configuration: photon counting ends at pulse tracking; imaging sends
  // the infilled, averaged timestream.
  typedef enum logic {MODE_PHOTON = 1'b0, MODE_IMAGING = 1'b1} readout_mode_e;

  typedef enum logic [3:0] {
    REC_NONE   = 4'd0,
    REC_PULSE  = 4'd1,   // data = {timestamp[23:0], peak[15:0], width[7:0]}
    REC_POWER  = 4'd2,   // data = {average power[31:0], tone offset[15:0]}
    REC_VECTOR = 4'd3    // data = {I average[23:0], Q average[23:0]}
  } rec_type_e;

  // 64-bit science record carried in the Ethernet payload.
  typedef struct packed {
    rec_type_e           typ;
    logic [TONE_W-1:0]   tone;
    logic [47:0]         data;
  } record_t;

  // Run-time settings of the signal chain (held by the host's registers).
  typedef struct packed {
    readout_mode_e        mode;        // photon counting or imaging
    logic [7:0]           dec_ratio;   // FFT frames per detector sample
    logic [16:0]          dec_recip;   // round(65536 / dec_ratio)
    logic [3:0]           avg_shift;   // tone tracking running average: 2^avg_shift samples
    logic                 track_en;    // tone tracking writes retune offsets to the NCO
    logic                 discrete;    // retune in steps of 2^step_log2 instead of continuously
    logic [3:0]           step_log2;
    logic signed [15:0]   gain;        // retune gain, offset per unit of power error
    logic [4:0]           gain_shift;
    logic [15:0]          report_div;  // power report every report_div detector frames, 0: off
    logic                 use_q;       // pulse signal: Q (1) or I (0) component
    logic [3:0]           bl_shift;    // baseline removal time constant 2^bl_shift samples
    logic signed [DW-1:0] threshold;   // trigger threshold on the matched filter output
    logic [3:0]           acc_log2;    // vector accumulate: average 2^acc_log2 samples
  } kid_cfg_t;

  // Saturate a wide signed value to DW bits.
  function automatic logic signed [DW-1:0] sat_dw(input logic signed [63:0] v);
    if (v > 64'sd8388607)       return 24'sh7fffff;
    else if (v < -64'sd8388608) return 24'sh800000;
    else                        return v[DW-1:0];
  endfunction

  // Q1.14 cosine and sine of 2*pi*k/n, rounded.
  function automatic logic signed [CW-1:0] q_cos(input int k, input int n);
    real a;
    a = $cos(6.283185307179586 * real'(k) / real'(n)) * 16384.0;
    return CW'($rtoi(a < 0.0 ? a - 0.5 : a + 0.5));
  endfunction

  function automatic logic signed [CW-1:0] q_sin(input int k, input int n);
    real a;
    a = $sin(6.283185307179586 * real'(k) / real'(n)) * 16384.0;
    return CW'($rtoi(a < 0.0 ? a - 0.5 : a + 0.5));
  endfunction

endpackage
