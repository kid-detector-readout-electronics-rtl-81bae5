// kid_readout_top: the FPGA signal chain of a frequency-multiplexed readout for
// kinetic inductance detector (KID) arrays, from tone synthesis to Ethernet records.
//
// Transmit: the NCO holds one oscillator per tone. ifft_frame_builder puts every
// tone's phasor into its bin, an inverse FFT and the synthesis WOLA filterbank turn the
// frames into the probe comb (frame_reorder restores time order between them), and its
// real part, saturated to 12 bits, is the DAC
// sample (dac_data, one per clock).
// Receive: the 12-bit ADC sample (adc_data, one per clock) passes the analysis WOLA
// filterbank (same window coefficients) and the FFT; bin_select takes each tone's bin,
// ddc removes the tone's NCO phasor and decimates to the detector rate. The detector
// stream then feeds
//   - tone_tracking: running average power, optional retune of the NCO, power records;
//   - pulse_detector (baseline removal, matched filter, threshold), which drives
//       - pulse_tracking: timestamped pulse records (photon counting mode), and
//       - cosmic_ray_rejection: moving-average infill of pulses, then
//         vector_accumulate: averaged, downsampled timestream records (imaging mode).
// record_mux queues the records and gbe_mac_tx sends them as Ethernet frames.
// cfg.mode selects which science records are sent: pulse records in photon counting
// mode, vector records in imaging mode; power records whenever reports are enabled.
//
// Host tables are written through the nco_*, cal_*, coef_*, tmpl_* and pref_* ports. Every
// block runs at one converter sample per clock; a flight design would process several
// samples per clock at a lower clock rate. Block structure and sizes (4096-point FFT,
// up to 4000 tones, 12-bit converters) follow the paper; the rest is this design's.
module kid_readout_top
  import kid_pkg::*;
#(
  parameter int NTONES       = 4000,
  parameter int LOG2N        = 12,
  parameter int TAPS         = 4,
  parameter int LUT_BITS     = 10,
  parameter int MF_TAPS      = 8,
  parameter int MA_LEN       = 8,
  parameter int PULSE_DEPTH  = 64,
  parameter int POWER_DEPTH  = 4096,
  parameter int VECTOR_DEPTH = 4096,
  parameter int MAX_RECS     = 32,
  parameter int ADC_SHIFT    = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  kid_cfg_t             cfg,
  // tone table
  input  logic                 nco_we,
  input  logic [TONE_W-1:0]    nco_tone,
  input  logic [LOG2N-1:0]     nco_bin,
  input  logic [31:0]          nco_freq,
  input  logic [15:0]          nco_amp,
  // downconversion phase calibration
  input  logic                 cal_we,
  input  logic [TONE_W-1:0]    cal_tone,
  input  logic [15:0]          cal_phase,
  // filterbank window
  input  logic                 coef_we,
  input  logic [LOG2N+$clog2(TAPS)-1:0] coef_addr,
  input  logic signed [CW-1:0] coef_data,
  // matched filter template
  input  logic                 tmpl_we,
  input  logic [$clog2(MF_TAPS)-1:0] tmpl_addr,
  input  logic signed [CW-1:0] tmpl_data,
  // tone tracking reference power
  input  logic                 pref_we,
  input  logic [TONE_W-1:0]    pref_tone,
  input  logic [31:0]          pref_data,
  // converters
  output logic signed [DAC_W-1:0] dac_data,
  output logic                 dac_valid,
  input  logic signed [ADC_W-1:0] adc_data,
  // Ethernet (GMII-style byte stream)
  input  logic                 gmii_byte_en,
  output logic [7:0]           gmii_txd,
  output logic                 gmii_tx_en,
  // status
  output logic [15:0]          frames_sent,
  output logic [15:0]          drops [3],
  output logic [TS_W-1:0]      timestamp
);

  // ---------------- NCO ----------------
  logic              a_req, a_valid, b_req, b_valid;
  logic [TONE_W-1:0] a_tone, a_tone_o, b_tone, b_tone_o;
  logic [LOG2N-1:0]  a_bin, b_bin;
  logic [15:0]       a_amp;
  phasor_t           a_ph, b_ph;
  logic              trk_we;
  logic [TONE_W-1:0] trk_tone;
  logic signed [15:0] trk_ofs;

  nco #(.NTONES(NTONES), .LOG2N(LOG2N), .LUT_BITS(LUT_BITS)) u_nco (
    .clk, .rst_n,
    .cfg_we(nco_we), .cfg_tone(nco_tone), .cfg_bin(nco_bin), .cfg_freq(nco_freq), .cfg_amp(nco_amp),
    .cal_we, .cal_tone, .cal_phase,
    .trk_we, .trk_tone, .trk_ofs,
    .a_req, .a_tone, .a_valid, .a_tone_o, .a_bin, .a_amp, .a_ph,
    .b_req, .b_tone, .b_valid, .b_tone_o, .b_bin, .b_ph
  );

  // ---------------- transmit ----------------
  logic  fb_valid, fb_sof;
  cplx_t fb_data;
  ifft_frame_builder #(.NTONES(NTONES), .LOG2N(LOG2N)) u_fb (
    .clk, .rst_n,
    .nco_req(a_req), .nco_tone(a_tone), .nco_valid(a_valid), .nco_bin(a_bin),
    .nco_amp(a_amp), .nco_ph(a_ph),
    .out_valid(fb_valid), .out_sof(fb_sof), .out_data(fb_data)
  );

  logic             ifft_valid, ifft_sof;
  logic [LOG2N-1:0] ifft_bin;
  cplx_t            ifft_data;
  fft_sdf #(.LOG2N(LOG2N), .INVERSE(1'b1)) u_ifft (
    .clk, .rst_n, .in_valid(fb_valid), .in_data(fb_data),
    .out_valid(ifft_valid), .out_sof(ifft_sof), .out_bin(ifft_bin), .out_data(ifft_data)
  );

  logic [LOG2N-1:0]     c_addr0, c_addr1;
  logic signed [CW-1:0] c_data0 [TAPS];
  logic signed [CW-1:0] c_data1 [TAPS];
  pfb_coeff_mem #(.LOG2N(LOG2N), .TAPS(TAPS)) u_coef (
    .clk, .we(coef_we), .waddr(coef_addr), .wdata(coef_data),
    .raddr0(c_addr0), .rdata0(c_data0), .raddr1(c_addr1), .rdata1(c_data1)
  );

  // The IFFT emits bit-reversed order; the synthesis window and the DAC need time
  // order (only the real part goes on, since the DAC is real).
  logic                 ro_valid, ro_sof;
  logic signed [DW-1:0] ro_data;
  frame_reorder #(.LOG2N(LOG2N)) u_ro (
    .clk, .rst_n, .in_valid(ifft_valid), .in_sof(ifft_sof), .in_idx(ifft_bin),
    .in_data(ifft_data.re), .out_valid(ro_valid), .out_sof(ro_sof), .out_data(ro_data)
  );

  logic                 syn_valid, syn_sof;
  logic signed [DW-1:0] syn_data;
  wola_pfb #(.LOG2N(LOG2N), .TAPS(TAPS), .REVERSE(1'b0)) u_syn (
    .clk, .rst_n, .in_valid(ro_valid), .in_sof(ro_sof), .in_data(ro_data),
    .coef_addr(c_addr1), .coef(c_data1),
    .out_valid(syn_valid), .out_sof(syn_sof), .out_data(syn_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dac_data  <= '0;
      dac_valid <= 1'b0;
    end else begin
      dac_valid <= syn_valid;
      if (!syn_valid)             dac_data <= '0;
      else if (syn_data > 24'sd2047)  dac_data <= 12'sd2047;
      else if (syn_data < -24'sd2048) dac_data <= -12'sd2048;
      else                        dac_data <= syn_data[DAC_W-1:0];
    end
  end

  // ---------------- receive ----------------
  logic [LOG2N-1:0] adc_n;
  logic             adc_run;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      adc_n   <= '0;
      adc_run <= 1'b0;
    end else begin
      adc_run <= 1'b1;
      if (adc_run) adc_n <= adc_n + 1'b1;
    end
  end

  logic                 ana_valid, ana_sof;
  logic signed [DW-1:0] ana_data;
  wola_pfb #(.LOG2N(LOG2N), .TAPS(TAPS), .REVERSE(1'b1)) u_ana (
    .clk, .rst_n, .in_valid(adc_run), .in_sof(adc_run && adc_n == '0),
    .in_data(DW'(adc_data) <<< ADC_SHIFT),
    .coef_addr(c_addr0), .coef(c_data0),
    .out_valid(ana_valid), .out_sof(ana_sof), .out_data(ana_data)
  );

  logic             fft_valid, fft_sof;
  logic [LOG2N-1:0] fft_bin;
  cplx_t            fft_data;
  fft_sdf #(.LOG2N(LOG2N), .INVERSE(1'b0)) u_fft (
    .clk, .rst_n, .in_valid(ana_valid), .in_data('{re: ana_data, im: '0}),
    .out_valid(fft_valid), .out_sof(fft_sof), .out_bin(fft_bin), .out_data(fft_data)
  );

  logic              bs_valid, bs_sof;
  logic [TONE_W-1:0] bs_tone;
  cplx_t             bs_data;
  phasor_t           bs_ph;
  bin_select #(.NTONES(NTONES), .LOG2N(LOG2N)) u_bs (
    .clk, .rst_n, .in_valid(fft_valid), .in_sof(fft_sof), .in_bin(fft_bin), .in_data(fft_data),
    .nco_req(b_req), .nco_tone(b_tone), .nco_valid(b_valid), .nco_tone_o(b_tone_o),
    .nco_bin(b_bin), .nco_ph(b_ph),
    .out_valid(bs_valid), .out_sof(bs_sof), .out_tone(bs_tone), .out_data(bs_data), .out_ph(bs_ph)
  );

  logic        det_valid, det_sof;
  det_sample_t det;
  ddc #(.NTONES(NTONES)) u_ddc (
    .clk, .rst_n, .dec_ratio(cfg.dec_ratio), .dec_recip(cfg.dec_recip),
    .in_valid(bs_valid), .in_sof(bs_sof), .in_tone(bs_tone), .in_data(bs_data), .in_ph(bs_ph),
    .out_valid(det_valid), .out_sof(det_sof), .out_sample(det)
  );

  // ---------------- detector processing ----------------
  logic    pow_valid;
  record_t pow_rec;
  tone_tracking #(.NTONES(NTONES)) u_trk (
    .clk, .rst_n, .avg_shift(cfg.avg_shift), .track_en(cfg.track_en), .discrete(cfg.discrete),
    .step_log2(cfg.step_log2), .gain(cfg.gain), .gain_shift(cfg.gain_shift),
    .report_div(cfg.report_div), .cfg_we(pref_we), .cfg_tone(pref_tone), .cfg_pref(pref_data),
    .in_valid(det_valid), .in_sof(det_sof), .in_sample(det),
    .trk_we, .trk_tone, .trk_ofs, .rec_valid(pow_valid), .rec(pow_rec)
  );

  logic                 pd_valid, pd_sof, pd_in_pulse, pd_start, pd_end;
  det_sample_t          pd_sample;
  logic signed [DW-1:0] pd_y, pd_mf;
  pulse_detector #(.NTONES(NTONES), .MF_TAPS(MF_TAPS)) u_pd (
    .clk, .rst_n, .use_q(cfg.use_q), .bl_shift(cfg.bl_shift), .threshold(cfg.threshold),
    .tmpl_we, .tmpl_addr, .tmpl_data,
    .in_valid(det_valid), .in_sof(det_sof), .in_sample(det),
    .out_valid(pd_valid), .out_sof(pd_sof), .out_sample(pd_sample), .out_y(pd_y), .out_mf(pd_mf),
    .out_in_pulse(pd_in_pulse), .out_start(pd_start), .out_end(pd_end)
  );

  logic    pt_valid;
  record_t pt_rec;
  pulse_tracking #(.NTONES(NTONES)) u_pt (
    .clk, .rst_n, .in_valid(pd_valid), .in_sof(pd_sof), .in_tone(pd_sample.tone), .in_mf(pd_mf),
    .in_start(pd_start), .in_in_pulse(pd_in_pulse), .in_end(pd_end),
    .rec_valid(pt_valid), .rec(pt_rec), .now(timestamp)
  );

  logic        cr_valid, cr_sof, cr_infill;
  det_sample_t cr_sample;
  cosmic_ray_rejection #(.NTONES(NTONES), .MA_LEN(MA_LEN)) u_cr (
    .clk, .rst_n, .in_valid(pd_valid), .in_sof(pd_sof), .in_sample(pd_sample),
    .in_in_pulse(pd_in_pulse),
    .out_valid(cr_valid), .out_sof(cr_sof), .out_sample(cr_sample), .out_infill(cr_infill)
  );

  logic    va_valid;
  record_t va_rec;
  vector_accumulate #(.NTONES(NTONES)) u_va (
    .clk, .rst_n, .acc_log2(cfg.acc_log2),
    .in_valid(cr_valid), .in_sof(cr_sof), .in_sample(cr_sample),
    .rec_valid(va_valid), .rec(va_rec)
  );

  // ---------------- Ethernet ----------------
  logic    q_valid, q_ready;
  record_t q_rec;
  record_mux #(.PULSE_DEPTH(PULSE_DEPTH), .POWER_DEPTH(POWER_DEPTH), .VECTOR_DEPTH(VECTOR_DEPTH)) u_mux (
    .clk, .rst_n,
    .pulse_valid(pt_valid && cfg.mode == MODE_PHOTON), .pulse_rec(pt_rec),
    .power_valid(pow_valid), .power_rec(pow_rec),
    .vector_valid(va_valid && cfg.mode == MODE_IMAGING), .vector_rec(va_rec),
    .out_valid(q_valid), .out_rec(q_rec), .out_ready(q_ready), .drops
  );

  gbe_mac_tx #(.MAX_RECS(MAX_RECS)) u_mac (
    .clk, .rst_n, .byte_en(gmii_byte_en), .in_valid(q_valid), .in_rec(q_rec), .in_ready(q_ready),
    .txd(gmii_txd), .tx_en(gmii_tx_en), .frames_sent
  );
endmodule
