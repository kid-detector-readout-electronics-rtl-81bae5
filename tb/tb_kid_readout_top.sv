// tb_kid_readout_top: end-to-end test of the whole readout chain at a reduced size
// (64-point FFT, 8 tones), with the DAC output fed back to the ADC through
// kid_loopback_model (delay, detector pulses, noise).
//
// The test configures the window, the matched filter template and 8 tones, then
//   1. calibrates: reads every tone's detector I/Q, writes its phase as the tone's
//      calibration and checks that every tone then sits on the +I axis (tones_locked);
//   2. photon counting mode: injects pulses and checks one pulse record per tone per
//      pulse arrives over Ethernet with increasing timestamps; tone tracking must
//      write non-zero retune offsets while pulses lower the power (retunes) and power
//      reports must arrive for every tone (power_records);
//   3. discrete tone tracking: every retune offset must be a multiple of 16;
//   4. imaging mode: pulses must be infilled by the cosmic ray rejection (infills),
//      vector records must arrive (vector_records) and no pulse record may follow the
//      mode switch; the infilled vector averages must stay close to the baseline;
//   5. overflow: with the Ethernet byte enable held low the record queues must drop
//      and count records (drops), and traffic must resume afterwards.
// Every Ethernet frame is decoded (preamble, header, CRC-32) and its records sorted by
// type. The counts of each mechanism are printed. Ends with a TB_RESULT line; a
// watchdog stops it if it hangs. The test sequence is this testbench's own.
module tb_kid_readout_top;
  import kid_pkg::*;
  localparam int NT = 8, LOG2N = 6, N = 1 << LOG2N, TAPS = 4;
  localparam int AMP = 70;
  localparam int T = 2 * N;   // clocks per detector sample (dec_ratio 2)

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  kid_cfg_t cfg;
  logic nco_we = 0, cal_we = 0, coef_we = 0, tmpl_we = 0, pref_we = 0;
  logic [TONE_W-1:0] nco_tone = 0, cal_tone = 0, pref_tone = 0;
  logic [LOG2N-1:0] nco_bin = 0;
  logic [31:0] nco_freq = 0, pref_data = 0;
  logic [15:0] nco_amp = 0, cal_phase = 0;
  logic [LOG2N+1:0] coef_addr = 0;
  logic signed [CW-1:0] coef_data = 0, tmpl_data = 0;
  logic [2:0] tmpl_addr = 0;
  logic signed [DAC_W-1:0] dac_data;
  logic signed [ADC_W-1:0] adc_data;
  logic dac_valid, gmii_byte_en = 1, gmii_tx_en, pulse_trig = 0;
  logic [7:0] gmii_txd;
  logic [15:0] frames_sent;
  logic [15:0] drops [3];
  logic [TS_W-1:0] timestamp;

  kid_readout_top #(.NTONES(NT), .LOG2N(LOG2N), .TAPS(TAPS), .PULSE_DEPTH(16),
                    .POWER_DEPTH(16), .VECTOR_DEPTH(16), .MAX_RECS(8)) dut (.*);
  kid_loopback_model #(.DELAY(37), .DEPTH(12000), .TAU_SHIFT(9), .NOISE(2)) u_loop (
    .clk, .dac_data, .pulse_trig, .adc_data);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // ---------------- monitors inside the chain ----------------
  int last_i [NT], last_q [NT];
  int retunes = 0, disc_bad = 0, infills = 0, dac_clips = 0;
  bit dac_watch = 0;   // set once the filterbank delay lines hold only tone data
  always @(negedge clk) if (rst_n) begin
    if (dut.det_valid) begin
      last_i[dut.det.tone] = int'(dut.det.i);
      last_q[dut.det.tone] = int'(dut.det.q);
    end
    if (dut.trk_we && dut.trk_ofs != 0) retunes++;
    if (dut.trk_we && cfg.discrete && dut.trk_ofs[3:0] != 0) disc_bad++;
    if (dut.cr_valid && dut.cr_infill) infills++;
    if (dac_watch && dac_valid && (dac_data == 12'sd2047 || dac_data == -12'sd2048)) dac_clips++;
  end

  // ---------------- Ethernet receiver ----------------
  function automatic logic [31:0] crc32(input byte unsigned b [$]);
    logic [31:0] c = 32'hffffffff;
    foreach (b[i]) for (int k = 0; k < 8; k++) begin
      logic bit_in;
      bit_in = b[i][k] ^ c[0];
      c = c >> 1;
      if (bit_in) c = c ^ 32'hEDB88320;
    end
    return ~c;
  endfunction

  byte unsigned fb [$];
  int frames_ok = 0, frames_bad = 0;
  int n_pulse = 0, n_power = 0, n_vector = 0;
  int pulse_per_tone [NT], power_per_tone [NT], vector_per_tone [NT];
  int last_t0 [NT];
  int ts_bad = 0, vec_min_i = 1 << 30;
  logic prev_en = 0;
  always @(posedge clk) if (rst_n && gmii_byte_en) begin
    if (gmii_tx_en) fb.push_back(gmii_txd);
    else if (prev_en) decode_frame();
    prev_en = gmii_tx_en;
  end

  task automatic decode_frame();
    byte unsigned body [$];
    logic [31:0] fcs;
    bit ok;
    ok = fb.size() >= 72 && fb[7] == 8'hD5;
    if (ok) begin
      body = fb[8:fb.size()-5];
      fcs = {fb[fb.size()-1], fb[fb.size()-2], fb[fb.size()-3], fb[fb.size()-4]};
      ok = fcs == crc32(body) && {body[12], body[13]} == 16'h88B5;
    end
    if (!ok) frames_bad++;
    else begin
      frames_ok++;
      for (int p = 16; p + 8 <= body.size() && body[p][7:4] != 0; p += 8) begin
        record_t r;
        int t;
        r = {body[p], body[p+1], body[p+2], body[p+3], body[p+4], body[p+5], body[p+6], body[p+7]};
        t = int'(r.tone);
        if (t >= NT) begin frames_bad++; continue; end
        case (r.typ)
          REC_PULSE: begin
            n_pulse++; pulse_per_tone[t]++;
            if (int'(r.data[47:24]) <= last_t0[t]) ts_bad++;
            last_t0[t] = int'(r.data[47:24]);
          end
          REC_POWER: begin n_power++; power_per_tone[t]++; end
          REC_VECTOR: begin
            n_vector++; vector_per_tone[t]++;
            if (int'(signed'(r.data[47:24])) < vec_min_i) vec_min_i = int'(signed'(r.data[47:24]));
          end
          default: frames_bad++;
        endcase
      end
    end
    fb.delete();
  endtask

  task automatic pulse_now();
    @(negedge clk); pulse_trig = 1;
    @(negedge clk); pulse_trig = 0;
  endtask

  // ---------------- test sequence ----------------
  int a_min, locked = 0;
  int p_before, n_ph;
  initial begin
    foreach (last_i[k]) begin
      last_i[k] = 0; last_q[k] = 0; pulse_per_tone[k] = 0; power_per_tone[k] = 0;
      vector_per_tone[k] = 0; last_t0[k] = -1;
    end
    cfg = '0;
    cfg.mode = MODE_PHOTON; cfg.dec_ratio = 8'd2; cfg.dec_recip = 17'd32768;
    cfg.avg_shift = 4'd2; cfg.gain = 16'sd1; cfg.gain_shift = 5'd4; cfg.bl_shift = 4'd4;
    cfg.threshold = 24'sh7fffff; cfg.acc_log2 = 4'd2;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // window: sinc prototype times a Hann taper, Q1.14
    for (int a = 0; a < TAPS * N; a++) begin
      real x, w;
      x = (real'(a) + 0.5 - real'(TAPS * N) / 2.0) / real'(N);
      w = 0.5 - 0.5 * $cos(2.0 * 3.14159265358979 * (real'(a) + 0.5) / real'(TAPS * N));
      @(negedge clk); coef_we = 1; coef_addr = (LOG2N+2)'(a);
      coef_data = CW'($rtoi(16384.0 * w * ((x == 0.0) ? 1.0 : $sin(3.14159265358979 * x) / (3.14159265358979 * x))));
    end
    // matched filter template: a negative-going step, so the output rises for a dip in I
    for (int j = 0; j < 8; j++) begin
      @(negedge clk); coef_we = 0; tmpl_we = 1; tmpl_addr = 3'(j); tmpl_data = -16'sd2048;
    end
    // tones on bins 3, 5, ... 17, centred (no frequency offset)
    for (int k = 0; k < NT; k++) begin
      @(negedge clk); tmpl_we = 0; nco_we = 1; nco_tone = TONE_W'(k);
      nco_bin = LOG2N'(3 + 2 * k); nco_freq = 0; nco_amp = 16'(AMP);
    end
    @(negedge clk); nco_we = 0;

    // 1. calibration
    repeat (60 * T) @(posedge clk);
    dac_watch = 1;
    for (int k = 0; k < NT; k++) begin
      real th;
      th = $atan2(real'(last_q[k]), real'(last_i[k]));
      @(negedge clk); cal_we = 1; cal_tone = TONE_W'(k);
      cal_phase = 16'($rtoi(th / (2.0 * 3.14159265358979) * 65536.0 + (th < 0 ? 65536.0 : 0.0)));
    end
    @(negedge clk); cal_we = 0;
    repeat (10 * T) @(posedge clk);
    a_min = 1 << 30;
    for (int k = 0; k < NT; k++) begin
      int mag;
      mag = last_i[k];
      if (last_i[k] > 1000 && 20 * (last_q[k] < 0 ? -last_q[k] : last_q[k]) < last_i[k]) locked++;
      chk(last_i[k] > 1000 && 20 * (last_q[k] < 0 ? -last_q[k] : last_q[k]) < last_i[k],
          $sformatf("tone %0d not on +I after calibration: %0d %0d", k, last_i[k], last_q[k]));
      if (mag < a_min) a_min = mag;
      @(negedge clk); pref_we = 1; pref_tone = TONE_W'(k);
      pref_data = 32'((longint'(last_i[k]) * last_i[k] + longint'(last_q[k]) * last_q[k]) >>> 16);
    end
    @(negedge clk); pref_we = 0;
    $display("calibrated: smallest tone amplitude %0d, I/Q of tone 0 %0d %0d", a_min, last_i[0], last_q[0]);
    repeat (100 * T) @(posedge clk);

    // 2. photon counting with tone tracking and power reports
    cfg.threshold = 24'(a_min / 16); cfg.track_en = 1; cfg.report_div = 16'd4;
    repeat (10 * T) @(posedge clk);
    chk(n_pulse == 0, "pulse record without a pulse");
    for (int p = 0; p < 4; p++) begin
      pulse_now();
      repeat (40 * T) @(posedge clk);
    end
    // 3. discrete retuning
    cfg.discrete = 1; cfg.step_log2 = 4'd4;
    for (int p = 0; p < 2; p++) begin
      pulse_now();
      repeat (40 * T) @(posedge clk);
    end
    n_ph = n_pulse;
    chk(n_pulse == 6 * NT, $sformatf("pulse records %0d, want %0d", n_pulse, 6 * NT));
    foreach (pulse_per_tone[k]) chk(pulse_per_tone[k] == 6, $sformatf("tone %0d pulses %0d", k, pulse_per_tone[k]));
    foreach (power_per_tone[k]) chk(power_per_tone[k] > 20, $sformatf("tone %0d power reports %0d", k, power_per_tone[k]));
    chk(ts_bad == 0, "pulse timestamps not increasing");
    chk(retunes > 0, "no retune offsets written");
    chk(disc_bad == 0, $sformatf("%0d retunes off the discrete grid", disc_bad));
    chk(n_vector == 0, "vector record in photon counting mode");

    // 4. imaging mode
    cfg.mode = MODE_IMAGING; cfg.discrete = 0;
    repeat (10 * T) @(posedge clk);
    p_before = n_pulse;
    for (int p = 0; p < 3; p++) begin
      pulse_now();
      repeat (40 * T) @(posedge clk);
    end
    chk(n_pulse == p_before, "pulse record in imaging mode");
    chk(infills > 0, "no infill");
    foreach (vector_per_tone[k]) chk(vector_per_tone[k] > 20, $sformatf("tone %0d vectors %0d", k, vector_per_tone[k]));
    chk(vec_min_i > a_min * 3 / 4, $sformatf("infilled vector average dips to %0d (tone amplitude %0d)", vec_min_i, a_min));

    // 5. overflow: stall the Ethernet link
    cfg.report_div = 16'd1;
    @(negedge clk); gmii_byte_en = 0;
    repeat (20 * T) @(posedge clk);
    @(negedge clk); gmii_byte_en = 1;
    chk(drops[1] > 0 && drops[2] > 0, $sformatf("drops %0d %0d %0d", drops[0], drops[1], drops[2]));
    p_before = frames_ok;
    cfg.report_div = 16'd4;
    repeat (20 * T) @(posedge clk);
    chk(frames_ok > p_before, "no frames after the stall");

    // let the link go idle, then compare frame counts
    cfg.report_div = 16'd0; cfg.mode = MODE_PHOTON; cfg.threshold = 24'sh7fffff;
    repeat (3 * T) @(posedge clk);
    cfg.acc_log2 = 4'd0;
    wait (!gmii_tx_en && dut.q_valid == 0);
    repeat (100) @(posedge clk);
    chk(frames_bad == 0, $sformatf("%0d bad frames", frames_bad));
    chk(int'(frames_sent) == frames_ok, $sformatf("frames_sent %0d decoded %0d", frames_sent, frames_ok));
    chk(dac_clips == 0, $sformatf("%0d DAC clips", dac_clips));
    $display("MECHANISMS tones_locked=%0d pulse_records=%0d power_records=%0d retunes=%0d discrete_retunes_off_grid=%0d infills=%0d vector_records=%0d drops=%0d/%0d/%0d frames=%0d bad_frames=%0d",
             locked, n_ph, n_power, retunes, disc_bad, infills, n_vector,
             drops[0], drops[1], drops[2], frames_ok, frames_bad);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
