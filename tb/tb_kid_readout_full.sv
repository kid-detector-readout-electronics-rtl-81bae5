// tb_kid_readout_full: the readout chain at its full size (no parameter overrides:
// 4096-point FFT, 4000 tone slots, 4-tap filterbank), closed through
// kid_loopback_model.
//
// 33 tones are configured across the table (tone slots 0, 125, 250, ... 3875 and the
// last slot, 3999), each on its own FFT bin 128 bins apart, with an amplitude that
// keeps the summed comb inside the 12-bit DAC range. The detector rate is one sample
// per FFT frame (dec_ratio 1). The test
//   1. checks every configured tone gives a strong, even detector output (unconfigured
//      slots read whatever bin their table entry holds, so they are only reported), and
//      that the DAC never clips once the filterbank is full;
//   2. calibrates each tone's phase and checks every tone then sits on the +I axis;
//   3. enables power reports every 16th detector sample (reports of all 4000 slots at
//      every sample would exceed the byte rate of the link) and checks that Ethernet frames with good CRC-32 carry a
//      power record for every configured tone, and that frames_sent agrees.
// Ends with a TB_RESULT line; a watchdog stops it if it hangs. The sequence is this
// testbench's own.
module tb_kid_readout_full;
  import kid_pkg::*;
  localparam int N = 4096, NSLOT = 4000, TAPS = 4, NT = 33;
  localparam int AMP = 1400;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  kid_cfg_t cfg;
  logic nco_we = 0, cal_we = 0, coef_we = 0, tmpl_we = 0, pref_we = 0;
  logic [TONE_W-1:0] nco_tone = 0, cal_tone = 0, pref_tone = 0;
  logic [11:0] nco_bin = 0;
  logic [31:0] nco_freq = 0, pref_data = 0;
  logic [15:0] nco_amp = 0, cal_phase = 0;
  logic [13:0] coef_addr = 0;
  logic signed [CW-1:0] coef_data = 0, tmpl_data = 0;
  logic [2:0] tmpl_addr = 0;
  logic signed [DAC_W-1:0] dac_data;
  logic signed [ADC_W-1:0] adc_data;
  logic dac_valid, gmii_byte_en = 1, gmii_tx_en, pulse_trig = 0;
  logic [7:0] gmii_txd;
  logic [15:0] frames_sent;
  logic [15:0] drops [3];
  logic [TS_W-1:0] timestamp;

  kid_readout_top dut (.*);
  kid_loopback_model #(.DELAY(37), .DEPTH(0), .TAU_SHIFT(9), .NOISE(2)) u_loop (
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

  function automatic int slot(input int k);
    return (k == NT - 1) ? NSLOT - 1 : 125 * k;
  endfunction

  int last_i [NSLOT], last_q [NSLOT];
  int dac_clips = 0;
  bit dac_watch = 0;
  always @(negedge clk) if (rst_n) begin
    if (dut.det_valid) begin
      last_i[dut.det.tone] = int'(dut.det.i);
      last_q[dut.det.tone] = int'(dut.det.q);
    end
    if (dac_watch && dac_valid && (dac_data == 12'sd2047 || dac_data == -12'sd2048)) dac_clips++;
  end

  // Ethernet receiver: counts good frames and power records per tone slot
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
  int frames_ok = 0, frames_bad = 0, n_power = 0;
  int power_per_slot [NSLOT];
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
      ok = fcs == crc32(body);
    end
    if (!ok) frames_bad++;
    else begin
      frames_ok++;
      for (int p = 16; p + 8 <= body.size() && body[p][7:4] != 0; p += 8) begin
        record_t r;
        r = {body[p], body[p+1], body[p+2], body[p+3], body[p+4], body[p+5], body[p+6], body[p+7]};
        if (r.typ == REC_POWER && int'(r.tone) < NSLOT) begin
          n_power++; power_per_slot[r.tone]++;
        end
      end
    end
    fb.delete();
  endtask

  int a_min, a_max, leak_max, locked;
  initial begin
    foreach (last_i[k]) begin last_i[k] = 0; last_q[k] = 0; power_per_slot[k] = 0; end
    cfg = '0;
    cfg.mode = MODE_PHOTON; cfg.dec_ratio = 8'd1; cfg.dec_recip = 17'd65536;
    cfg.avg_shift = 4'd2; cfg.gain = 16'sd1; cfg.gain_shift = 5'd4; cfg.bl_shift = 4'd4;
    cfg.threshold = 24'sh7fffff; cfg.acc_log2 = 4'd2;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < TAPS * N; a++) begin
      real x, w;
      x = (real'(a) + 0.5 - real'(TAPS * N) / 2.0) / real'(N);
      w = 0.5 - 0.5 * $cos(2.0 * 3.14159265358979 * (real'(a) + 0.5) / real'(TAPS * N));
      @(negedge clk); coef_we = 1; coef_addr = 14'(a);
      coef_data = CW'($rtoi(16384.0 * w * ((x == 0.0) ? 1.0 : $sin(3.14159265358979 * x) / (3.14159265358979 * x))));
    end
    for (int k = 0; k < NT; k++) begin
      @(negedge clk); coef_we = 0; nco_we = 1; nco_tone = TONE_W'(slot(k));
      nco_bin = 12'(64 + 120 * k); nco_freq = 0; nco_amp = 16'(AMP);
    end
    @(negedge clk); nco_we = 0;

    // 1. tones present, other slots empty
    repeat (14 * N) @(posedge clk);
    dac_watch = 1;
    repeat (3 * N) @(posedge clk);
    a_min = 1 << 30; a_max = 0; leak_max = 0;
    for (int s = 0; s < NSLOT; s++) begin
      int m;
      m = $rtoi($sqrt(real'(last_i[s]) ** 2 + real'(last_q[s]) ** 2));
      if (s % 125 == 0 && s / 125 < NT - 1 || s == NSLOT - 1) begin
        if (m < a_min) a_min = m;
        if (m > a_max) a_max = m;
      end else if (m > leak_max) leak_max = m;
    end
    $display("tone magnitudes %0d .. %0d, largest empty slot %0d", a_min, a_max, leak_max);
    chk(a_min > 1000, "weak tone");
    chk(a_max < 2 * a_min, "tone magnitudes uneven");

    // 2. phase calibration
    for (int k = 0; k < NT; k++) begin
      real th;
      th = $atan2(real'(last_q[slot(k)]), real'(last_i[slot(k)]));
      @(negedge clk); cal_we = 1; cal_tone = TONE_W'(slot(k));
      cal_phase = 16'($rtoi(th / (2.0 * 3.14159265358979) * 65536.0 + (th < 0 ? 65536.0 : 0.0)));
    end
    @(negedge clk); cal_we = 0;
    repeat (2 * N) @(posedge clk);
    locked = 0;
    for (int k = 0; k < NT; k++) begin
      int i, q;
      i = last_i[slot(k)]; q = last_q[slot(k)];
      if (i > 1000 && 20 * (q < 0 ? -q : q) < i) locked++;
    end
    chk(locked == NT, $sformatf("%0d of %0d tones on +I after calibration", locked, NT));

    // 3. power reports over Ethernet
    cfg.report_div = 16'd16;
    repeat (36 * N) @(posedge clk);
    cfg.report_div = 16'd0;
    wait (!gmii_tx_en && dut.q_valid == 0);
    repeat (100) @(posedge clk);
    for (int k = 0; k < NT; k++)
      chk(power_per_slot[slot(k)] >= 2, $sformatf("slot %0d power records %0d", slot(k), power_per_slot[slot(k)]));
    chk(frames_bad == 0, $sformatf("%0d bad frames", frames_bad));
    chk(int'(frames_sent) == frames_ok, $sformatf("frames_sent %0d decoded %0d", frames_sent, frames_ok));
    chk(dac_clips == 0, $sformatf("%0d DAC clips", dac_clips));
    chk(drops[1] == 0, "power records dropped");
    $display("MECHANISMS tones=%0d locked=%0d power_records=%0d frames=%0d", NT, locked, n_power, frames_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
