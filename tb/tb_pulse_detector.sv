// tb_pulse_detector: drives two interleaved detectors with a drifting baseline,
// noise and exponential pulses, and compares y, the matched filter output, the
// in-pulse flag and the start/end strobes with a software model of the baseline
// filter (frozen during pulses), the template FIR and the threshold trigger. It also
// checks that every injected pulse was triggered.
module tb_pulse_detector;
  import kid_pkg::*;
  localparam int NT = 2, MF = 4, NS = 400;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic use_q = 1;
  logic [3:0] bl_shift = 4'd3;
  logic signed [DW-1:0] threshold = 24'sd20000;
  logic tmpl_we = 0;
  logic [1:0] tmpl_addr = 0;
  logic signed [CW-1:0] tmpl_data = 0;
  logic in_valid = 0, in_sof = 0;
  det_sample_t in_sample = '0;
  logic out_valid, out_sof, out_in_pulse, out_start, out_end;
  det_sample_t out_sample;
  logic signed [DW-1:0] out_y, out_mf;

  pulse_detector #(.NTONES(NT), .MF_TAPS(MF)) dut (.*);

  longint tmpl [MF] = '{-8192, -6000, -4000, -2000};  // pulses go negative
  longint base [NT], hist [NT][MF-1];
  bit seen [NT], act [NT];

  function automatic longint sat(input longint v);
    return v > 8388607 ? 8388607 : (v < -8388608 ? -8388608 : v);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int starts = 0, ends = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < MF; j++) begin
      @(negedge clk); tmpl_we = 1; tmpl_addr = 2'(j); tmpl_data = CW'(tmpl[j]);
    end
    @(negedge clk); tmpl_we = 0;
    for (int n = 0; n < NS; n++)
      for (int k = 0; k < NT; k++) begin
        longint x, b, y, m, bn;
        bit hit;
        x = 100000 * (k + 1) + n * 20 + longint'($urandom_range(0, 2000)) - 1000;
        if (n % 100 >= 50 && n % 100 < 60)   // pulse: 200000 * exp(-(n-50)/3)
          x -= longint'(200000.0 * $exp(-real'(n % 100 - 50) / 3.0));
        b = seen[k] ? base[k] : x;
        y = sat(x - b);
        m = y * tmpl[0];
        for (int j = 1; j < MF; j++) m += (seen[k] ? hist[k][j-1] : 0) * tmpl[j];
        m = sat(m >>> 14);
        hit = m > 20000;
        bn = (act[k] || hit) ? b : b + ((x - b) >>> 3);
        in_valid = 1; in_sof = (k == 0); in_sample.tone = TONE_W'(k);
        in_sample.q = DW'(x); in_sample.i = DW'(-x);
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (!out_valid || out_sample.tone != TONE_W'(k) || longint'(out_y) != y || longint'(out_mf) != m
            || out_in_pulse != hit || out_start != (hit && !act[k]) || out_end != (!hit && act[k])) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d k=%0d y %0d/%0d m %0d/%0d hit %0d/%0d", n, k, out_y, y, out_mf, m, out_in_pulse, hit);
        end
        if (out_start) starts++;
        if (out_end) ends++;
        for (int j = MF - 2; j > 0; j--) hist[k][j] = hist[k][j-1];
        if (!seen[k]) for (int j = 1; j < MF - 1; j++) hist[k][j] = 0;
        hist[k][0] = y;
        base[k] = bn; seen[k] = 1; act[k] = hit;
      end
    checks++;
    if (starts != NT * NS / 100 || ends != NT * NS / 100) begin
      failures++; $display("FAIL pulses seen %0d ends %0d", starts, ends);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
