// tb_pulse_tracking: drives the trigger stream of three interleaved detectors with
// fixed and random pulses of known start time, length and matched-filter shape, and checks that one
// REC_PULSE record per pulse leaves one clock after its end strobe with the right
// tone, start time, peak (>>> 8) and width, including a width that saturates at 255, and that the timestamp counts frames.
module tb_pulse_tracking;
  import kid_pkg::*;
  localparam int NT = 3, NS = 1500;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_sof = 0, in_start = 0, in_in_pulse = 0, in_end = 0;
  logic [TONE_W-1:0] in_tone = 0;
  logic signed [DW-1:0] in_mf = 0;
  logic rec_valid;
  record_t rec;
  logic [TS_W-1:0] now;

  pulse_tracking #(.NTONES(NT)) dut (.*);

  // pulses: tone, start sample, length, peak: four fixed pulses (one longer than 255
  // samples) followed by random ones that never overlap on one tone
  localparam int NP = 64;
  int pt [NP], ps [NP], pl [NP], pk [NP];
  initial begin
    int nxt [NT];
    pt[0] = 0; ps[0] = 10;  pl[0] = 5;   pk[0] = 100000;
    pt[1] = 1; ps[1] = 20;  pl[1] = 1;   pk[1] = 300000;
    pt[2] = 2; ps[2] = 30;  pl[2] = 12;  pk[2] = 2000000;
    pt[3] = 1; ps[3] = 100; pl[3] = 300; pk[3] = 51200;
    nxt[0] = 20; nxt[1] = 410; nxt[2] = 50;
    for (int p = 4; p < NP; p++) begin
      int k;
      k = p % NT;
      pt[p] = k; ps[p] = nxt[k] + int'($urandom_range(1, 12));
      pl[p] = int'($urandom_range(1, 20)); pk[p] = int'($urandom_range(2000, 4000000));
      nxt[k] = ps[p] + pl[p] + 1;
      if (ps[p] + pl[p] >= NS - 2) begin ps[p] = 100000; pl[p] = 1; end  // past the end: never sent
    end
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nrec = 0, nexp = 0;
    bit act [NT];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NP; p++) if (ps[p] + pl[p] < NS) nexp++;
    foreach (act[k]) act[k] = 0;
    @(negedge clk);
    for (int n = 0; n < NS; n++)
      for (int k = 0; k < NT; k++) begin
        int ip; bit hit; int mfv;
        ip = -1;
        for (int p = 0; p < NP; p++) if (pt[p] == k && n >= ps[p] && n < ps[p] + pl[p]) ip = p;
        hit = ip >= 0;
        // matched filter output peaks in the middle of the pulse
        mfv = hit ? pk[ip] - 10 * ((n - ps[ip] - pl[ip] / 2) * (n - ps[ip] - pl[ip] / 2)) : 0;
        in_valid = 1; in_sof = (k == 0); in_tone = TONE_W'(k); in_mf = DW'(mfv);
        in_start = hit && !act[k]; in_in_pulse = hit; in_end = !hit && act[k];
        act[k] = hit;
        @(negedge clk);
        in_valid = 0; in_start = 0; in_end = 0; in_in_pulse = 0;
        checks++;
        if (now != TS_W'(n + 1)) begin failures++; $display("FAIL now %0d at n=%0d", now, n); end
        if (rec_valid) begin
          int p;
          p = -1;
          for (int q = 0; q < NP; q++) if (pt[q] == k && ps[q] + pl[q] == n) p = q;
          checks++;
          nrec++;
          // time base: first frame start makes the counter 1, so sample n has time n+1
          if (p < 0 || rec.typ != REC_PULSE || rec.tone != TONE_W'(k)
              || rec.data[47:24] != 24'(ps[p] + 1) || rec.data[23:8] != 16'(pk[p] >>> 8)
              || rec.data[7:0] != 8'(pl[p] > 255 ? 255 : pl[p])) begin
            failures++;
            $display("FAIL record at n=%0d k=%0d data=%h", n, k, rec.data);
          end
        end
      end
    checks++;
    if (nrec != nexp || now != TS_W'(NS)) begin failures++; $display("FAIL count %0d now %0d", nrec, now); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
