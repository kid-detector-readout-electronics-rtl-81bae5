// tb_tone_tracking: drives frames of detector samples and compares, sample by sample,
// the retune offset written to the NCO and the power records with a software model of
// the running average (P += (p - P) >>> avg_shift, first sample loads P), the offset
// clamp16(((P - p_ref) * gain) >>> gain_shift), its rounding in discrete mode, and
// the report every report_div frames. It also checks that P converges to a constant
// input power within the time the tone tracking budget allows (2^avg_shift samples
// times a few).
module tb_tone_tracking;
  import kid_pkg::*;
  localparam int NT = 3, NFR = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0] avg_shift = 4'd2, step_log2 = 4'd4;
  logic track_en = 1, discrete = 0;
  logic signed [15:0] gain = 16'sd3;
  logic [4:0] gain_shift = 5'd2;
  logic [15:0] report_div = 16'd3;
  logic cfg_we = 0;
  logic [TONE_W-1:0] cfg_tone = 0;
  logic [31:0] cfg_pref = 0;
  logic in_valid = 0, in_sof = 0;
  det_sample_t in_sample = '0;
  logic trk_we, rec_valid;
  logic [TONE_W-1:0] trk_tone;
  logic signed [15:0] trk_ofs;
  record_t rec;

  tone_tracking #(.NTONES(NT)) dut (.*);

  longint P [NT];
  bit seen [NT];
  longint pref [NT] = '{1000, 50000, 0};

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rcnt = 0, nrep = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NT; k++) begin
      @(negedge clk); cfg_we = 1; cfg_tone = TONE_W'(k); cfg_pref = 32'(pref[k]);
    end
    @(negedge clk); cfg_we = 0;
    for (int f = 0; f < NFR; f++) begin
      if (f == NFR / 2) discrete = 1;
      rcnt = (rcnt + 1 >= 3) ? 0 : rcnt + 1;
      for (int k = 0; k < NT; k++) begin
        longint i, q, p, d, pr;
        int ofs;
        // tone 2 sees a constant input, the others random
        i = (k == 2) ? 300000 : longint'($urandom_range(0, 1000000)) - 500000;
        q = (k == 2) ? -200000 : longint'($urandom_range(0, 1000000)) - 500000;
        p = (i * i + q * q) >>> 16;
        P[k] = seen[k] ? P[k] + ((p - P[k]) >>> 2) : p;
        seen[k] = 1;
        d = P[k] - pref[k];
        pr = (d * 3) >>> 2;
        ofs = pr > 32767 ? 32767 : (pr < -32768 ? -32768 : int'(pr));
        if (discrete) ofs = ofs & ~15;
        in_valid = 1; in_sof = (k == 0); in_sample.tone = TONE_W'(k);
        in_sample.i = DW'(i); in_sample.q = DW'(q);
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (!trk_we || trk_tone != TONE_W'(k) || int'(trk_ofs) != ofs) begin
          failures++; $display("FAIL f=%0d k=%0d ofs got %0d want %0d", f, k, trk_ofs, ofs);
        end
        checks++;
        if (rec_valid != (rcnt == 0) ||
            (rec_valid && (rec.typ != REC_POWER || rec.tone != TONE_W'(k) ||
                           rec.data != {32'(P[k]), 16'(ofs)}))) begin
          failures++; $display("FAIL f=%0d k=%0d record v=%0d data=%h want %h ofs=%0d", f, k, rec_valid, rec.data, {32'(P[k]), 16'(ofs)}, trk_ofs);
        end
        if (rec_valid) nrep++;
      end
    end
    checks++;
    if (nrep != NT * (NFR / 3)) begin failures++; $display("FAIL reports %0d", nrep); end
    // constant input: P has settled to the true power
    checks++;
    if (dut.pavg[2] != 32'((64'sd300000 * 64'sd300000 + 64'sd200000 * 64'sd200000) >>> 16)) begin
      failures++; $display("FAIL settle %0d", dut.pavg[2]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
