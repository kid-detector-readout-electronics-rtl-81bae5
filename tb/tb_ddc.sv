// tb_ddc: streams frames of NT tones with random bin values and phasors and checks
// each detector sample against the model: mix = bin * conj(phasor) >>> 14, summed over
// dec_ratio frames per tone, times dec_recip >>> 16. Runs with dec_ratio = 3, then 1,
// and checks that exactly one detector sample per tone leaves per dec_ratio frames.
module tb_ddc;
  import kid_pkg::*;
  localparam int NT = 4, NFR = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0] dec_ratio = 8'd3;
  logic [16:0] dec_recip = 17'd21845;
  logic in_valid = 0, in_sof = 0;
  logic [TONE_W-1:0] in_tone = 0;
  cplx_t in_data = '0;
  phasor_t in_ph = '0;
  logic out_valid, out_sof;
  det_sample_t out_sample;

  ddc #(.NTONES(NT)) dut (.*);

  longint si [NT], sq [NT];
  longint exp_i [$], exp_q [$];
  int exp_t [$];

  function automatic longint sat(input longint v);
    return v > 8388607 ? 8388607 : (v < -8388608 ? -8388608 : v);
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nout = 0;
  always @(negedge clk) if (out_valid) begin
    checks++;
    nout++;
    if (exp_t.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      int t; longint ei, eq;
      t = exp_t.pop_front(); ei = exp_i.pop_front(); eq = exp_q.pop_front();
      if (out_sample.tone != TONE_W'(t) || longint'(out_sample.i) != ei || longint'(out_sample.q) != eq
          || out_sof != (t == 0)) begin
        failures++;
        $display("FAIL tone %0d got %0d,%0d want %0d,%0d", t, out_sample.i, out_sample.q, ei, eq);
      end
    end
  end

  task automatic run(input int dec, input int recip);
    dec_ratio = 8'(dec); dec_recip = 17'(recip);
    for (int f = 0; f < NFR; f++)
      for (int k = 0; k < NT; k++) begin
        longint re, im, c, s, mi, mq;
        re = longint'($urandom_range(0, 4000000)) - 2000000;
        im = longint'($urandom_range(0, 4000000)) - 2000000;
        c  = longint'($urandom_range(0, 32768)) - 16384;
        s  = longint'($urandom_range(0, 32768)) - 16384;
        mi = sat((re * c + im * s) >>> 14);
        mq = sat((im * c - re * s) >>> 14);
        if (f % dec == 0) begin si[k] = 0; sq[k] = 0; end
        si[k] += mi; sq[k] += mq;
        if (f % dec == dec - 1) begin
          exp_t.push_back(k);
          exp_i.push_back(sat((si[k] * recip) >>> 16));
          exp_q.push_back(sat((sq[k] * recip) >>> 16));
        end
        in_valid = 1; in_sof = (k == 0); in_tone = TONE_W'(k);
        in_data.re = DW'(re); in_data.im = DW'(im); in_ph.c = CW'(c); in_ph.s = CW'(s);
        @(negedge clk);
        in_valid = 0;
        @(negedge clk);
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run(3, 21845);
    repeat (4) @(negedge clk);
    checks++;
    if (nout != NT * NFR / 3 || exp_t.size() != 0) begin failures++; $display("FAIL count %0d", nout); end
    // a new ratio takes effect from the next frame that starts a window
    nout = 0;
    run(1, 65536);
    repeat (4) @(negedge clk);
    checks++;
    if (nout != NT * NFR || exp_t.size() != 0) begin failures++; $display("FAIL count dec1 %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
