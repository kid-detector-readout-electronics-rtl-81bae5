// tb_bin_select: feeds spectrum frames in bit-reversed bin order, each bin holding a
// value that encodes (frame, bin), and checks that for every frame the selector emits
// tones 0..NT-1 in order, each carrying the value of its own bin from that frame and
// the NCO phasor of the tone (phase 0 here, so cos = 16384, sin = 0), with out_sof on
// tone 0.
module tb_bin_select;
  import kid_pkg::*;
  localparam int NT = 5, LOG2N = 4, N = 1 << LOG2N, NFR = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we = 0;
  logic [TONE_W-1:0] cfg_tone = 0;
  logic [LOG2N-1:0] cfg_bin = 0;
  logic in_valid = 0, in_sof = 0;
  logic [LOG2N-1:0] in_bin = 0;
  cplx_t in_data = '0;
  logic b_req, b_valid, a_valid;
  logic [TONE_W-1:0] b_tone, b_tone_o, a_tone_o;
  logic [LOG2N-1:0] b_bin, a_bin;
  logic [15:0] a_amp;
  phasor_t b_ph, a_ph;
  logic out_valid, out_sof;
  logic [TONE_W-1:0] out_tone;
  cplx_t out_data;
  phasor_t out_ph;

  nco #(.NTONES(NT), .LOG2N(LOG2N)) u_nco (.clk, .rst_n, .cfg_we, .cfg_tone, .cfg_bin,
    .cfg_freq(32'h1000_0000), .cfg_amp(16'd100), .cal_we(1'b0), .cal_tone('0), .cal_phase('0),
    .trk_we(1'b0), .trk_tone('0), .trk_ofs('0),
    .a_req(1'b0), .a_tone('0), .a_valid, .a_tone_o, .a_bin, .a_amp, .a_ph,
    .b_req, .b_tone, .b_valid, .b_tone_o, .b_bin, .b_ph);
  bin_select #(.NTONES(NT), .LOG2N(LOG2N)) dut (.clk, .rst_n, .in_valid, .in_sof, .in_bin, .in_data,
    .nco_req(b_req), .nco_tone(b_tone), .nco_valid(b_valid), .nco_tone_o(b_tone_o), .nco_bin(b_bin),
    .nco_ph(b_ph), .out_valid, .out_sof, .out_tone, .out_data, .out_ph);

  int bin_of [NT] = '{2, 7, 7, 0, 15};

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int f = 0, k = 0;
  always @(negedge clk) if (out_valid) begin
    checks++;
    if (out_tone != TONE_W'(k) || out_sof != (k == 0) || int'(out_data.re) != f * 1000 + bin_of[k]
        || int'(out_data.im) != -(f * 1000 + bin_of[k]) || out_ph.c != 16'sd16384 || out_ph.s != 0) begin
      failures++;
      $display("FAIL frame %0d tone %0d: tone %0d data %0d", f, k, out_tone, out_data.re);
    end
    k++; if (k == NT) begin k = 0; f++; end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      @(negedge clk); cfg_we = 1; cfg_tone = TONE_W'(t); cfg_bin = LOG2N'(bin_of[t]);
    end
    @(negedge clk); cfg_we = 0;
    for (int fr = 0; fr <= NFR; fr++)
      for (int p = 0; p < N; p++) begin
        logic [LOG2N-1:0] b;
        for (int i = 0; i < LOG2N; i++) b[i] = p[LOG2N-1-i];
        in_valid = 1; in_sof = (p == 0); in_bin = b;
        in_data.re = DW'(fr * 1000 + int'(b)); in_data.im = -DW'(fr * 1000 + int'(b));
        @(negedge clk);
      end
    in_valid = 1; in_sof = 1; in_bin = 0;   // start of one more frame closes the last
    @(negedge clk);
    in_valid = 0;
    repeat (3 * N) @(negedge clk);
    checks++;
    if (f != NFR + 1) begin failures++; $display("FAIL frames out %0d", f); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
