// tb_ifft_frame_builder: drives the frame builder from a real NCO and checks every
// output frame bin by bin: a tone's bin must hold (amp * phasor) >>> 7 for the phase
// the tone had when that frame was built (the first valid frame is the third one
// built, so tone k carries phase (j+2)*freq_k in output frame j), every other bin must
// be zero, and out_sof must mark bin 0 of every frame of N clocks.
module tb_ifft_frame_builder;
  import kid_pkg::*;
  localparam int NT = 6, LOG2N = 4, N = 1 << LOG2N, LB = 10, NFR = 6;
  logic clk = 0, rst_n = 0, rst_nco = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we = 0;
  logic [TONE_W-1:0] cfg_tone = 0;
  logic [LOG2N-1:0] cfg_bin = 0;
  logic [31:0] cfg_freq = 0;
  logic [15:0] cfg_amp = 0;
  logic a_req, a_valid;
  logic [TONE_W-1:0] a_tone, a_tone_o, b_tone_o;
  logic [LOG2N-1:0] a_bin, b_bin;
  logic [15:0] a_amp;
  phasor_t a_ph, b_ph;
  logic b_valid;
  logic out_valid, out_sof;
  cplx_t out_data;

  nco #(.NTONES(NT), .LOG2N(LOG2N), .LUT_BITS(LB)) u_nco (.clk, .rst_n(rst_nco), .cfg_we, .cfg_tone, .cfg_bin,
    .cfg_freq, .cfg_amp, .cal_we(1'b0), .cal_tone('0), .cal_phase('0),
    .trk_we(1'b0), .trk_tone('0), .trk_ofs('0),
    .a_req, .a_tone, .a_valid, .a_tone_o, .a_bin, .a_amp, .a_ph,
    .b_req(1'b0), .b_tone('0), .b_valid, .b_tone_o, .b_bin, .b_ph);
  ifft_frame_builder #(.NTONES(NT), .LOG2N(LOG2N)) dut (.clk, .rst_n,
    .nco_req(a_req), .nco_tone(a_tone), .nco_valid(a_valid), .nco_bin(a_bin), .nco_amp(a_amp),
    .nco_ph(a_ph), .out_valid, .out_sof, .out_data);

  int bin_of [NT] = '{1, 3, 4, 9, 12, 15};
  logic [31:0] fr [NT];
  int amp [NT];

  function automatic int q(input real v);
    return $rtoi(v < 0.0 ? v - 0.5 : v + 0.5);
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int j = 0, n = 0;
  always @(negedge clk) if (out_valid && j < NFR) begin
    int wre, wim;
    wre = 0; wim = 0;
    for (int k = 0; k < NT; k++) if (bin_of[k] == n) begin
      logic [31:0] p;
      int c, s;
      p = 32'(j + 2) * fr[k];
      c = q($cos(6.283185307179586 * real'(p[31 -: LB]) / 1024.0) * 16384.0);
      s = q($sin(6.283185307179586 * real'(p[31 -: LB]) / 1024.0) * 16384.0);
      wre = (c * amp[k]) >>> 7;
      wim = (s * amp[k]) >>> 7;
    end
    checks++;
    if (int'(out_data.re) != wre || int'(out_data.im) != wim || out_sof != (n == 0)) begin
      failures++;
      $display("FAIL frame %0d bin %0d got %0d,%0d want %0d,%0d", j, n, out_data.re, out_data.im, wre, wim);
    end
    n++; if (n == N) begin n = 0; j++; end
  end

  initial begin
    for (int k = 0; k < NT; k++) begin
      fr[k] = $urandom;
      amp[k] = int'($urandom_range(1, 65535));
    end
    repeat (3) @(posedge clk);
    rst_nco = 1;
    for (int k = 0; k < NT; k++) begin   // tone table is written before the builder starts
      @(negedge clk); cfg_we = 1; cfg_tone = TONE_W'(k); cfg_bin = LOG2N'(bin_of[k]);
      cfg_freq = fr[k]; cfg_amp = 16'(amp[k]);
    end
    @(negedge clk); cfg_we = 0;
    @(negedge clk); rst_n = 1;
    wait (j == NFR);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
