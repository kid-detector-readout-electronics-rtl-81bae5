// tb_nco: checks the per-tone oscillator against a software phase model.
// Tones are written with bins, frequency words and amplitudes; port A is stepped a
// number of frames and every returned phasor is compared with cos/sin of the model
// phase; port B must return the same phase without advancing it; a retune offset
// must change the phase step by ofs << 8; port B must add the calibration phase; an unwritten tone must have amplitude 0.
module tb_nco;
  import kid_pkg::*;
  localparam int NT = 8, LOG2N = 6, LB = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we = 0, trk_we = 0, a_req = 0, b_req = 0, cal_we = 0;
  logic [15:0] cal_phase = 0;
  logic [TONE_W-1:0] cfg_tone = 0, trk_tone = 0, a_tone = 0, b_tone = 0, cal_tone = 0;
  logic [LOG2N-1:0] cfg_bin = 0;
  logic [31:0] cfg_freq = 0;
  logic [15:0] cfg_amp = 0;
  logic signed [15:0] trk_ofs = 0;
  logic a_valid, b_valid;
  logic [TONE_W-1:0] a_tone_o, b_tone_o;
  logic [LOG2N-1:0] a_bin, b_bin;
  logic [15:0] a_amp;
  phasor_t a_ph, b_ph;

  nco #(.NTONES(NT), .LOG2N(LOG2N), .LUT_BITS(LB)) dut (.*);

  logic [31:0] ph [NT];
  logic [31:0] fr [NT];
  logic signed [15:0] of [NT];
  logic [15:0] cal [NT];

  function automatic int rc(input logic [31:0] p);  // model cosine
    real a = $cos(6.283185307179586 * real'(p[31 -: LB]) / 1024.0) * 16384.0;
    return $rtoi(a < 0.0 ? a - 0.5 : a + 0.5);
  endfunction
  function automatic int rs(input logic [31:0] p);
    real a = $sin(6.283185307179586 * real'(p[31 -: LB]) / 1024.0) * 16384.0;
    return $rtoi(a < 0.0 ? a - 0.5 : a + 0.5);
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // write tones 0..NT-2; NT-1 stays unwritten
    for (int k = 0; k < NT - 1; k++) begin
      @(negedge clk);
      cfg_we = 1; cfg_tone = TONE_W'(k); cfg_bin = LOG2N'(3 * k + 1);
      cfg_freq = 32'h0123_4567 * (k + 1); cfg_amp = 16'(1000 * (k + 1));
      ph[k] = 0; fr[k] = cfg_freq; of[k] = 0; cal[k] = 0;
    end
    @(negedge clk); cfg_we = 0;
    // downconversion calibration on two tones
    cal_we = 1; cal_tone = 1; cal_phase = 16'h4000; cal[1] = 16'h4000;
    @(negedge clk); cal_tone = 4; cal_phase = 16'hC123; cal[4] = 16'hC123;
    @(negedge clk); cal_we = 0;
    // step port A over several frames, with a retune offset on tone 2 in frame 3
    for (int f = 0; f < 6; f++) begin
      if (f == 3) begin
        @(negedge clk); trk_we = 1; trk_tone = 2; trk_ofs = -16'sd1234; of[2] = -16'sd1234;
        @(negedge clk); trk_we = 0;
      end
      for (int k = 0; k < NT - 1; k++) begin
        @(negedge clk); a_req = 1; a_tone = TONE_W'(k);
        @(negedge clk); a_req = 0;
        chk(a_valid && a_tone_o == TONE_W'(k), "port A valid/tone");
        chk(a_bin == LOG2N'(3 * k + 1), "port A bin");
        chk(a_amp == 16'(1000 * (k + 1)), "port A amp");
        chk(int'(a_ph.c) == rc(ph[k]) && int'(a_ph.s) == rs(ph[k]), $sformatf("port A phasor tone %0d frame %0d", k, f));
        ph[k] = ph[k] + fr[k] + (32'(of[k]) <<< 8);
        // port B sees the advanced phase and leaves it alone
        b_req = 1; b_tone = TONE_W'(k);
        @(negedge clk); b_req = 0;
        chk(b_valid && b_bin == LOG2N'(3 * k + 1), "port B bin");
        chk(int'(b_ph.c) == rc(ph[k] + {cal[k], 16'd0}) && int'(b_ph.s) == rs(ph[k] + {cal[k], 16'd0}), "port B phasor");
      end
    end
    // unwritten tone is silent
    @(negedge clk); a_req = 1; a_tone = TONE_W'(NT - 1);
    @(negedge clk); a_req = 0;
    chk(a_amp == 0, "unwritten tone amplitude");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
