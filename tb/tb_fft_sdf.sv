// tb_fft_sdf: compares the streaming FFT and IFFT with a direct DFT computed in
// floating point. Random complex frames are streamed back to back; every output bin
// (tagged with out_bin) must match X[k]/N within a small tolerance, out_sof must mark
// the first output of each frame, and the first output must appear N + LOG2N clocks
// after the cycle the first input is presented (N-1 samples of pipeline delay, one
// register per stage, one clock of presentation).
module tb_fft_sdf;
  import kid_pkg::*;
  localparam int LOG2N = 6, N = 1 << LOG2N, NF = 4, TOL = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0;
  cplx_t in_data = '0;
  logic fv, fs, iv, is_;
  logic [LOG2N-1:0] fb, ib;
  cplx_t fd, id;

  fft_sdf #(.LOG2N(LOG2N), .INVERSE(1'b0)) u_f (.clk, .rst_n, .in_valid, .in_data,
    .out_valid(fv), .out_sof(fs), .out_bin(fb), .out_data(fd));
  fft_sdf #(.LOG2N(LOG2N), .INVERSE(1'b1)) u_i (.clk, .rst_n, .in_valid, .in_data,
    .out_valid(iv), .out_sof(is_), .out_bin(ib), .out_data(id));

  int xr [NF][N];
  int xi [NF][N];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic real fabs(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  function automatic void ref_bin(input int f, input int k, input bit inv, output real rr, output real ri);
    rr = 0.0; ri = 0.0;
    for (int n = 0; n < N; n++) begin
      real a = (inv ? 1.0 : -1.0) * 6.283185307179586 * real'((k * n) % N) / real'(N);
      rr += real'(xr[f][n]) * $cos(a) - real'(xi[f][n]) * $sin(a);
      ri += real'(xr[f][n]) * $sin(a) + real'(xi[f][n]) * $cos(a);
    end
    rr /= real'(N); ri /= real'(N);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0, first_in = -1, first_out = -1;
  always @(posedge clk) cyc++;

  // output checker
  int fo = 0, fi = 0, no = 0, ni = 0;
  always @(posedge clk) if (rst_n) begin
    if (fv) begin
      real rr, ri;
      if (first_out < 0) first_out = cyc;
      if (fo < NF - 1) begin
        ref_bin(fo, int'(fb), 1'b0, rr, ri);
        chk(fabs(real'(fd.re) - rr) < TOL && fabs(real'(fd.im) - ri) < TOL && 1,
            $sformatf("fft frame %0d bin %0d got %0d,%0d (%h) want %f,%f", fo, fb, fd.re, fd.im, fd, rr, ri));
        chk(fs == (no == 0), "fft sof");
      end
      no++; if (no == N) begin no = 0; fo++; end
    end
    if (iv) begin
      real rr, ri;
      if (fi < NF - 1) begin
        ref_bin(fi, int'(ib), 1'b1, rr, ri);
        chk(fabs(real'(id.re) - rr) < TOL && fabs(real'(id.im) - ri) < TOL, "ifft value");
        chk(is_ == (ni == 0), "ifft sof");
      end
      ni++; if (ni == N) begin ni = 0; fi++; end
    end
  end

  initial begin
    for (int f = 0; f < NF; f++)
      for (int n = 0; n < N; n++) begin
        xr[f][n] = int'($urandom_range(0, 2000000)) - 1000000;
        xi[f][n] = int'($urandom_range(0, 2000000)) - 1000000;
      end
    // frame 0 holds a single tone so a gross error is easy to read
    for (int n = 0; n < N; n++) begin
      xr[0][n] = $rtoi(2000000.0 * $cos(6.283185307179586 * 5.0 * n / N));
      xi[0][n] = $rtoi(2000000.0 * $sin(6.283185307179586 * 5.0 * n / N));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int f = 0; f < NF; f++)
      for (int n = 0; n < N; n++) begin
        in_valid = 1; in_data.re = DW'(xr[f][n]); in_data.im = DW'(xi[f][n]);
        if (first_in < 0) first_in = cyc;
        @(negedge clk);
      end
    in_valid = 0;
    repeat (20) @(negedge clk);
    chk(fo == NF - 1 && fi == NF - 1, $sformatf("frames out %0d %0d", fo, fi));
    chk(first_out - first_in == N + LOG2N, $sformatf("latency %0d", first_out - first_in));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
