// tb_pfb_coeff_mem: writes a random window into the coefficient store and reads every
// address through both ports, checking that each port returns h[m*N + n] for all taps
// m one clock after the address.
module tb_pfb_coeff_mem;
  import kid_pkg::*;
  localparam int LOG2N = 5, N = 1 << LOG2N, TAPS = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0;
  logic [LOG2N+1:0] waddr = 0;
  logic signed [CW-1:0] wdata = 0;
  logic [LOG2N-1:0] raddr0 = 0, raddr1 = 0;
  logic signed [CW-1:0] rdata0 [TAPS];
  logic signed [CW-1:0] rdata1 [TAPS];
  logic signed [CW-1:0] h [TAPS*N];

  pfb_coeff_mem #(.LOG2N(LOG2N), .TAPS(TAPS)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < TAPS * N; a++) h[a] = CW'($urandom);
    for (int a = 0; a < TAPS * N; a++) begin
      @(negedge clk); we = 1; waddr = (LOG2N+2)'(a); wdata = h[a];
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < N; n++) begin
      raddr0 = LOG2N'(n); raddr1 = LOG2N'(N - 1 - n);
      @(negedge clk);
      for (int m = 0; m < TAPS; m++) begin
        checks += 2;
        if (rdata0[m] != h[m * N + n])         begin failures++; $display("FAIL port0 n=%0d m=%0d", n, m); end
        if (rdata1[m] != h[m * N + N - 1 - n]) begin failures++; $display("FAIL port1 n=%0d m=%0d", n, m); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
