// tb_wola_pfb: streams random samples through an analysis (REVERSE=1) and a synthesis
// (REVERSE=0) filterbank sharing one coefficient store, and compares every output,
// two clocks after its input, with
//   y[t] = sum_j h[c_j*N + (t mod N)] * x[t - j*N] >>> 14,  c_j = TAPS-1-j or j,
// computed directly from the stored input history.
module tb_wola_pfb;
  import kid_pkg::*;
  localparam int LOG2N = 4, N = 1 << LOG2N, TAPS = 4, NS = 10 * N;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we = 0;
  logic [LOG2N+1:0] waddr = 0;
  logic signed [CW-1:0] wdata = 0;
  logic [LOG2N-1:0] a0, a1;
  logic signed [CW-1:0] c0 [TAPS];
  logic signed [CW-1:0] c1 [TAPS];
  logic in_valid = 0, in_sof = 0;
  logic signed [DW-1:0] in_data = 0;
  logic v0, s0, v1, s1;
  logic signed [DW-1:0] y0, y1;

  pfb_coeff_mem #(.LOG2N(LOG2N), .TAPS(TAPS)) u_c (.clk, .we, .waddr, .wdata,
    .raddr0(a0), .rdata0(c0), .raddr1(a1), .rdata1(c1));
  wola_pfb #(.LOG2N(LOG2N), .TAPS(TAPS), .REVERSE(1'b1)) u_a (.clk, .rst_n, .in_valid, .in_sof, .in_data,
    .coef_addr(a0), .coef(c0), .out_valid(v0), .out_sof(s0), .out_data(y0));
  wola_pfb #(.LOG2N(LOG2N), .TAPS(TAPS), .REVERSE(1'b0)) u_s (.clk, .rst_n, .in_valid, .in_sof, .in_data,
    .coef_addr(a1), .coef(c1), .out_valid(v1), .out_sof(s1), .out_data(y1));

  int h [TAPS*N];
  int x [NS];

  function automatic longint model(input int t, input bit rev);
    longint acc = 0;
    for (int j = 0; j < TAPS; j++)
      if (t - j * N >= 0)
        acc += longint'(h[(rev ? TAPS - 1 - j : j) * N + (t % N)]) * longint'(x[t - j * N]);
    return acc >>> 14;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int outn = 0;
  always @(posedge clk) if (v0) begin
    checks += 3;
    if (outn >= TAPS * N) begin   // delay lines hold real data from here on
      if (longint'(y0) != model(outn, 1'b1)) begin failures++; $display("FAIL ana t=%0d got %0d want %0d", outn, y0, model(outn, 1'b1)); end
      if (longint'(y1) != model(outn, 1'b0)) begin failures++; $display("FAIL syn t=%0d", outn); end
    end
    if (s0 != (outn % N == 0) || !v1 || s1 != s0) begin failures++; $display("FAIL sof t=%0d", outn); end
    outn++;
  end

  initial begin
    for (int a = 0; a < TAPS * N; a++) h[a] = int'($urandom_range(0, 32767)) - 16384;
    for (int t = 0; t < NS; t++) x[t] = int'($urandom_range(0, 4000000)) - 2000000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < TAPS * N; a++) begin
      @(negedge clk); we = 1; waddr = (LOG2N+2)'(a); wdata = CW'(h[a]);
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < NS; t++) begin
      in_valid = 1; in_sof = (t % N == 0); in_data = DW'(x[t]);
      @(negedge clk);
      if (t % 7 == 3) begin in_valid = 0; @(negedge clk); end   // gaps in the stream
    end
    in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (outn != NS) begin failures++; $display("FAIL count %0d", outn); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
