// pfb_coeff_mem: the one window-coefficient store of both WOLA filterbanks.
//
// The window h has TAPS*NFFT Q1.14 coefficients, kept as TAPS banks of NFFT words:
// bank m, address n holds h[m*NFFT + n]. The host writes one coefficient at a time
// (address = m*NFFT + n). Each of the two read ports takes an address n and returns,
// one clock later, the TAPS coefficients h[m*NFFT + n], m = 0..TAPS-1: port 0 serves the
// analysis filterbank in front of the FFT, port 1 the synthesis filterbank after the
// IFFT. Sharing one coefficient set between the FFT and IFFT filterbanks follows the
// paper; the bank layout, the tap count and the write port are this design's choices.
module pfb_coeff_mem
  import kid_pkg::*;
#(
  parameter int LOG2N = 12,
  parameter int TAPS  = 4
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [LOG2N+$clog2(TAPS)-1:0] waddr,
  input  logic signed [CW-1:0] wdata,
  input  logic [LOG2N-1:0]     raddr0,
  output logic signed [CW-1:0] rdata0 [TAPS],
  input  logic [LOG2N-1:0]     raddr1,
  output logic signed [CW-1:0] rdata1 [TAPS]
);
  localparam int N = 1 << LOG2N;
  logic signed [CW-1:0] h [TAPS][N];

  always_ff @(posedge clk) begin
    if (we) h[waddr[LOG2N +: $clog2(TAPS)]][waddr[LOG2N-1:0]] <= wdata;
    for (int m = 0; m < TAPS; m++) begin
      rdata0[m] <= h[m][raddr0];
      rdata1[m] <= h[m][raddr1];
    end
  end
endmodule
