// fft_sdf_stage: one radix-2 decimation-in-frequency stage of a single-path
// delay-feedback (SDF) pipeline FFT.
//
// The stage holds D = NFFT >> (STAGE+1) samples in a feedback delay line and counts
// valid inputs modulo 2D. In the first half of each 2D-sample block it stores the
// input and outputs the difference term left over from the previous block; in the
// second half it outputs (a + b)/2 and stores (a - b) * W^(i * 2^STAGE) / 2, where a is
// the stored sample, b the input and i its position in the half block.
// W = exp(-j*2*pi/NFFT), or exp(+j*2*pi/NFFT) when INVERSE = 1. The halving at every
// stage makes the whole transform scaled by 1/NFFT, so it cannot overflow. Latency is
// D valid samples plus one clock; twiddles are a table computed at elaboration.
module fft_sdf_stage
  import kid_pkg::*;
#(
  parameter int LOG2N   = 12,
  parameter int STAGE   = 0,
  parameter bit INVERSE = 1'b0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  cplx_t in_data,
  output logic  out_valid,
  output cplx_t out_data
);
  localparam int N   = 1 << LOG2N;
  localparam int D   = N >> (STAGE + 1);
  localparam int CNW = $clog2(2 * D);

  typedef logic [2*CW-1:0] tw_t [D];   // {re, im}
  function automatic tw_t mk_tw();
    tw_t r;
    for (int i = 0; i < D; i++)
      r[i] = {q_cos(i << STAGE, N), INVERSE ? q_sin(i << STAGE, N) : CW'(-q_sin(i << STAGE, N))};
    return r;
  endfunction
  localparam tw_t TW = mk_tw();

  cplx_t fifo [D];
  logic [CNW-1:0] cnt;
  int unsigned ptr;
  logic second_half;
  assign ptr = int'(cnt) % D;
  assign second_half = cnt[CNW-1];

  cplx_t a, b, sum, dif;
  logic signed [DW:0] dr, di;
  logic signed [CW-1:0] wr, wi;
  always_comb begin
    a  = fifo[ptr];
    b  = in_data;
    wr = TW[ptr][2*CW-1:CW];
    wi = TW[ptr][CW-1:0];
    sum.re = DW'((64'(a.re) + 64'(b.re)) >>> 1);
    sum.im = DW'((64'(a.im) + 64'(b.im)) >>> 1);
    dr = (DW+1)'(a.re) - (DW+1)'(b.re);
    di = (DW+1)'(a.im) - (DW+1)'(b.im);
    dif.re = DW'((64'(dr) * 64'(wr) - 64'(di) * 64'(wi)) >>> (CFRAC + 1));
    dif.im = DW'((64'(dr) * 64'(wi) + 64'(di) * 64'(wr)) >>> (CFRAC + 1));
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      fifo[ptr] <= second_half ? dif : b;
      out_data  <= second_half ? sum : a;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) cnt <= cnt + 1'b1;
    end
  end
endmodule
