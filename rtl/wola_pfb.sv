// wola_pfb: weighted overlap-add polyphase filter, the window stage of the
// analysis (before the FFT) and synthesis (after the IFFT) filterbanks.
//
// Real samples arrive one per clock with in_valid; n counts them modulo NFFT. The
// module keeps TAPS-1 delay lines of exactly NFFT samples, so d_j = x delayed by j*NFFT
// samples, and outputs
//     y = sum_{j=0}^{TAPS-1} h[c_j*NFFT + n] * d_j  >>> 14   (saturated to DW bits)
// with c_j = TAPS-1-j for analysis (REVERSE = 1: the newest block meets the last part of
// the window, so the FFT sees the window's full M*NFFT span) and c_j = j for synthesis
// (REVERSE = 0: the IFFT frame from j frames ago meets the window part j, which is
// overlap-add of windowed, periodically extended frames with hop NFFT).
// Coefficients come from the shared pfb_coeff_mem (1 clock read latency); the result
// appears 2 clocks after its input sample. in_sof must mark the first sample of a
// frame; it resets n and is passed along as out_sof.
//
// WOLA windowing in front of the FFT and behind the IFFT with one shared coefficient
// set follows the paper; the tap count (4), the data path and its timing are this
// design's choices.
module wola_pfb
  import kid_pkg::*;
#(
  parameter int LOG2N   = 12,
  parameter int TAPS    = 4,
  parameter bit REVERSE = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 in_sof,
  input  logic signed [DW-1:0] in_data,
  output logic [LOG2N-1:0]     coef_addr,
  input  logic signed [CW-1:0] coef [TAPS],
  output logic                 out_valid,
  output logic                 out_sof,
  output logic signed [DW-1:0] out_data
);
  localparam int N = 1 << LOG2N;

  logic signed [DW-1:0] dl [TAPS-1][N];   // delay lines
  logic signed [DW-1:0] tap_now [TAPS];
  logic signed [DW-1:0] tap_q   [TAPS];
  logic [LOG2N-1:0] n_cnt, n;
  logic v1, sof1;

  assign n = in_sof ? '0 : n_cnt;
  assign coef_addr = n;

  always_comb begin
    tap_now[0] = in_data;
    for (int j = 1; j < TAPS; j++) tap_now[j] = dl[j-1][n];
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int j = 0; j < TAPS-1; j++) dl[j][n] <= tap_now[j];
      tap_q <= tap_now;
    end
  end

  logic signed [63:0] acc;
  always_comb begin
    acc = '0;
    for (int j = 0; j < TAPS; j++)
      acc += 64'(tap_q[j]) * 64'(coef[REVERSE ? TAPS-1-j : j]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_cnt     <= '0;
      v1        <= 1'b0;
      sof1      <= 1'b0;
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      out_data  <= '0;
    end else begin
      if (in_valid) n_cnt <= n + 1'b1;
      v1   <= in_valid;
      sof1 <= in_valid && in_sof;
      out_valid <= v1;
      out_sof   <= sof1;
      if (v1) out_data <= sat_dw(acc >>> CFRAC);
    end
  end
endmodule
