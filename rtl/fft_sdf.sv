// fft_sdf: streaming NFFT-point FFT or IFFT (INVERSE = 1), one complex sample per clock.
//
// LOG2N radix-2 SDF stages (fft_sdf_stage) in a row, decimation in frequency, each
// scaling by 1/2, so the result is X[k]/NFFT. The first valid input after reset is
// sample 0 of a frame and frames must follow back to back. Outputs come in bit-reversed
// order; out_bin gives the natural bin number of each output and out_sof marks the
// first output of a frame. The first output frame appears NFFT-1 valid samples plus
// LOG2N clocks after its first input.
//
// The transform size of 4096 is the paper's; the SDF architecture, the scaling and the
// bit-reversed output order (the bin selector after it addresses bins directly, so no
// reorder buffer is needed) are this design's choices.
module fft_sdf
  import kid_pkg::*;
#(
  parameter int LOG2N   = 12,
  parameter bit INVERSE = 1'b0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  cplx_t            in_data,
  output logic             out_valid,
  output logic             out_sof,
  output logic [LOG2N-1:0] out_bin,
  output cplx_t            out_data
);
  localparam int N = 1 << LOG2N;

  logic  v [LOG2N+1];
  cplx_t d [LOG2N+1];
  assign v[0] = in_valid;
  assign d[0] = in_data;

  for (genvar s = 0; s < LOG2N; s++) begin : g_stage
    fft_sdf_stage #(.LOG2N(LOG2N), .STAGE(s), .INVERSE(INVERSE)) u_stage (
      .clk, .rst_n,
      .in_valid (v[s]),   .in_data (d[s]),
      .out_valid(v[s+1]), .out_data(d[s+1])
    );
  end

  // The pipeline delays the stream by N-1 valid samples: skip those, then count.
  logic [LOG2N-1:0] skip, pos;
  logic primed;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      skip   <= '0;
      pos    <= '0;
      primed <= 1'b0;
    end else if (v[LOG2N]) begin
      if (!primed) begin
        skip <= skip + 1'b1;
        if (skip == LOG2N'(N - 2)) primed <= 1'b1;
      end else begin
        pos <= pos + 1'b1;
      end
    end
  end

  always_comb begin
    for (int i = 0; i < LOG2N; i++) out_bin[i] = pos[LOG2N-1-i];
  end
  assign out_valid = v[LOG2N] && primed;
  assign out_sof   = out_valid && pos == '0;
  assign out_data  = d[LOG2N];
endmodule
