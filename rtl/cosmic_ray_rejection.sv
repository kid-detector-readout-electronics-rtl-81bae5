// cosmic_ray_rejection: replaces the samples of a detected pulse with a moving average,
// so that cosmic-ray hits do not reach the imaging timestream.
//
// Per tone it keeps the last MA_LEN (a power of two) samples taken outside pulses in a
// circular buffer together with their running I and Q sums. A sample flagged in_pulse
// by the pulse detector is replaced by the average of that buffer (sum >>> log2 MA_LEN)
// and marked out_infill; any other sample passes unchanged and enters the buffer. The
// first sample of a tone after reset fills its whole buffer. Output is registered,
// one clock after the input.
//
// Infilling pulses with a moving average in the imaging configuration follows the
// paper; the boxcar average and its length are this design's choices.
module cosmic_ray_rejection
  import kid_pkg::*;
#(
  parameter int NTONES = 4000,
  parameter int MA_LEN = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic        in_sof,
  input  det_sample_t in_sample,
  input  logic        in_in_pulse,
  output logic        out_valid,
  output logic        out_sof,
  output det_sample_t out_sample,
  output logic        out_infill
);
  localparam int LW = $clog2(MA_LEN);
  localparam int SW = DW + LW;

  logic signed [DW-1:0] hi [NTONES][MA_LEN];
  logic signed [DW-1:0] hq [NTONES][MA_LEN];
  logic signed [SW-1:0] si [NTONES];
  logic signed [SW-1:0] sq [NTONES];
  logic [LW-1:0]        wp [NTONES];
  logic [NTONES-1:0]    seen;

  logic [TONE_W-1:0] t;
  assign t = in_sample.tone;

  always_ff @(posedge clk) begin
    if (in_valid && !in_in_pulse) begin
      if (!seen[t]) begin
        for (int j = 0; j < MA_LEN; j++) begin
          hi[t][j] <= in_sample.i;
          hq[t][j] <= in_sample.q;
        end
        si[t] <= SW'(in_sample.i) <<< LW;
        sq[t] <= SW'(in_sample.q) <<< LW;
        wp[t] <= '0;
      end else begin
        hi[t][wp[t]] <= in_sample.i;
        hq[t][wp[t]] <= in_sample.q;
        si[t] <= si[t] + SW'(in_sample.i) - SW'(hi[t][wp[t]]);
        sq[t] <= sq[t] + SW'(in_sample.q) - SW'(hq[t][wp[t]]);
        wp[t] <= wp[t] + 1'b1;
      end
    end
    out_sample.tone <= t;
    if (in_in_pulse && seen[t]) begin
      out_sample.i <= DW'(si[t] >>> LW);
      out_sample.q <= DW'(sq[t] >>> LW);
    end else begin
      out_sample.i <= in_sample.i;
      out_sample.q <= in_sample.q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seen       <= '0;
      out_valid  <= 1'b0;
      out_sof    <= 1'b0;
      out_infill <= 1'b0;
    end else begin
      if (in_valid && !in_in_pulse) seen[t] <= 1'b1;
      out_valid  <= in_valid;
      out_sof    <= in_valid && in_sof;
      out_infill <= in_valid && in_in_pulse && seen[t];
    end
  end
endmodule
