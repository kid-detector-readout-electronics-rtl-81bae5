// vector_accumulate: averages and downsamples the timestream of every detector.
//
// A frame counter advanced at each in_sof splits the stream into windows of
// 2^acc_log2 detector frames (acc_log2 0..15). Per tone the block sums I and Q over a
// window and, at the
// window's last frame, emits a REC_VECTOR record {I average[23:0], Q average[23:0]}
// (sum >>> acc_log2), one clock after that sample. The output rate per detector is the
// input rate divided by 2^acc_log2.
//
// Averaging and downsampling the whole vector of detectors follows the paper;
// power-of-two windows and the record format are this design's choices.
module vector_accumulate
  import kid_pkg::*;
#(
  parameter int NTONES = 4000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [3:0]  acc_log2,
  input  logic        in_valid,
  input  logic        in_sof,
  input  det_sample_t in_sample,
  output logic        rec_valid,
  output record_t     rec
);
  localparam int SW = DW + 16;
  logic signed [SW-1:0] si [NTONES];
  logic signed [SW-1:0] sq [NTONES];
  logic [15:0] fcnt, fcur, last;
  logic        started;

  assign last = (16'd1 << acc_log2) - 16'd1;
  always_comb begin
    if (in_sof) fcur = (!started || fcnt >= last) ? 16'd0 : fcnt + 16'd1;
    else        fcur = fcnt;
  end

  logic [TONE_W-1:0] t;
  logic signed [SW-1:0] ni, nq;
  logic act;
  assign t   = in_sample.tone;
  assign act = in_valid && (started || in_sof);
  assign ni  = (fcur == 16'd0) ? SW'(in_sample.i) : si[t] + SW'(in_sample.i);
  assign nq  = (fcur == 16'd0) ? SW'(in_sample.q) : sq[t] + SW'(in_sample.q);

  always_ff @(posedge clk) begin
    if (act) begin
      si[t] <= ni;
      sq[t] <= nq;
    end
    rec.typ  <= REC_VECTOR;
    rec.tone <= t;
    rec.data <= {DW'(ni >>> acc_log2), DW'(nq >>> acc_log2)};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fcnt      <= '0;
      started   <= 1'b0;
      rec_valid <= 1'b0;
    end else begin
      if (in_valid && in_sof) started <= 1'b1;
      if (act) fcnt <= fcur;
      rec_valid <= act && fcur == last;
    end
  end
endmodule
