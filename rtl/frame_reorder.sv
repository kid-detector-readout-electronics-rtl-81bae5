// frame_reorder: puts one real sample stream, arriving in any fixed permutation of
// NFFT-sample frames, back into natural order.
//
// Each input carries its natural index (in_idx) and is written to that address of one
// half of a ping-pong buffer. When the next frame starts (in_sof) the halves swap and
// the finished half is read out at one sample per clock in index order, so out_sof
// marks index 0. The stream must be continuous (one sample per clock), as the IFFT
// output is. Latency is one frame plus two clocks. Used after the inverse FFT, whose
// output is bit-reversed, so that the synthesis filterbank and the DAC see time order.
module frame_reorder
  import kid_pkg::*;
#(
  parameter int LOG2N = 12
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 in_sof,
  input  logic [LOG2N-1:0]     in_idx,
  input  logic signed [DW-1:0] in_data,
  output logic                 out_valid,
  output logic                 out_sof,
  output logic signed [DW-1:0] out_data
);
  localparam int N = 1 << LOG2N;
  logic signed [DW-1:0] buf0 [N];
  logic signed [DW-1:0] buf1 [N];
  logic             wsel, have, rd_on;
  logic [LOG2N-1:0] rn;
  logic             swap, wcur;

  assign swap = in_valid && in_sof && have;
  assign wcur = swap ? ~wsel : wsel;

  always_ff @(posedge clk) begin
    if (in_valid) begin
      if (wcur) buf1[in_idx] <= in_data;
      else      buf0[in_idx] <= in_data;
    end
    out_data <= wsel ? buf0[rn] : buf1[rn];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wsel <= 1'b0; have <= 1'b0; rd_on <= 1'b0; rn <= '0;
      out_valid <= 1'b0; out_sof <= 1'b0;
    end else begin
      if (in_valid && in_sof) have <= 1'b1;
      if (swap) begin
        wsel  <= ~wsel;
        rd_on <= 1'b1;
        rn    <= '0;
      end else if (rd_on) begin
        rn <= rn + 1'b1;
        if (rn == '1) rd_on <= 1'b0;
      end
      out_valid <= rd_on;
      out_sof   <= rd_on && rn == '0;
    end
  end
endmodule
