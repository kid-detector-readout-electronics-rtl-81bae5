// bin_select: picks the FFT bin of every tone out of each spectrum frame.
//
// FFT outputs (any order, tagged with their natural bin number) are written into one
// half of a ping-pong frame buffer. When a frame's last sample has been written
// (in_sof of the next frame, or NFFT samples counted) the halves swap and the
// selector walks tones 0..NTONES-1, one per clock: it asks NCO port B for the tone's
// bin and phasor and one clock later reads that bin from the finished half. Each
// output carries the tone index, the bin value and the tone's current NCO phasor,
// which is all the downconverter needs. A frame must take at least NTONES+2 clocks.
//
// Selecting one bin per tone follows the paper; reading the bin table from the NCO,
// the buffer and the timing are this design's choices.
module bin_select
  import kid_pkg::*;
#(
  parameter int NTONES = 4000,
  parameter int LOG2N  = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_sof,
  input  logic [LOG2N-1:0]  in_bin,
  input  cplx_t             in_data,
  // NCO port B
  output logic              nco_req,
  output logic [TONE_W-1:0] nco_tone,
  input  logic              nco_valid,
  input  logic [TONE_W-1:0] nco_tone_o,
  input  logic [LOG2N-1:0]  nco_bin,
  input  phasor_t           nco_ph,
  // selected bins
  output logic              out_valid,
  output logic              out_sof,
  output logic [TONE_W-1:0] out_tone,
  output cplx_t             out_data,
  output phasor_t           out_ph
);
  localparam int N = 1 << LOG2N;

  cplx_t buf0 [N];
  cplx_t buf1 [N];
  logic  wsel;            // half being written
  logic  have_frame;      // a frame was written since the last swap
  logic  busy;
  logic [TONE_W-1:0] k;

  logic swap, wcur;
  assign swap = in_valid && in_sof && have_frame;
  assign wcur = swap ? ~wsel : wsel;   // a frame's first sample already goes to the new half

  always_ff @(posedge clk) begin
    if (in_valid) begin
      if (wcur) buf1[in_bin] <= in_data;
      else      buf0[in_bin] <= in_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wsel       <= 1'b0;
      have_frame <= 1'b0;
      busy       <= 1'b0;
      k          <= '0;
    end else begin
      if (in_valid && in_sof) have_frame <= 1'b1;
      if (swap) begin
        wsel <= ~wsel;
        busy <= 1'b1;
        k    <= '0;
      end else if (busy) begin
        k <= k + 1'b1;
        if (k == TONE_W'(NTONES - 1)) busy <= 1'b0;
      end
    end
  end

  assign nco_req  = busy;
  assign nco_tone = k;

  // read the finished half (the one not being written) one clock after the NCO answers
  logic first_pending;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid     <= 1'b0;
      out_sof       <= 1'b0;
      first_pending <= 1'b0;
    end else begin
      out_valid <= nco_valid;
      out_sof   <= nco_valid && first_pending;
      if (swap) first_pending <= 1'b1;
      else if (nco_valid) first_pending <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    out_tone <= nco_tone_o;
    out_ph   <= nco_ph;
    out_data <= wsel ? buf0[nco_bin] : buf1[nco_bin];
  end

  initial assert (NTONES + 2 <= N) else $error("NTONES must fit in a frame");
endmodule
