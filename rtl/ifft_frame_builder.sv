// ifft_frame_builder: turns the NCO tone table into IFFT input frames.
//
// A free-running sample counter n = 0..NFFT-1 defines the frame. During one frame the
// builder asks NCO port A for tones 0..NTONES-1 (one per clock, starting at n = 0) and
// writes amplitude * phasor of each tone into its bin of a frame buffer. At the same
// time the other buffer streams out in natural bin order, one bin per clock, and every
// bin is cleared as it is read, so a bin holding no tone is zero. The buffers swap at
// n = 0, so a frame built during frame f leaves during frame f+1.
//
// Bin value = (phasor * amp) >>> 7, which maps amp = 65535 to just below full scale.
// If two tones share a bin the later one wins. out_valid rises at the third frame
// boundary after reset, once both buffers have been cleared; out_sof marks bin 0.
//
// Placing NCO phasors into IFFT bins follows the paper; the ping-pong buffer, the
// scaling and the overwrite rule are this design's choices.
module ifft_frame_builder
  import kid_pkg::*;
#(
  parameter int NTONES = 4000,
  parameter int LOG2N  = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  // NCO port A
  output logic              nco_req,
  output logic [TONE_W-1:0] nco_tone,
  input  logic              nco_valid,
  input  logic [LOG2N-1:0]  nco_bin,
  input  logic [15:0]       nco_amp,
  input  phasor_t           nco_ph,
  // frame stream to the IFFT
  output logic              out_valid,
  output logic              out_sof,
  output cplx_t             out_data
);
  localparam int N = 1 << LOG2N;

  cplx_t buf0 [N];
  cplx_t buf1 [N];
  logic [LOG2N-1:0] n;
  logic             sel;       // buffer being read out
  logic             started;
  logic [1:0]       warm;      // frames since start; both buffers are clean after two

  assign nco_req  = started && (n < LOG2N'(NTONES));
  assign nco_tone = TONE_W'(n);

  logic signed [DW-1:0] wr_re, wr_im;
  always_comb begin
    wr_re = DW'((64'(nco_ph.c) * 64'(signed'({1'b0, nco_amp}))) >>> 7);
    wr_im = DW'((64'(nco_ph.s) * 64'(signed'({1'b0, nco_amp}))) >>> 7);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n         <= '0;
      sel       <= 1'b0;
      started   <= 1'b0;
      warm      <= '0;
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
    end else begin
      started <= 1'b1;
      if (started) n <= n + 1'b1;
      if (started && n == '1) sel <= ~sel;
      if (started && n == '1 && warm != 2'd2) warm <= warm + 1'b1;
      out_valid <= started && (out_valid || (n == '1 && warm == 2'd2));
      out_sof   <= started && n == '1;
    end
  end

  // read-and-clear of the outgoing buffer; tone writes into the other one
  logic [LOG2N-1:0] rd_addr;
  assign rd_addr = n + 1'b1;   // value shown in the next cycle
  always_ff @(posedge clk) begin
    if (started) begin
      if (n == '1) out_data <= sel ? buf0[rd_addr] : buf1[rd_addr];
      else         out_data <= sel ? buf1[rd_addr] : buf0[rd_addr];
      if (n == '1) begin
        if (sel) buf0[rd_addr] <= '0; else buf1[rd_addr] <= '0;
      end else begin
        if (sel) buf1[rd_addr] <= '0; else buf0[rd_addr] <= '0;
      end
    end
    if (nco_valid) begin
      if (sel) buf0[nco_bin] <= '{re: wr_re, im: wr_im};
      else     buf1[nco_bin] <= '{re: wr_re, im: wr_im};
    end
  end

  initial assert (NTONES + 2 <= N) else $error("NTONES must leave two spare slots per frame");
endmodule
