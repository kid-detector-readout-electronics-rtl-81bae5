// pulse_detector: baseline removal, matched filter and threshold trigger for every
// detector, on the time-multiplexed detector sample stream.
//
// The pulse signal x is the I or Q component of the sample (use_q). Per tone:
//   baseline  b += (x - b) >>> bl_shift, frozen while a pulse is in progress;
//   y = x - b (baseline removed);
//   matched filter  m = sum_{j=0}^{MF_TAPS-1} tmpl[j] * y[n-j] >>> 14, with a template
//   shared by all tones and written by the host (a negative template catches pulses
//   that go negative);
//   trigger: a pulse starts when m rises above threshold and ends when it falls back
//   to or below it.
// Each input leaves one clock later with y, m, the in-pulse flag and start/end strobes.
// The first sample of a tone after reset loads its baseline and history.
//
// The three steps follow the paper; the filters' forms, the freeze of the baseline
// during a pulse and all sizes are this design's choices.
module pulse_detector
  import kid_pkg::*;
#(
  parameter int NTONES  = 4000,
  parameter int MF_TAPS = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              use_q,
  input  logic [3:0]        bl_shift,
  input  logic signed [DW-1:0] threshold,
  input  logic              tmpl_we,
  input  logic [$clog2(MF_TAPS)-1:0] tmpl_addr,
  input  logic signed [CW-1:0] tmpl_data,
  input  logic              in_valid,
  input  logic              in_sof,
  input  det_sample_t       in_sample,
  output logic              out_valid,
  output logic              out_sof,
  output det_sample_t       out_sample,
  output logic signed [DW-1:0] out_y,
  output logic signed [DW-1:0] out_mf,
  output logic              out_in_pulse,
  output logic              out_start,
  output logic              out_end
);
  logic signed [CW-1:0] tmpl [MF_TAPS];
  logic signed [DW-1:0] base [NTONES];
  logic signed [DW-1:0] hist [NTONES][MF_TAPS-1];  // y[n-1] .. y[n-MF_TAPS+1]
  logic [NTONES-1:0]    seen, active;

  logic [TONE_W-1:0]    t;
  logic signed [DW-1:0] x, b, y, bnew, m;
  logic signed [DW-1:0] h [MF_TAPS-1];
  logic                 hit;
  assign t = in_sample.tone;
  always_comb begin
    x = use_q ? in_sample.q : in_sample.i;
    b = seen[t] ? base[t] : x;
    y = sat_dw(64'(x) - 64'(b));
    for (int j = 0; j < MF_TAPS-1; j++) h[j] = seen[t] ? hist[t][j] : '0;
    begin
      logic signed [63:0] acc;
      acc = 64'(y) * 64'(tmpl[0]);
      for (int j = 1; j < MF_TAPS; j++) acc += 64'(h[j-1]) * 64'(tmpl[j]);
      m = sat_dw(acc >>> CFRAC);
    end
    hit  = m > threshold;
    bnew = (active[t] || hit) ? b : DW'(64'(b) + ((64'(x) - 64'(b)) >>> bl_shift));
  end

  always_ff @(posedge clk) begin
    if (tmpl_we) tmpl[tmpl_addr] <= tmpl_data;
    if (in_valid) begin
      base[t]    <= bnew;
      hist[t][0] <= y;
      for (int j = 1; j < MF_TAPS-1; j++) hist[t][j] <= h[j-1];
    end
    out_sample <= in_sample;
    out_y      <= y;
    out_mf     <= m;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seen         <= '0;
      active       <= '0;
      out_valid    <= 1'b0;
      out_sof      <= 1'b0;
      out_in_pulse <= 1'b0;
      out_start    <= 1'b0;
      out_end      <= 1'b0;
    end else begin
      if (in_valid) begin
        seen[t]   <= 1'b1;
        active[t] <= hit;
      end
      out_valid    <= in_valid;
      out_sof      <= in_valid && in_sof;
      out_in_pulse <= in_valid && hit;
      out_start    <= in_valid && hit && !active[t];
      out_end      <= in_valid && !hit && active[t];
    end
  end
endmodule
