// record_mux: gathers the science records of the three producers into one
// valid/ready stream for the Ethernet transmitter.
//
// Each producer (pulse events, tone-tracking power reports, accumulated vectors) writes
// into its own FIFO, because all three can fire in the same clock and none of them can
// wait. A fixed-priority arbiter (pulses, then power, then vectors) offers the head of
// the first non-empty FIFO on out_rec; out_ready pops it. Once offered, a record stays
// on out_rec until it is taken, even if a higher-priority one arrives meanwhile. A record arriving at a full
// FIFO is dropped and counted in that producer's saturating drop counter (overflow).
// out_valid/out_rec hold until accepted.
//
// The three arrows into the Ethernet block are the paper's; the queueing, the priority
// order and the drop policy are this design's choices.
module record_mux
  import kid_pkg::*;
#(
  parameter int PULSE_DEPTH  = 64,
  parameter int POWER_DEPTH  = 4096,
  parameter int VECTOR_DEPTH = 4096
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         pulse_valid,
  input  record_t      pulse_rec,
  input  logic         power_valid,
  input  record_t      power_rec,
  input  logic         vector_valid,
  input  record_t      vector_rec,
  output logic         out_valid,
  output record_t      out_rec,
  input  logic         out_ready,
  output logic [15:0]  drops [3]     // 0: pulse, 1: power, 2: vector
);
  logic    full [3], empty [3], pop [3], push [3], inv [3];
  record_t head [3], inr [3];
  assign inv[0] = pulse_valid;  assign inr[0] = pulse_rec;
  assign inv[1] = power_valid;  assign inr[1] = power_rec;
  assign inv[2] = vector_valid; assign inr[2] = vector_rec;

  sync_fifo #(.T(record_t), .DEPTH(PULSE_DEPTH)) u_q0 (
    .clk, .rst_n, .wr_en(push[0]), .wr_data(inr[0]), .full(full[0]),
    .rd_en(pop[0]), .rd_data(head[0]), .empty(empty[0]));
  sync_fifo #(.T(record_t), .DEPTH(POWER_DEPTH)) u_q1 (
    .clk, .rst_n, .wr_en(push[1]), .wr_data(inr[1]), .full(full[1]),
    .rd_en(pop[1]), .rd_data(head[1]), .empty(empty[1]));
  sync_fifo #(.T(record_t), .DEPTH(VECTOR_DEPTH)) u_q2 (
    .clk, .rst_n, .wr_en(push[2]), .wr_data(inr[2]), .full(full[2]),
    .rd_en(pop[2]), .rd_data(head[2]), .empty(empty[2]));

  logic [1:0] sel, sel_hold;
  logic       holding;     // a record was offered and not taken: keep offering it
  always_comb begin
    sel = 2'd3;
    for (int s = 2; s >= 0; s--) if (!empty[s]) sel = 2'(s);
    if (holding) sel = sel_hold;
    out_valid = sel != 2'd3;
    out_rec   = out_valid ? head[sel] : '0;
    for (int s = 0; s < 3; s++) begin
      pop[s]  = out_valid && out_ready && sel == 2'(s);
      push[s] = inv[s] && !full[s];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < 3; s++) drops[s] <= '0;
      holding  <= 1'b0;
      sel_hold <= '0;
    end else begin
      holding  <= out_valid && !out_ready;
      sel_hold <= sel;
      for (int s = 0; s < 3; s++)
        if (inv[s] && full[s] && drops[s] != 16'hffff) drops[s] <= drops[s] + 16'd1;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_rec));
endmodule
