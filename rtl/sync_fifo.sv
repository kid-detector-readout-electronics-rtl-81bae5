// sync_fifo: single-clock first-in first-out buffer of DEPTH entries of type T.
//
// Writes with wr_en when not full, reads (pops) with rd_en when not empty; rd_data
// always shows the oldest entry (first-word fall-through).
// Writing when full or reading when empty is an error caught by the assertions.
module sync_fifo #(
  parameter type T     = logic [63:0],
  parameter int  DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic wr_en,
  input  T     wr_data,
  output logic full,
  input  logic rd_en,
  output T     rd_data,
  output logic empty
);
  localparam int AW = $clog2(DEPTH);
  T mem [DEPTH];
  logic [$clog2(DEPTH+1)-1:0] level;
  logic [AW-1:0] wp, rp;

  assign full    = level == ($clog2(DEPTH+1))'(DEPTH);
  assign empty   = level == '0;
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      level <= '0;
    end else begin
      if (wr_en) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (rd_en) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      if (wr_en && !rd_en) level <= level + 1'b1;
      else if (rd_en && !wr_en) level <= level - 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full && !rd_en));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));
endmodule
