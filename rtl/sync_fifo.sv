// sync_fifo: single-clock first-word-fall-through FIFO.
//
// Helper for the channel WAVE/PARAMS buffers, the Sort & Merge FIFO and the
// start-order queue. rd_data shows the oldest word whenever empty is low;
// rd_en pops it. A write to a full FIFO or a read of an empty one is ignored
// (the owners prevent both; assertions flag them). level counts stored words.
// Reset is synchronous and active low, as in every block of this design.
// DEPTH need not be a power of two.
module sync_fifo #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned LW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [W-1:0]  wr_data,
  output logic          full,
  input  logic          rd_en,
  output logic [W-1:0]  rd_data,
  output logic          empty,
  output logic [LW-1:0] level
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_wr, do_rd;

  assign full    = (level == LW'(DEPTH));
  assign empty   = (level == '0);
  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && !empty;
  assign rd_data = mem[rp];

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; level <= '0;
    end else begin
      if (do_wr) wp <= incr(wp);
      if (do_rd) rp <= incr(rp);
      level <= level + LW'(do_wr) - LW'(do_rd);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));
endmodule
