// decimator: optional downsampling of a channel's waveform segments.
//
// The paper lists a per-channel decimation enable and a board-wide integer
// decimation factor, and says that downsampling runs in the firmware. It does
// not say how samples are chosen. This design keeps the first sample of each
// segment and every `factor`-th sample after it: no averaging, so the sample
// values stay raw ADC counts. When the last sample of a segment is dropped,
// the end of the segment still goes out as a beat with valid=0 and eof=1.
// Segments marked this way have the `decimated` flag in their header.
// factor 0 or 1, or en=0, passes the stream unchanged.
//
// Interface: in/o are seg_beat_t beats (see daq_pkg); o is registered, one
// clock after in.
module decimator
  import daq_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic [7:0] factor,
  input  seg_beat_t  in,
  output seg_beat_t  o
);
  logic [7:0] idx, idx_cur;
  logic       active, keep;

  assign active  = en && (factor > 8'd1);
  assign idx_cur = in.sof ? 8'd0 : idx;
  assign keep    = !active || (idx_cur == 8'd0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      idx <= '0;
      o   <= '0;
    end else begin
      o <= '0;
      if (in.valid) begin
        idx <= (idx_cur + 8'd1 == factor) ? 8'd0 : idx_cur + 8'd1;
        if (keep || in.eof) begin
          o       <= in;
          o.valid <= keep;
          o.flags.decimated <= active;
        end
      end else if (in.eof) begin
        o <= in;
      end
    end
  end
endmodule
