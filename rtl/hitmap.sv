// hitmap: the real-time hit map of one digitiser, one bit per channel telling
// whether the channel's trigger value reached its threshold during a 1.2 us
// snapshot.
//
// The paper gives the record (one bit per channel, 1.2 us) and its use: the
// GDM reads it for hit-rate monitoring and hit-map-based triggers. The
// circuit is this design's own. Each channel's over-threshold bit is ORed
// into a register for WIN samples (150 samples of 8 ns = 1.2 us). At the end
// of the window the register goes out with a one-clock hit_valid pulse, and a
// new window begins. sync restarts the window, so all boards that share the
// sync pulse send their maps on the same clock.
module hitmap #(
  parameter int unsigned N_CH = 64,
  parameter int unsigned WIN  = 150
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            smp_en,
  input  logic            sync,
  input  logic [N_CH-1:0] over,
  output logic            hit_valid,
  output logic [N_CH-1:0] map
);
  logic [N_CH-1:0] acc;
  logic [15:0]     cnt;

  always_ff @(posedge clk) begin
    if (!rst_n || sync) begin
      acc       <= '0;
      cnt       <= '0;
      hit_valid <= 1'b0;
      map       <= '0;
    end else begin
      hit_valid <= 1'b0;
      if (smp_en) begin
        if (32'(cnt) == WIN - 1) begin
          map       <= acc | over;
          hit_valid <= 1'b1;
          acc       <= '0;
          cnt       <= '0;
        end else begin
          acc <= acc | over;
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
