// daw_trigger: the Dynamic Acquisition Window of one digitiser channel. It
// selects the waveform segments that contain signal from the continuous
// 125 MS/s sample stream.
//
// The gate follows the paper's rules. A segment opens when the trigger value
// (FIR output or raw sample) has been at or above the trigger threshold for
// `tot` samples (time over threshold). It stays open until the value drops
// below the independent post-trigger threshold, and then for `post` more
// samples. A new crossing during those post samples extends the gate. Samples
// from `pre` samples before the trigger are kept as well. A gate longer than
// MAX_GATE samples is truncated. The channel then waits until the value falls
// below the trigger threshold before it can trigger again. Output segments
// longer than 4*max_seg samples are split into sub-segments; the later ones
// carry the `cont` flag. A trigger that arrives while the CDM veto is set and
// veto_en is on does not open a segment. It is counted, and the count goes out
// in the header of the channel's next segment. In triggered mode
// (trig_mode=1) the self trigger is off. An ext_trig pulse opens a window of
// `pre` samples before it and `post` samples after it.
//
// How: raw samples go into a RING-deep circular buffer (the input ring
// buffer) and are read back `pre` samples late. The gate FSM marks each
// incoming sample "active". Each active sample reloads a counter with `pre`,
// so the delayed reader keeps the pre samples before an active sample and the
// active sample itself. A one-sample holding register tells each kept sample
// whether it is the last of its segment, so sof and eof come with samples.
//
// Timing: one decision per smp_en. `o` is a one-clock beat, registered, that
// lags the input by pre+1 samples. Its tstamp (with sof) is the sample's own
// time. Design choices (not in the paper): pre is counted back from the
// sample on which the trigger is accepted; the gate-length cap (MAX_GATE,
// 4096 samples = 33 us, "a few tens of microseconds") counts gate and post
// samples; trigger values compare as unsigned ADC counts (positive-going
// pulses); pre is limited to RING-1; the missed count saturates at 255.
// The cfg fields fir_en and decim_en are not read here: the channel uses
// them to pick the trigger value and to decimate.
module daw_trigger
  import daq_pkg::*;
#(
  parameter int unsigned RING     = 1024,
  parameter int unsigned MAX_GATE = 4096,
  localparam int unsigned RW      = $clog2(RING)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                smp_en,
  input  logic [15:0]         raw,
  input  logic [15:0]         trig_val,
  input  logic [TSTAMP_W-1:0] tnow,
  input  ch_cfg_t             cfg,
  input  logic [15:0]         max_seg,
  input  logic                run,
  input  logic                veto,
  input  logic                trig_mode,
  input  logic                ext_trig,
  output seg_beat_t           o,
  output logic                over
);
  typedef enum logic [1:0] {IDLE, GATE, POST, WAIT_LOW} state_t;

  logic [15:0]       ring [RING];
  logic [RW-1:0]     wp;
  state_t            st;
  logic [15:0]       tot_cnt;
  logic [15:0]       gate_len;
  logic [11:0]       post_cnt;
  logic [11:0]       keep_cnt;
  logic [7:0]        missed;
  logic              trunc_pend;
  // holding register
  logic              h_valid, h_sof, h_last, h_cont;
  logic [15:0]       h_sample;
  logic [TSTAMP_W-1:0] h_ts;
  logic [7:0]        h_missed;
  logic [17:0]       seg_cnt;

  // combinational decisions for this sample
  logic        allowed, active, accept, inhibit;
  state_t      st_n;
  logic [11:0] pre_eff;
  logic [15:0] rd;
  logic        keep, held_eof, new_sof;
  logic [17:0] seg_cnt_n;

  assign over    = (trig_val >= cfg.thr) && cfg.enable;
  assign allowed = run && cfg.enable && !(veto && cfg.veto_en);
  assign pre_eff = (cfg.pre > 12'(RING - 1)) ? 12'(RING - 1) : cfg.pre;
  assign rd      = (pre_eff == '0) ? raw : ring[wp - RW'(pre_eff)];

  always_comb begin
    st_n    = st;
    active  = 1'b0;
    accept  = 1'b0;
    inhibit = 1'b0;
    unique case (st)
      IDLE: begin
        if (trig_mode ? ext_trig : (over && (tot_cnt + 16'd1 >= cfg.tot))) begin
          if (allowed) begin
            accept = 1'b1;
            active = 1'b1;
            st_n   = trig_mode ? POST : GATE;
          end else begin
            inhibit = run && cfg.enable;
            st_n    = trig_mode ? IDLE : WAIT_LOW;
          end
        end
      end
      GATE: begin
        active = 1'b1;
        if (32'(gate_len) + 1 >= MAX_GATE)      st_n = WAIT_LOW;
        else if (trig_val < cfg.post_thr)      st_n = POST;
      end
      POST: begin
        if (!trig_mode && over) begin
          active = 1'b1;
          st_n   = (32'(gate_len) + 1 >= MAX_GATE) ? WAIT_LOW : GATE;
        end else if (trig_mode && ext_trig) begin
          active = 1'b1;
        end else if (post_cnt == '0) begin
          st_n = IDLE;
        end else begin
          active = 1'b1;
        end
      end
      WAIT_LOW: begin
        if (!over) st_n = IDLE;
      end
      default: st_n = IDLE;
    endcase
    // delayed reader
    keep      = active || (keep_cnt != '0);
    held_eof  = h_valid && (h_last || !keep);
    new_sof   = !h_valid || held_eof;
    seg_cnt_n = new_sof ? 18'd1 : seg_cnt + 18'd1;
  end

  always_ff @(posedge clk) begin
    if (smp_en) begin
      ring[wp] <= raw;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0; st <= IDLE; tot_cnt <= '0; gate_len <= '0; post_cnt <= '0;
      keep_cnt <= '0; missed <= '0; trunc_pend <= 1'b0;
      h_valid <= 1'b0; h_sof <= 1'b0; h_last <= 1'b0; h_cont <= 1'b0;
      h_sample <= '0; h_ts <= '0; h_missed <= '0; seg_cnt <= '0;
      o <= '0;
    end else begin
      o <= '0;
      if (smp_en) begin
        wp <= wp + 1'b1;
        st <= st_n;
        // time-over-threshold counter
        if (st == IDLE && over && !(tot_cnt == 16'hFFFF)) tot_cnt <= tot_cnt + 1'b1;
        if (!over || st_n != IDLE) tot_cnt <= '0;
        // gate length and post counters
        if (accept)                       gate_len <= '0;
        else if (st == GATE || st == POST) gate_len <= gate_len + 1'b1;
        if (st_n == POST && (st != POST || (trig_mode && ext_trig))) post_cnt <= cfg.post;
        else if (st == POST && post_cnt != '0) post_cnt <= post_cnt - 1'b1;
        if ((st == GATE || st == POST) && st_n == WAIT_LOW) trunc_pend <= 1'b1;
        // delayed reader
        keep_cnt <= active ? pre_eff : ((keep_cnt != '0) ? keep_cnt - 1'b1 : '0);
        // emit the held sample
        if (h_valid) begin
          o.valid            <= 1'b1;
          o.sof              <= h_sof;
          o.eof              <= held_eof;
          o.sample           <= h_sample;
          o.tstamp           <= h_ts;
          o.missed           <= h_missed;
          o.flags.cont       <= h_cont;
          o.flags.truncated  <= held_eof && trunc_pend;
          o.flags.decimated  <= 1'b0;
          o.flags.compressed <= 1'b0;
          if (held_eof && trunc_pend) trunc_pend <= 1'b0;
        end
        // load the new held sample
        h_valid <= keep;
        if (keep) begin
          h_sample <= rd;
          h_ts     <= tnow - TSTAMP_W'(pre_eff);
          h_sof    <= new_sof;
          h_cont   <= new_sof && h_valid && h_last;
          h_last   <= (max_seg != '0) && (seg_cnt_n == {max_seg, 2'b00});
          seg_cnt  <= seg_cnt_n;
          h_missed <= new_sof ? missed : 8'd0;
        end
        if (keep && new_sof) missed <= (inhibit && missed != 8'hFF) ? 8'd1 : 8'd0;
        else if (inhibit && missed != 8'hFF) missed <= missed + 1'b1;
      end
    end
  end
endmodule
