// gdm: Global Data Manager, the root of the timing and control tree.
//
// What the GDM does here, following the paper:
//  * Absolute time. The pulse of each 1 pps synchronisation packet from the
//    LNGS GPS link starts a new second. The packet carries the absolute time
//    of the previous pulse, so the new second is that time plus one. The
//    sub-second counter (8 ns samples) restarts at the delay correction: the
//    configured fibre delay plus the packet's GPS bias correction (ns / 8). If
//    pulses stop, the counter wraps on its own every TICKS_PER_SEC, as the
//    rubidium clock holds time. Decoding the serial GPS packet is outside
//    this design: the decoded fields come in on gps_valid.
//  * Run control and Time Slice Markers. When run_req rises, the GDM sends a
//    sync pulse (all digitisers zero their time and sample phase), then the
//    first TSM (T0 of the first slice), then one TSM every TS_LEN samples
//    (1 s = 125e6 samples), with ts_id counting the slices. The absolute
//    time at which the sync goes out is kept in run_t0: a board's sample
//    time (and so the time word of its TSM events) plus run_t0 gives the
//    LNGS time of any sample. Keeping it as one register at the root, rather
//    than sending it down to every board, is this design's choice.
//  * Busy/veto. While run is on, the veto bit follows the OR of the CDM busy
//    lines. That is the global pause; its end is the resume. As in the
//    paper, the GDM timestamps the pause and resume transitions. The
//    deadtime counter (samples spent in pause) is this design's way of
//    doing the paper's live-time bookkeeping.
//  * Triggers, in triggered mode only (trig_mode; triggered and triggerless
//    operation exclude each other). A rising edge of ext_in (a test pulse or
//    calibration input) triggers all sectors. A hit-map snapshot whose total
//    count of hit channels reaches hm_thr triggers the sectors (digitisers)
//    whose map is not empty. The paper does not give the hit-map trigger
//    algorithm: this multiplicity rule is the simplest one, and this design's
//    choice. hit_total accumulates every snapshot's count for hit-rate
//    monitoring.
// The control packet goes out registered, one per clock, to all CDMs.
module gdm
  import daq_pkg::*;
#(
  parameter int unsigned N_CDM         = 8,
  parameter int unsigned N_WFD         = 48,
  parameter int unsigned N_CH          = 64,
  parameter int unsigned TS_LEN        = 125_000_000,
  parameter int unsigned TICKS_PER_SEC = 125_000_000
) (
  input  logic               clk,
  input  logic               rst_n,
  // time
  input  logic               pps,
  input  logic               gps_valid,
  input  logic [39:0]        gps_prev_sec,
  input  logic signed [31:0] gps_bias_ns,
  input  logic [15:0]        delay_ticks,
  // run control and triggers
  input  logic               run_req,
  input  logic               trig_mode,
  input  logic               ext_in,
  input  logic               hm_trig_en,
  input  logic [15:0]        hm_thr,
  // from the CDMs
  input  logic [N_CDM-1:0]   cdm_busy,
  input  logic [N_CDM-1:0]   cdm_hm_valid,
  input  logic [63:0]        hitmaps [N_WFD],
  // to the CDMs
  output ctrl_pkt_t          ctrl,
  // monitoring
  output logic [39:0]        abs_sec,
  output logic [31:0]        sub_tick,
  output logic               evt_pause,
  output logic               evt_resume,
  output logic [71:0]        run_t0,
  output logic [71:0]        pause_time,
  output logic [71:0]        resume_time,
  output logic [47:0]        deadtime,
  output logic [47:0]        hit_total,
  output logic [31:0]        n_trig
);
  logic        ph, smp;
  logic [39:0] prev_sec;
  logic        have_gps;
  logic        run_q, ext_q, busy_any;
  logic [31:0] ts_cnt;
  typedef enum logic [1:0] {R_IDLE, R_SYNC, R_T0, R_RUN} rstate_t;
  rstate_t     rs;

  assign smp      = ph;
  assign busy_any = |cdm_busy;

  // hit-map multiplicity
  logic [15:0]      hm_count;
  logic [N_WFD-1:0] hm_sect;
  always_comb begin
    hm_count = '0;
    for (int w = 0; w < N_WFD; w++) begin
      hm_sect[w] = |hitmaps[w][N_CH-1:0];
      for (int c = 0; c < N_CH; c++) hm_count += 16'(hitmaps[w][c]);
    end
  end

  logic        [31:0] start_tick;
  logic signed [32:0] corr;
  assign corr       = 33'(delay_ticks) + 33'(gps_bias_ns >>> 3);
  assign start_tick = (corr < 0) ? 32'd0 : corr[31:0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ph <= 1'b0; abs_sec <= '0; sub_tick <= '0; prev_sec <= '0; have_gps <= 1'b0;
      run_q <= 1'b0; ext_q <= 1'b0; ts_cnt <= '0; rs <= R_IDLE; ctrl <= '0;
      evt_pause <= 1'b0; evt_resume <= 1'b0; pause_time <= '0; resume_time <= '0;
      run_t0 <= '0;
      deadtime <= '0; hit_total <= '0; n_trig <= '0;
    end else begin
      ph <= ~ph;
      // ---- absolute time ----
      if (gps_valid) begin
        prev_sec <= gps_prev_sec;
        have_gps <= 1'b1;
      end
      if (pps) begin
        abs_sec  <= (have_gps ? prev_sec : abs_sec) + 40'd1;
        sub_tick <= start_tick;
        have_gps <= 1'b0;
      end else if (smp) begin
        if (sub_tick + 1 >= TICKS_PER_SEC) begin
          sub_tick <= '0;
          abs_sec  <= abs_sec + 1'b1;
        end else begin
          sub_tick <= sub_tick + 1'b1;
        end
      end
      // ---- run control and TSMs ----
      ctrl.sync     <= 1'b0;
      ctrl.tsm      <= 1'b0;
      ctrl.ext_trig <= 1'b0;
      ctrl.trig_mode <= trig_mode;
      run_q <= run_req;
      unique case (rs)
        R_IDLE: if (run_req && !run_q) begin
          rs        <= R_SYNC;
          ctrl.sync <= 1'b1;
          ph        <= 1'b0;
          run_t0    <= {abs_sec, sub_tick};
        end
        R_SYNC: begin
          rs       <= R_T0;
          ctrl.run <= 1'b1;
        end
        R_T0: begin
          rs         <= R_RUN;
          ctrl.tsm   <= 1'b1;
          ctrl.ts_id <= '0;
          ts_cnt     <= '0;
        end
        R_RUN: begin
          if (!run_req) begin
            rs       <= R_IDLE;
            ctrl.run <= 1'b0;
          end else if (smp) begin
            if (ts_cnt + 1 >= TS_LEN) begin
              ts_cnt     <= '0;
              ctrl.tsm   <= 1'b1;
              ctrl.ts_id <= ctrl.ts_id + 1'b1;
            end else begin
              ts_cnt <= ts_cnt + 1'b1;
            end
          end
        end
        default: rs <= R_IDLE;
      endcase
      // ---- busy -> veto (pause / resume) ----
      evt_pause  <= 1'b0;
      evt_resume <= 1'b0;
      ctrl.veto  <= ctrl.run && busy_any;
      if (ctrl.run && busy_any && !ctrl.veto) begin
        evt_pause  <= 1'b1;
        pause_time <= {abs_sec, sub_tick};
      end
      if (ctrl.veto && !(ctrl.run && busy_any)) begin
        evt_resume  <= 1'b1;
        resume_time <= {abs_sec, sub_tick};
      end
      if (ctrl.veto && smp) deadtime <= deadtime + 1'b1;
      // ---- triggers ----
      ext_q <= ext_in;
      if (|cdm_hm_valid) hit_total <= hit_total + 48'(hm_count);
      if (ctrl.run && trig_mode) begin
        if (ext_in && !ext_q) begin
          ctrl.ext_trig  <= 1'b1;
          ctrl.trig_word <= '1;
          n_trig         <= n_trig + 1'b1;
        end else if (hm_trig_en && (|cdm_hm_valid) && hm_count >= hm_thr) begin
          ctrl.ext_trig  <= 1'b1;
          ctrl.trig_word <= 48'(hm_sect);
          n_trig         <= n_trig + 1'b1;
        end
      end
    end
  end
endmodule
