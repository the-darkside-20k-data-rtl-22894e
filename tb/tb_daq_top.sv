// tb_daq_top: end-to-end test of the whole front end at reduced size: one
// crate with one TPC and one veto digitiser (two CDMs), 4 channels per board,
// small buffers, a 3000-sample Time Slice and a 4000-sample second.
//
// Stimulus: every channel gets a periodic pulse train (a pure function of
// board, channel and sample time, so the checker can recompute any sample).
// Board 0 uses raw packing with segment splitting (max_seg = 4 words, 16
// samples) and one 100-sample pulse that hits the gate cap (truncation).
// Board 1 compresses its data, and its channel 2 is decimated by 2. Board 1's
// readout is stalled for a while, so its buffers fill: busy -> CDM -> GDM
// veto (pause), inhibited triggers (missed count in the next header), then
// resume. Later the GDM switches to triggered mode: one external trigger and
// a coincidence on all board-0 channels that fires the hit-map trigger. GPS
// pps with packets first, then holdover.
//
// Checks: every segment read from both output streams (raw or decoded from
// the compressed bit stream) equals the generated waveform at
// tstamp + i*factor; segments of a channel do not overlap; split length
// limit; TSM ids and times; absolute time; no loss. At the end the testbench
// prints how often each mechanism happened and fails if one never did.
module tb_daq_top;
  import daq_pkg::*;
  localparam int NW = 2, NC = 4, NCDM = 2, TSL = 3000, TPS = 4000, PRE = 6, POST = 6;
  localparam longint LONG_T = 1500, COINC_T = 7000;
  logic clk = 0, rst_n = 0;
  logic pps = 0, gps_valid = 0, run_req = 0, trig_mode = 0, ext_in = 0, hm_trig_en = 0;
  logic [39:0] gps_prev_sec = 0;
  ch_cfg_t cfg_ch [NW][NC];
  board_cfg_t bcfg [NW];
  logic [15:0] adc [NW][NC];
  logic [NW-1:0] m_valid, m_sop, m_ready, lost;
  logic [63:0] m_data [NW];
  ctrl_pkt_t ctrl;
  logic [39:0] abs_sec; logic [31:0] sub_tick;
  logic evt_pause, evt_resume;
  logic [71:0] pause_time, resume_time, run_t0;
  logic [47:0] deadtime, hit_total;
  logic [31:0] n_trig, n_busy [NCDM], n_pause [NCDM], n_resume [NCDM];
  int checks = 0, failures = 0;
  logic stall1 = 0;

  daq_top #(.N_CRATE(1), .N_TPC(1), .N_VETO(1), .N_CH(NC), .RING(64), .MAX_GATE(64),
            .WAVE_DEPTH(64), .PARAMS_WORDS(16), .SM_DEPTH(64), .SM_BUSY(48), .ORDER_DEPTH(16),
            .HIT_WIN(20), .TS_LEN(TSL), .TICKS_PER_SEC(TPS)) dut (
    .clk, .rst_n, .pps, .gps_valid, .gps_prev_sec, .gps_bias_ns(32'sd0), .delay_ticks(16'd0),
    .run_req, .trig_mode, .ext_in, .hm_trig_en, .hm_thr(16'd3), .cfg_ch, .bcfg,
    .lut_we(1'b0), .lut_addr(8'd0), .lut_len(5'd0), .lut_code(16'd0), .adc, .m_valid, .m_data,
    .m_sop, .m_ready, .lost, .ctrl, .abs_sec, .sub_tick, .evt_pause, .evt_resume, .run_t0, .pause_time,
    .resume_time, .deadtime, .hit_total, .n_trig, .n_busy, .n_pause, .n_resume);

  always #2 clk = ~clk;

  task automatic check(input bit c, input string s);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  // ---- waveform generator ---------------------------------------------------
  function automatic logic [15:0] gen(int w, int c, longint t);
    longint per = 150 + 37 * c + 11 * w, d;
    int base = 500 + 10 * w + c + int'((t * 7 + c) % 5);
    if (w == 0 && c == 3 && t >= LONG_T && t < LONG_T + 100) return 16'd3000;
    if (w == 0 && t >= COINC_T && t < COINC_T + 30) d = t - COINC_T;
    else d = (t + 23 * c + 40) % per;
    if (t < 50 || d >= 30) return 16'(base);
    return (d < 3) ? 16'(base + 1000 * (d + 1)) : 16'(base + 3000 * 10 / (d + 7));
  endfunction
  wire [TSTAMP_W-1:0] tnow = dut.g_crate[0].g_wfd[0].u_wfd.tnow;
  always_comb for (int w = 0; w < NW; w++) for (int c = 0; c < NC; c++) adc[w][c] = gen(w, c, longint'(tnow));

  // ---- mechanism counters ---------------------------------------------------
  int n_seg = 0, n_tsm_ev = 0, n_cont = 0, n_trunc = 0, n_comp = 0, n_decim = 0, n_missed = 0;
  int n_pause_ev = 0, n_resume_ev = 0, n_ext = 0, n_hm = 0, n_pps = 0, n_holdover = 0;
  int n_busy_clk = 0, n_trig_seg = 0, n_words = 0, n_stall_clk = 0;

  always @(posedge clk) if (rst_n) begin
    if (evt_pause) n_pause_ev++;
    if (evt_resume) n_resume_ev++;
    if (ctrl.ext_trig && ctrl.trig_word == '1) n_ext++;
    else if (ctrl.ext_trig) n_hm++;
    if (|dut.cdm_busy) n_busy_clk++;
    check(lost == '0, "no data lost");
  end

  // ---- output stream parsers --------------------------------------------------
  bit bits [$];
  function automatic int getb(inout int pos, input int k);
    int v = 0;
    for (int i = 0; i < k; i++) begin v = (v << 1) | int'(bits[pos]); pos++; end
    return v;
  endfunction

  typedef struct { seg_hdr_t h; logic [63:0] w1; logic [63:0] wv [$]; } ev_t;
  ev_t cur [NW];
  int left [NW] = '{-1, -1};
  longint last_end [NW][NC];
  int tsm_next [NW] = '{0, 0};
  longint tsm_t0 [NW];

  task automatic check_event(input int w, input ev_t e);
    int c, ns, f, pos, prev;
    longint ts;
    int smp [$];
    if (e.h.tsm) begin
      n_tsm_ev++;
      check(e.h.channel == 8'hFF && e.h.board == w && e.w1[63:48] == 16'(tsm_next[w]), "TSM header and id");
      if (tsm_next[w] == 0) tsm_t0[w] = longint'(e.w1[47:0]);
      else check(longint'(e.w1[47:0]) == tsm_t0[w] + tsm_next[w] * TSL, "TSM period");
      tsm_next[w]++;
      return;
    end
    n_seg++;
    c = int'(e.h.channel); ns = int'(e.h.nsamples); ts = longint'(e.w1);
    f = e.h.flags.decimated ? 2 : 1;
    n_cont  += int'(e.h.flags.cont);
    n_trunc += int'(e.h.flags.truncated);
    n_comp  += int'(e.h.flags.compressed);
    n_decim += int'(e.h.flags.decimated);
    n_missed += int'(e.h.missed);
    n_words += int'(e.h.nwords);
    if (ctrl.trig_mode) n_trig_seg++;
    check(e.h.board == w && c < NC, "segment ids");
    check(ts >= last_end[w][c], $sformatf("b%0d ch%0d segments do not overlap (%0d < %0d)", w, c, ts, last_end[w][c]));
    last_end[w][c] = ts + longint'(ns * f);
    if (w == 0) check(ns <= 16, "split at max_seg");
    if (!e.h.flags.compressed) begin
      check(e.h.nwords == (ns + 3) / 4, "raw word count");
      foreach (e.wv[k]) for (int j = 0; j < 4; j++) smp.push_back(int'(e.wv[k][16*j +: 16]));
    end else begin
      bits = {};
      foreach (e.wv[k]) for (int b = 63; b >= 0; b--) bits.push_back(e.wv[k][b]);
      pos = 0; prev = 0;
      for (int i = 0; i < ns; i++) begin
        int z, v, s;
        z = 0;
        while (pos < bits.size() && bits[pos] == 0) begin z++; pos++; end
        v = getb(pos, z + 1);
        if (v == 130) s = getb(pos, 16);
        else s = (prev + (((v - 1) % 2 == 0) ? (v - 1) / 2 : -(v / 2))) & 16'hFFFF;
        smp.push_back(s); prev = s;
      end
      check(pos <= bits.size(), "compressed stream long enough");
    end
    for (int i = 0; i < ns; i++) if (smp[i] != int'(gen(w, c, ts + i * f))) begin
      check(0, $sformatf("b%0d ch%0d ts %0d sample %0d: %0d exp %0d", w, c, ts, i, smp[i], gen(w, c, ts + i * f)));
      break;
    end
    check(1, "segment samples");
  endtask

  always @(posedge clk) if (rst_n) begin
    for (int w = 0; w < NW; w++) begin
      if (m_valid[w] && m_ready[w]) begin
        if (left[w] == -1) begin
          check(m_sop[w], "sop on header");
          cur[w].h = m_data[w]; cur[w].wv = {}; left[w] = -2;
        end else begin
          check(!m_sop[w], "no sop inside an event");
          if (left[w] == -2) begin cur[w].w1 = m_data[w]; left[w] = int'(cur[w].h.nwords); end
          else begin cur[w].wv.push_back(m_data[w]); left[w]--; end
        end
        if (left[w] == 0) begin check_event(w, cur[w]); left[w] = -1; end
      end
    end
    m_ready[0] <= ($urandom_range(3) != 0);
    m_ready[1] <= !stall1 && ($urandom_range(3) != 0);
    if (stall1) n_stall_clk++;
  end

  // ---- GPS --------------------------------------------------------------------
  logic [39:0] exp_sec;
  task automatic gps_second(input int k, input bit with_packet);
    if (with_packet) begin
      @(negedge clk); gps_prev_sec = 40'd1_700_000_000 + 40'(k); gps_valid = 1;
      @(negedge clk); gps_valid = 0;
    end
    @(negedge clk); pps = 1; @(negedge clk); pps = 0;
    repeat (3) @(negedge clk);
    exp_sec = 40'd1_700_000_000 + 40'(k) + 1;
    check(abs_sec == exp_sec, $sformatf("abs_sec %0d exp %0d", abs_sec, exp_sec));
    n_pps++;
  endtask

  initial begin
    for (int w = 0; w < NW; w++) for (int c = 0; c < NC; c++) begin
      cfg_ch[w][c] = '0; cfg_ch[w][c].enable = 1; cfg_ch[w][c].veto_en = 1;
      cfg_ch[w][c].pre = PRE; cfg_ch[w][c].post = POST;
      cfg_ch[w][c].thr = 1300; cfg_ch[w][c].post_thr = 800; cfg_ch[w][c].tot = 2;
      last_end[w][c] = 0;
    end
    cfg_ch[1][2].decim_en = 1;
    for (int w = 0; w < NW; w++) begin
      bcfg[w] = '0; bcfg[w].decim = 2; bcfg[w].wave_af = 40; bcfg[w].wave_rec = 20;
      bcfg[w].params_af = 12; bcfg[w].params_rec = 6;
    end
    bcfg[0].max_seg = 4;
    bcfg[1].comp_en = 1;
    m_ready = '0;
    repeat (4) @(posedge clk); rst_n = 1;
    gps_second(0, 1);
    repeat (10) @(posedge clk);
    run_req = 1;
    wait (tnow == 2000); stall1 = 1;
    wait (tnow == 3000); gps_second(1, 1);
    wait (tnow == 4000); stall1 = 0;
    wait (tnow == 6000); trig_mode = 1; hm_trig_en = 1;
    wait (tnow == 6500); @(negedge clk); ext_in = 1; repeat (4) @(negedge clk); ext_in = 0;
    // holdover: no more pps; the second still advances every TPS samples
    exp_sec = abs_sec;
    wait (tnow == 11000);
    check(abs_sec == exp_sec + 1 || abs_sec == exp_sec + 2, "holdover seconds");
    n_holdover = int'(abs_sec - exp_sec);
    trig_mode = 0; hm_trig_en = 0;
    wait (tnow == 12000); run_req = 0;
    repeat (3000) @(posedge clk);
    check(left[0] == -1 && left[1] == -1 && m_valid == '0, "streams drained");
    check(deadtime > 0, "deadtime counted");
    check(n_busy[1] > 0 && n_pause[0] > 0 && n_resume[0] > 0, "CDM counters");
    $display("mechanisms: segments=%0d words=%0d tsm_events=%0d split_cont=%0d truncated=%0d compressed=%0d decimated=%0d",
             n_seg, n_words, n_tsm_ev, n_cont, n_trunc, n_comp, n_decim);
    $display("mechanisms: busy_clocks=%0d pauses=%0d resumes=%0d missed_triggers=%0d deadtime=%0d stall_clocks=%0d",
             n_busy_clk, n_pause_ev, n_resume_ev, n_missed, deadtime, n_stall_clk);
    $display("mechanisms: ext_triggers=%0d hitmap_triggers=%0d segments_read_in_triggered_mode=%0d n_trig=%0d hit_total=%0d pps=%0d holdover_seconds=%0d",
             n_ext, n_hm, n_trig_seg, n_trig, hit_total, n_pps, n_holdover);
    check(n_seg > 0 && n_tsm_ev >= 6 && n_cont > 0 && n_trunc > 0 && n_comp > 0 && n_decim > 0, "data mechanisms all seen");
    check(n_busy_clk > 0 && n_pause_ev > 0 && n_resume_ev > 0 && n_missed > 0, "busy mechanisms all seen");
    check(n_ext == 1 && n_hm > 0 && n_trig_seg > 0 && n_pps == 2 && n_holdover > 0, "trigger and time mechanisms all seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #400000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
