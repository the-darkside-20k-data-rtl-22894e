// tb_daq_two_boards: the front end with two digitisers at full size: one
// crate reduced to one TPC and one veto board, each with all 64 channels and
// every buffer at its full depth (WAVE 4096, PARAMS 512, Sort & Merge 1024,
// ring 1024), 1 s Time Slices, on the same GDM and CDM logic as the full
// system. A short smoke run: reset, a GPS second, run start (sync, run, T0
// TSM), one pulse on three channels (board 0 channel 5, board 1 channels 33
// and 63), then read both output streams. Checks: the absolute second after
// the pps; every board sends the T0 TSM event with ts_id 0 and the same
// sample time; exactly the three pulsed channels send a segment, with the
// right board and channel numbers, a window around the pulse and the pulse
// peak in the data; no loss and no pause.
module tb_daq_two_boards;
  import daq_pkg::*;
  localparam int NW = 2, NC = 64;
  logic clk = 0, rst_n = 0;
  logic pps = 0, gps_valid = 0, run_req = 0;
  ch_cfg_t cfg_ch [NW][NC];
  board_cfg_t bcfg [NW];
  logic [15:0] adc [NW][NC];
  logic [NW-1:0] m_valid, m_sop, lost;
  logic [NW-1:0] m_ready = '1;
  logic [63:0] m_data [NW];
  ctrl_pkt_t ctrl;
  logic [39:0] abs_sec; logic [31:0] sub_tick;
  logic evt_pause, evt_resume;
  logic [71:0] pause_time, resume_time, run_t0;
  logic [47:0] deadtime, hit_total;
  logic [31:0] n_trig, n_busy [2], n_pause [2], n_resume [2];
  int checks = 0, failures = 0;

  daq_top #(.N_CRATE(1), .N_TPC(1), .N_VETO(1)) dut (
    .clk, .rst_n, .pps, .gps_valid, .gps_prev_sec(40'd1_700_000_000), .gps_bias_ns(32'sd0),
    .delay_ticks(16'd0), .run_req, .trig_mode(1'b0), .ext_in(1'b0), .hm_trig_en(1'b0),
    .hm_thr(16'd0), .cfg_ch, .bcfg, .lut_we(1'b0), .lut_addr(8'd0), .lut_len(5'd0),
    .lut_code(16'd0), .adc, .m_valid, .m_data, .m_sop, .m_ready, .lost, .ctrl, .abs_sec,
    .sub_tick, .evt_pause, .evt_resume, .run_t0, .pause_time, .resume_time, .deadtime, .hit_total,
    .n_trig, .n_busy, .n_pause, .n_resume);

  always #2 clk = ~clk;

  task automatic check(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  localparam longint PT = 300;   // pulse time, samples after sync
  int pb [3] = '{0, 1, 1};
  int pc [3] = '{5, 33, 63};
  wire [TSTAMP_W-1:0] tnow = dut.g_crate[0].g_wfd[0].u_wfd.tnow;
  always_comb begin
    for (int w = 0; w < NW; w++) for (int c = 0; c < NC; c++) adc[w][c] = 16'd400;
    for (int i = 0; i < 3; i++)
      if (longint'(tnow) >= PT && longint'(tnow) < PT + 20)
        adc[pb[i]][pc[i]] = 16'(400 + 200 * (20 - (longint'(tnow) - PT)));
  end

  // stream parser: header, second word, nwords waveform words
  int left [NW], nseg = 0, ntsm = 0;
  seg_hdr_t hdr [NW];
  logic [63:0] w1 [NW];
  logic [15:0] peak [NW];
  longint t0 = -1;
  always @(posedge clk) if (rst_n) begin
    for (int w = 0; w < NW; w++) if (m_valid[w] && m_ready[w]) begin
      if (left[w] == -1) begin
        check(m_sop[w], "sop");
        hdr[w] = m_data[w]; left[w] = -2; peak[w] = 0;
      end else if (left[w] == -2) begin
        w1[w] = m_data[w]; left[w] = int'(hdr[w].nwords);
      end else begin
        for (int j = 0; j < 4; j++) if (m_data[w][16*j +: 16] > peak[w]) peak[w] = m_data[w][16*j +: 16];
        left[w]--;
      end
      if (left[w] == 0) begin
        left[w] = -1;
        if (hdr[w].tsm) begin
          ntsm++;
          if (t0 < 0) t0 = longint'(w1[w][47:0]);
          check(hdr[w].board == w && w1[w][63:48] == 0 && longint'(w1[w][47:0]) == t0, "T0 TSM");
        end else begin
          bit ok;
          ok = 0;
          nseg++;
          for (int i = 0; i < 3; i++) if (pb[i] == w && pc[i] == int'(hdr[w].channel)) ok = 1;
          check(ok && hdr[w].board == w, $sformatf("segment from pulsed channel (b%0d ch%0d)", w, hdr[w].channel));
          check(longint'(w1[w]) <= PT && longint'(w1[w]) + longint'(hdr[w].nsamples) > PT + 20, "window");
          check(peak[w] == 16'(400 + 200 * 20), "peak");
        end
      end
    end
  end

  initial begin
    for (int w = 0; w < NW; w++) begin
      left[w] = -1;
      for (int c = 0; c < NC; c++) begin
        cfg_ch[w][c] = '0; cfg_ch[w][c].enable = 1; cfg_ch[w][c].veto_en = 1;
        cfg_ch[w][c].pre = 50; cfg_ch[w][c].post = 50;
        cfg_ch[w][c].thr = 1000; cfg_ch[w][c].post_thr = 600; cfg_ch[w][c].tot = 2;
      end
      bcfg[w] = '0; bcfg[w].decim = 1; bcfg[w].wave_af = 3500; bcfg[w].wave_rec = 2000;
      bcfg[w].params_af = 400; bcfg[w].params_rec = 200;
    end
    repeat (4) @(posedge clk); rst_n = 1;
    @(negedge clk); gps_valid = 1; @(negedge clk); gps_valid = 0;
    @(negedge clk); pps = 1; @(negedge clk); pps = 0;
    repeat (3) @(negedge clk);
    check(abs_sec == 40'd1_700_000_001, "absolute second");
    run_req = 1;
    repeat (2000) @(posedge clk);
    check(ntsm == NW, $sformatf("T0 TSM from every board (%0d)", ntsm));
    check(nseg == 3, $sformatf("three segments (%0d)", nseg));
    check(lost == '0 && deadtime == 0, "no loss, no pause");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
