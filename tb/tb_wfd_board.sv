// tb_wfd_board: one digitiser board with 4 channels and small buffers.
// Sequence: sync, run, a TSM (ts_id 5), self-triggered pulses on channels 1
// and 3 (3 samples apart) and later on channel 0, then triggered mode with
// an external trigger for another board (ignored) and one for this board.
// A reader with a random m_ready parses the output stream into events.
// Checks: TSM event format and time, segment order and headers, word
// counts, sample content at the pulse peak, the external-trigger segments
// (all 4 channels, common start time t-pre), the hit map, and no
// busy/loss.
module tb_wfd_board;
  import daq_pkg::*;
  localparam int N = 4, PRE = 6, POST = 6;
  logic clk = 0, rst_n = 0;
  logic [15:0] adc [N];
  ctrl_pkt_t ctrl = '0;
  ch_cfg_t cfg_ch [N];
  board_cfg_t bcfg;
  wfd_status_t status;
  logic m_valid, m_sop, m_ready = 0, lost;
  logic [63:0] m_data;
  int checks = 0, failures = 0, hm_seen = 0, busy_seen = 0;

  wfd_board #(.N_CH(N), .RING(64), .MAX_GATE(256), .WAVE_DEPTH(128), .PARAMS_WORDS(16),
              .SM_DEPTH(256), .SM_BUSY(240), .ORDER_DEPTH(16), .HIT_WIN(150)) dut (
    .clk, .rst_n, .board_id(8'd2), .adc, .ctrl, .cfg_ch, .bcfg, .lut_we(1'b0), .lut_addr(8'd0),
    .lut_len(5'd0), .lut_code(16'd0), .status, .m_valid, .m_data, .m_sop, .m_ready, .lost);

  always #2 clk = ~clk;

  task automatic check(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  // pulse start (sample number) per channel, -1 = none
  int pstart [N] = '{400, 200, -1, 203};
  function automatic logic [15:0] wf(int c, longint t);
    longint d = t - pstart[c];
    if (pstart[c] < 0 || d < 0 || d >= 30) return 16'(500 + c);
    return (d < 3) ? 16'(500 + 1000 * (d + 1)) : 16'(500 + 3000 * 10 / (d + 7));
  endfunction
  always_comb for (int c = 0; c < N; c++) adc[c] = wf(c, longint'(dut.tnow));

  // output stream parser
  typedef struct { seg_hdr_t h; logic [63:0] w1; logic [63:0] wv [$]; } ev_t;
  ev_t evs [$];
  ev_t cur;
  int left = -1;
  always @(posedge clk) if (rst_n) begin
    m_ready <= ($urandom_range(3) != 0);
    if (status.hit_valid && status.hitmap[3:0] == 4'b1010) hm_seen++;
    if (status.busy) busy_seen++;
    if (m_valid && m_ready) begin
      if (left == -1) begin
        check(m_sop, "sop on header");
        cur.h = m_data; cur.wv = {}; left = -2;
      end else begin
        check(!m_sop, "no sop inside event");
        if (left == -2) begin cur.w1 = m_data; left = int'(cur.h.nwords); end
        else begin cur.wv.push_back(m_data); left--; end
      end
      if (left == 0) begin evs.push_back(cur); left = -1; end
    end
  end

  task automatic pulse(input string f, input logic [47:0] tw = '0);
    @(negedge clk);
    if (f == "sync") ctrl.sync = 1;
    if (f == "tsm") ctrl.tsm = 1;
    if (f == "ext") begin ctrl.ext_trig = 1; ctrl.trig_word = tw; end
    @(negedge clk);
    ctrl.sync = 0; ctrl.tsm = 0; ctrl.ext_trig = 0;
  endtask

  initial begin
    longint t_tsm, t_ext;
    for (int c = 0; c < N; c++) begin
      cfg_ch[c] = '0; cfg_ch[c].enable = 1; cfg_ch[c].pre = PRE; cfg_ch[c].post = POST;
      cfg_ch[c].thr = 1200; cfg_ch[c].post_thr = 900; cfg_ch[c].tot = 2;
    end
    bcfg = '0; bcfg.decim = 1; bcfg.wave_af = 100; bcfg.params_af = 12;
    bcfg.wave_rec = 50; bcfg.params_rec = 6;
    repeat (3) @(posedge clk); rst_n = 1;
    pulse("sync"); ctrl.run = 1;
    repeat (200) @(posedge clk);
    ctrl.ts_id = 5; t_tsm = longint'(dut.tnow); pulse("tsm");
    wait (dut.tnow == 700);
    ctrl.trig_mode = 1;
    pulse("ext", 48'b1);          // board 0 only: ignored here
    wait (dut.tnow == 800);
    t_ext = longint'(dut.tnow); pulse("ext", 48'b100);
    wait (dut.tnow == 1100);
    // expected: TSM, ch1, ch3, ch0, then 4 external-trigger segments
    check(evs.size() == 8, $sformatf("8 events, got %0d", evs.size()));
    if (evs.size() == 8) begin
      check(evs[0].h.tsm && evs[0].h.channel == 8'hFF && evs[0].h.board == 2 && evs[0].h.nwords == 0, "TSM header");
      check(evs[0].w1[63:48] == 5 && longint'(evs[0].w1[47:0]) - t_tsm inside {[0:2]}, "TSM word: id and time");
      check(evs[1].h.channel == 1 && evs[2].h.channel == 3 && evs[3].h.channel == 0, "start order 1,3,0");
      for (int i = 1; i < 4; i++) begin
        int c;
        longint ts;
        logic [15:0] peak;
        c = int'(evs[i].h.channel); ts = longint'(evs[i].w1); peak = 0;
        check(!evs[i].h.tsm && evs[i].h.board == 2, "segment header");
        check(evs[i].h.nwords == (evs[i].h.nsamples + 3) / 4, "word count");
        check(ts <= pstart[c] && ts + evs[i].h.nsamples > pstart[c] + 10, $sformatf("ch%0d window", c));
        foreach (evs[i].wv[k]) for (int j = 0; j < 4; j++) if (evs[i].wv[k][16*j +: 16] > peak) peak = evs[i].wv[k][16*j +: 16];
        check(peak == 3500, $sformatf("ch%0d peak %0d", c, peak));
      end
      for (int i = 4; i < 8; i++) begin
        check(longint'(evs[i].w1) - (t_ext - PRE) inside {[0:2]}, $sformatf("ext segment start %0d vs %0d", evs[i].w1, t_ext - PRE));
        check(evs[i].h.nsamples >= PRE + POST, "ext segment length");
      end
      check(evs[4].w1 == evs[5].w1 && evs[5].w1 == evs[6].w1 && evs[6].w1 == evs[7].w1, "common ext start");
    end
    check(hm_seen == 1, "hit map {1,3} seen once");
    check(busy_seen == 0 && !lost, "no busy, no loss");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
