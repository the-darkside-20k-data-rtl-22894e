// tb_daw_trigger: directed checks of the Dynamic Acquisition Window. Each
// scenario drives a square pulse, and the expected segment is worked out by
// hand from the rules: the trigger is accepted on the tot-th sample above the
// threshold; the gate closes on the first sample below the post-trigger
// threshold; the segment spans [accept - pre, close + post]. The scenarios
// cover a plain pulse, extension by a second pulse, a veto (no segment, then
// missed=1 in the next header), splitting at max_seg, truncation at
// MAX_GATE, triggered mode (external trigger opens, self trigger ignored),
// and a masked channel. For every segment the start time, length, samples,
// flags and output latency (pre+1 samples) are checked.
module tb_daw_trigger;
  import daq_pkg::*;
  localparam int PRE = 5, POST = 4, TOT = 3, MAXG = 32;
  logic clk = 0, rst_n = 0, smp_en = 0;
  logic [15:0] raw = 100;
  logic [TSTAMP_W-1:0] tnow = 0;
  ch_cfg_t cfg;
  logic [15:0] max_seg = 0;
  logic run = 1, veto = 0, trig_mode = 0, ext_trig = 0;
  seg_beat_t o;
  logic over;
  int checks = 0, failures = 0;
  int wave [2000];
  int n = 0;

  daw_trigger #(.RING(64), .MAX_GATE(MAXG)) dut (
    .clk, .rst_n, .smp_en, .raw, .trig_val(raw), .tnow, .cfg, .max_seg, .run, .veto,
    .trig_mode, .ext_trig, .o, .over);

  always #2 clk = ~clk;

  // expected segments: start, length, cont, truncated, missed
  typedef struct { int start; int len; bit cont; bit trunc; int missed; } seg_t;
  seg_t exp_q [$];
  // collected
  int cur_start, cur_len, cur_missed; bit cur_cont, cur_trunc, open_seg;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (n=%0d)", what, n); end
  endtask

  always @(posedge clk) if (rst_n && o.valid) begin
    if (o.sof) begin
      cur_start = int'(o.tstamp); cur_len = 0; cur_cont = o.flags.cont;
      cur_missed = o.missed; open_seg = 1;
      // latency: the first sample of a segment leaves pre+1 samples later
      check(n - 1 == cur_start + PRE + 1 || cur_cont, $sformatf("latency start=%0d n=%0d", cur_start, n));
    end
    check(int'(o.sample) == wave[cur_start + cur_len], "sample value");
    cur_len++;
    if (o.eof) begin
      seg_t e;
      cur_trunc = o.flags.truncated;
      if (exp_q.size() == 0) begin
        check(0, $sformatf("unexpected segment start=%0d len=%0d", cur_start, cur_len));
      end else begin
        e = exp_q.pop_front();
        check(cur_start == e.start, $sformatf("start %0d exp %0d", cur_start, e.start));
        check(cur_len == e.len, $sformatf("len %0d exp %0d (start %0d)", cur_len, e.len, cur_start));
        check(cur_cont == e.cont, "cont flag");
        check(cur_trunc == e.trunc, "truncated flag");
        check(cur_missed == e.missed, $sformatf("missed %0d exp %0d", cur_missed, e.missed));
      end
    end
  end

  // sample stream: one sample every 2 clocks
  always @(negedge clk) begin
    if (rst_n) begin
      smp_en <= ~smp_en;
      if (!smp_en) begin
        raw  <= 16'(wave[n]);
        tnow <= TSTAMP_W'(n);
        n    <= n + 1;
      end
    end
  end

  task automatic pulse(input int a, input int b, input int v = 2000);
    for (int i = a; i <= b; i++) wave[i] = v;
  endtask
  task automatic expect_seg(input int s, input int l, input bit c = 0, input bit t = 0, input int m = 0);
    seg_t e; e.start = s; e.len = l; e.cont = c; e.trunc = t; e.missed = m;
    exp_q.push_back(e);
  endtask
  task automatic wait_n(input int k);
    while (n < k) @(posedge clk);
  endtask

  initial begin
    for (int i = 0; i < 2000; i++) wave[i] = 100;
    cfg = '0;
    cfg.enable = 1; cfg.veto_en = 1; cfg.pre = PRE; cfg.post = POST;
    cfg.thr = 1000; cfg.post_thr = 800; cfg.tot = TOT;
    // A: plain pulse 100..109 -> accept 102, close 110 -> [97,114]
    pulse(100, 109); expect_seg(97, 18);
    // B: extension 200..205, 208..212 -> accept 202, close 213 -> [197,217]
    pulse(200, 205); pulse(208, 212); expect_seg(197, 21);
    // C: vetoed pulse 300..309, then 400..409 -> [397,414], missed 1
    pulse(300, 309); pulse(400, 409); expect_seg(397, 18, 0, 0, 1);
    // D: split at 8 samples: pulse 500..519 -> [497,524] = 28 samples
    pulse(500, 519);
    expect_seg(497, 8); expect_seg(505, 8, 1); expect_seg(513, 8, 1); expect_seg(521, 4, 1);
    // E: truncation: pulse 600..699 -> accept 602, capped at 634 -> [597,634]
    pulse(600, 699); expect_seg(597, 38, 0, 1);
    // F: triggered mode: ext trigger at 800 -> [795,804]; pulse 850..860 ignored
    pulse(850, 860); expect_seg(795, 10);
    // G: masked channel: pulse 900..910 ignored
    pulse(900, 910);
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait_n(290); veto = 1;
    wait_n(320); veto = 0;
    wait_n(490); max_seg = 2;
    wait_n(540); max_seg = 0;
    wait_n(780); trig_mode = 1;
    wait_n(800);
    @(negedge clk); ext_trig = 1; @(negedge clk); @(negedge clk); ext_trig = 0;
    wait_n(890); cfg.enable = 0;
    wait_n(1000);
    check(exp_q.size() == 0, $sformatf("%0d expected segments missing", exp_q.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
