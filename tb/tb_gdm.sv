// tb_gdm: checks the GDM's run start (sync, then run, then the T0 marker,
// with the absolute time of the sync kept in run_t0),
// the TSM period (TS_LEN samples = 2*TS_LEN clocks) and ts_id count, the
// absolute time (previous packet time + 1 at the pulse, sub-second start at
// the delay correction, wrap without pulses), the veto following busy one
// clock later with pause/resume timestamps and deadtime, and both trigger
// sources in triggered mode (none in triggerless mode).
module tb_gdm;
  import daq_pkg::*;
  localparam int NC = 2, NW = 2, NCH = 4, TSL = 20, TPS = 100;
  logic clk = 0, rst_n = 0, pps = 0, gps_valid = 0;
  logic [39:0] gps_prev_sec = 0;
  logic signed [31:0] gps_bias_ns = 0;
  logic [15:0] delay_ticks = 0;
  logic run_req = 0, trig_mode = 0, ext_in = 0, hm_trig_en = 0;
  logic [15:0] hm_thr = 3;
  logic [NC-1:0] cdm_busy = 0, cdm_hm_valid = 0;
  logic [63:0] hitmaps [NW];
  ctrl_pkt_t ctrl;
  logic [39:0] abs_sec; logic [31:0] sub_tick;
  logic evt_pause, evt_resume; logic [71:0] pause_time, resume_time, run_t0;
  logic [47:0] deadtime, hit_total; logic [31:0] n_trig;
  int checks = 0, failures = 0, cyc = 0;
  int tsm_cyc [$]; int tsm_id [$];
  int n_ext = 0; logic [47:0] last_word;

  gdm #(.N_CDM(NC), .N_WFD(NW), .N_CH(NCH), .TS_LEN(TSL), .TICKS_PER_SEC(TPS)) dut (.*);
  always #2 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (ctrl.tsm) begin tsm_cyc.push_back(cyc); tsm_id.push_back(int'(ctrl.ts_id)); end
    if (ctrl.ext_trig) begin n_ext++; last_word = ctrl.trig_word; end
  end
  task automatic check(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    hitmaps[0] = 0; hitmaps[1] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // ---- time ----
    @(negedge clk); gps_valid = 1; gps_prev_sec = 1000; gps_bias_ns = 24; delay_ticks = 5;
    @(negedge clk); gps_valid = 0; pps = 1; @(negedge clk); pps = 0;
    check(abs_sec == 1001 && sub_tick == 8, $sformatf("pps: %0d s %0d ticks", abs_sec, sub_tick));
    repeat (2 * 92) @(negedge clk);
    check(abs_sec == 1002 && sub_tick == 0, $sformatf("holdover wrap: %0d s %0d ticks", abs_sec, sub_tick));
    // ---- run start ----
    @(negedge clk); run_req = 1;
    @(posedge ctrl.sync); @(negedge clk);
    check(!ctrl.run && !ctrl.tsm, "sync first");
    check(run_t0[71:32] == 1002 && run_t0[31:0] > 0 && run_t0[31:0] < 8,
          $sformatf("run t0 %0d s %0d ticks", run_t0[71:32], run_t0[31:0]));
    @(negedge clk); check(ctrl.run && !ctrl.tsm, "then run");
    @(negedge clk); check(ctrl.run && ctrl.tsm && ctrl.ts_id == 0, "then T0 marker");
    repeat (2 * TSL * 3 + 4) @(negedge clk);
    check(tsm_cyc.size() == 4, $sformatf("%0d markers", tsm_cyc.size()));
    for (int i = 1; i < tsm_cyc.size(); i++) begin
      check(tsm_cyc[i] - tsm_cyc[i-1] == 2 * TSL, $sformatf("TSM period %0d clocks", tsm_cyc[i] - tsm_cyc[i-1]));
      check(tsm_id[i] == i, "ts_id counts");
    end
    // ---- busy / veto ----
    @(negedge clk); cdm_busy = 2'b10;
    @(negedge clk); check(ctrl.veto && evt_pause, "veto one clock after busy");
    repeat (9) @(negedge clk); cdm_busy = 0;
    @(negedge clk); check(!ctrl.veto && evt_resume, "resume");
    check(deadtime == 5, $sformatf("deadtime %0d samples", deadtime));
    check(resume_time > pause_time, "pause/resume timestamps ordered");
    // ---- triggers ----
    @(negedge clk); ext_in = 1; @(negedge clk); ext_in = 0; repeat (2) @(negedge clk);
    check(n_ext == 0, "no external trigger in triggerless mode");
    trig_mode = 1;
    @(negedge clk); ext_in = 1; @(negedge clk); ext_in = 0; @(negedge clk);
    check(n_ext == 1 && last_word == '1, "external trigger to all sectors");
    hm_trig_en = 1;
    hitmaps[0] = 64'b0011; hitmaps[1] = 64'b0000;
    @(negedge clk); cdm_hm_valid = 2'b11; @(negedge clk); cdm_hm_valid = 0; @(negedge clk);
    check(n_ext == 1, "2 hits below multiplicity 3");
    hitmaps[0] = 64'b0000; hitmaps[1] = 64'b0111;
    @(negedge clk); cdm_hm_valid = 2'b11; @(negedge clk); cdm_hm_valid = 0; @(negedge clk);
    check(n_ext == 2 && last_word == 48'b10, $sformatf("hit-map trigger word %b", last_word[3:0]));
    check(hit_total == 5 && n_trig == 2, $sformatf("hit_total %0d n_trig %0d", hit_total, n_trig));
    run_req = 0; repeat (2) @(negedge clk);
    check(!ctrl.run, "run stops");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #20000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
