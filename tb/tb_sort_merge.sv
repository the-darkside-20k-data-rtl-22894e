// tb_sort_merge: replays the situation of the paper's busy-logic figure on
// four channels. Segment 1 (ch1) starts first and ends last; segments 2
// (ch2) and 3 (ch3) start later and end earlier. They must still leave in
// start order 1, 2, 3. A TSM event follows, then segment 4 (ch2, long) and
// segment 5 (ch3, short, ends first): order 4, 5. The expected word stream
// is built here from the segment contents. Also checks the transfer rate
// (one word per clock once the oldest segment is complete) and the module
// busy at the Sort & Merge threshold when the output is stalled.
module tb_sort_merge;
  import daq_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] seg_start = 0, p_valid, p_pop, wv_empty, wv_pop;
  logic tsm = 0; logic [63:0] tsm_word = 0;
  seg_params_t p_data [N];
  logic [63:0] wv_data [N];
  logic m_valid, m_sop, m_ready = 1, busy, order_lost;
  logic [63:0] m_data;
  logic w_valid [N], seg_done [N];
  logic [63:0] w_data [N];
  seg_params_t seg_p [N];
  int checks = 0, failures = 0, cyc = 0;
  logic [63:0] got [$];
  bit got_sop [$];
  int cnt [N];

  sort_merge #(.N_CH(N), .SM_DEPTH(16), .SM_BUSY(12), .ORDER_DEPTH(8)) dut (
    .clk, .rst_n, .board_id(8'd5), .seg_start, .tsm, .tsm_word, .p_valid, .p_data, .p_pop,
    .wv_empty, .wv_data, .wv_pop, .m_valid, .m_data, .m_sop, .m_ready, .busy, .order_lost);

  for (genvar c = 0; c < N; c++) begin : g
    logic af, bz, ls;
    channel_buffer #(.WAVE_DEPTH(32), .PARAMS_WORDS(16)) u_b (
      .clk, .rst_n, .w_valid(w_valid[c]), .w_data(w_data[c]), .seg_done(seg_done[c]),
      .seg_p(seg_p[c]), .wave_af(16'd30), .params_af(16'd14), .wave_rec(16'd1), .params_rec(16'd1),
      .p_valid(p_valid[c]), .p_data(p_data[c]), .p_pop(p_pop[c]), .wv_empty(wv_empty[c]),
      .wv_data(wv_data[c]), .wv_pop(wv_pop[c]), .almost_full(af), .busy(bz), .lost(ls));
  end

  always #2 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (m_valid && m_ready) begin got.push_back(m_data); got_sop.push_back(m_sop); end
  end

  task automatic check(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic start(input int c);
    @(negedge clk); seg_start[c] = 1; @(negedge clk); seg_start[c] = 0;
  endtask
  // write nw words of segment id on channel c, optionally closing it
  task automatic words(input int c, input int id, input int nw, input bit done);
    for (int i = 0; i < nw; i++) begin
      @(negedge clk);
      w_valid[c] = 1; w_data[c] = 64'(id * 100 + cnt[c]); cnt[c]++;
      seg_done[c] = done && (i == nw - 1);
      seg_p[c] = '0; seg_p[c].hdr.channel = 8'(c); seg_p[c].hdr.nsamples = 16'(id);
      seg_p[c].tstamp = 64'(id);
    end
    @(negedge clk); w_valid[c] = 0; seg_done[c] = 0;
  endtask

  logic [63:0] expq [$];
  function automatic void exp_seg(input int c, input int id, input int nw);
    seg_hdr_t h = '0;
    h.channel = 8'(c); h.nsamples = 16'(id); h.nwords = 16'(nw);
    expq.push_back(64'(h)); expq.push_back(64'(id));
    for (int i = 0; i < nw; i++) expq.push_back(64'(id * 100 + i));
  endfunction

  initial begin
    int t0, n0;
    for (int c = 0; c < N; c++) begin w_valid[c] = 0; seg_done[c] = 0; w_data[c] = 0; seg_p[c] = '0; cnt[c] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    start(1); words(1, 1, 3, 0);
    start(2); start(3);
    cnt[2] = 0; words(2, 2, 2, 1);
    cnt[3] = 0; words(3, 3, 2, 1);
    repeat (20) @(negedge clk);
    check(got.size() == 0, "nothing leaves before the oldest segment ends");
    t0 = cyc; n0 = got.size();
    words(1, 1, 2, 1);
    repeat (12) @(negedge clk);
    check(got.size() >= 7, $sformatf("segment 1 (7 words) out within 14 clocks of its end: %0d", got.size()));
    exp_seg(1, 1, 5); exp_seg(2, 2, 2); exp_seg(3, 3, 2);
    @(negedge clk); tsm = 1; tsm_word = 64'hABCD_0000_0000_1234; @(negedge clk); tsm = 0;
    begin seg_hdr_t h = '0; h.tsm = 1; h.channel = 8'hFF; h.board = 8'd5;
      expq.push_back(64'(h)); expq.push_back(64'hABCD_0000_0000_1234); end
    start(2); start(3);
    cnt[3] = 0; words(3, 5, 1, 1);
    repeat (10) @(negedge clk);
    cnt[2] = 0; words(2, 4, 4, 1);
    exp_seg(2, 4, 4); exp_seg(3, 5, 1);
    repeat (30) @(negedge clk);
    check(got.size() == expq.size(), $sformatf("word count %0d exp %0d", got.size(), expq.size()));
    foreach (expq[i]) if (i < got.size() && got[i] != expq[i]) begin
      check(0, $sformatf("word %0d: %h exp %h", i, got[i], expq[i])); break;
    end
    check(got_sop[0] && !got_sop[1] && got_sop[7], "sop marks");
    // busy: stall the output, send 14 words on ch0
    m_ready = 0;
    start(0); cnt[0] = 0; words(0, 6, 14, 1);
    repeat (30) @(negedge clk);
    check(busy, "module busy at the threshold");
    m_ready = 1;
    repeat (30) @(negedge clk);
    check(!busy && !order_lost, "busy released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #20000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
