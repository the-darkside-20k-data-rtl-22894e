// tb_wfd_channel: one complete channel, from ADC samples to its buffers.
// Three pulses go through three modes: raw packing with the FIR trigger (a
// 4-tap moving average), compression, and decimation by 2 with the raw
// trigger. For every segment read back from the buffers the testbench
// checks: one segment per pulse, the segment covers the pulse, every sample
// (unpacked or decoded here) equals the driven waveform at
// tstamp + i*factor, the header's sample/word counts and flags, and no busy
// or loss.
module tb_wfd_channel;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0, smp_en = 0, smp_ph = 0;
  logic [15:0] raw = 0;
  logic [TSTAMP_W-1:0] tnow = 0;
  ch_cfg_t cfg; board_cfg_t bcfg;
  logic run = 1, veto = 0, trig_mode = 0, ext_trig = 0;
  logic seg_start, over, p_valid, p_pop = 0, wv_empty, wv_pop = 0, almost_full, busy, lost;
  seg_params_t p_data;
  logic [63:0] wv_data;
  int checks = 0, failures = 0, n = 0, nseg = 0;
  int wave [3000];

  wfd_channel #(.RING(64), .MAX_GATE(512), .WAVE_DEPTH(256), .PARAMS_WORDS(32)) dut (
    .clk, .rst_n, .smp_en, .smp_ph, .raw, .tnow, .chan_id(8'd7), .board_id(8'd3), .cfg, .bcfg,
    .run, .veto, .trig_mode, .ext_trig, .lut_we(1'b0), .lut_addr(8'd0), .lut_len(5'd0),
    .lut_code(16'd0), .seg_start, .over, .p_valid, .p_data, .p_pop, .wv_empty, .wv_data, .wv_pop,
    .almost_full, .busy, .lost);

  always #2 clk = ~clk;
  // clock phases: smp_en every 2nd clock, smp_ph toggles every sample
  always @(negedge clk) if (rst_n) begin
    smp_en <= ~smp_en;
    if (!smp_en) begin
      raw <= 16'(wave[n]); tnow <= TSTAMP_W'(n); n <= n + 1; smp_ph <= n[0];
    end
  end

  task automatic check(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  // bit stream decoder for the default code (see delta_huffman_encoder)
  bit bits [$];
  function automatic int getb(inout int pos, input int k);
    int v = 0;
    for (int i = 0; i < k; i++) begin v = (v << 1) | int'(bits[pos]); pos++; end
    return v;
  endfunction

  task automatic read_seg(input int ps, input int pe, input int factor, input bit comp);
    seg_params_t p;
    int ts, ns, nw, pos, prev;
    int smp [$];
    wait (p_valid);
    @(negedge clk);
    p = p_data; p_pop = 1; @(negedge clk); p_pop = 0;
    ts = int'(p.tstamp); ns = int'(p.hdr.nsamples); nw = int'(p.hdr.nwords);
    nseg++;
    check(p.hdr.channel == 7 && p.hdr.board == 3, "ids");
    check(p.hdr.flags.compressed == comp && p.hdr.flags.decimated == (factor > 1), "flags");
    check(ts <= ps && ts + ns * factor > pe, $sformatf("segment [%0d,+%0d) covers pulse %0d..%0d", ts, ns * factor, ps, pe));
    bits = {};
    for (int i = 0; i < nw; i++) begin
      if (!comp) for (int k = 0; k < 4; k++) smp.push_back(int'(wv_data[16*k +: 16]));
      else for (int b = 63; b >= 0; b--) bits.push_back(wv_data[b]);
      wv_pop = 1; @(negedge clk); wv_pop = 0;
    end
    if (comp) begin
      pos = 0; prev = 0;
      for (int i = 0; i < ns; i++) begin
        int z = 0, v, s;
        while (bits[pos] == 0) begin z++; pos++; end
        v = getb(pos, z + 1);
        if (v == 130) s = getb(pos, 16);
        else s = (prev + (((v - 1) % 2 == 0) ? (v - 1) / 2 : -(v / 2))) & 16'hFFFF;
        smp.push_back(s); prev = s;
      end
      check(nw < (ns + 3) / 4, $sformatf("compressed %0d samples into %0d words", ns, nw));
    end else begin
      check(nw == (ns + 3) / 4, $sformatf("raw words %0d for %0d samples", nw, ns));
    end
    for (int i = 0; i < ns; i++) if (smp[i] != wave[ts + i * factor]) begin
      check(0, $sformatf("sample %0d: %0d exp %0d", i, smp[i], wave[ts + i * factor])); break;
    end
    check(1, "samples");
  endtask

  initial begin
    for (int i = 0; i < 3000; i++) wave[i] = 1000 + (i % 3);
    // pulses: rise of 50 counts per sample to 3000, then exponential-like fall
    for (int p = 0; p < 3; p++) begin
      int b;
      b = 300 + 600 * p;
      for (int i = 0; i < 60; i++) wave[b + i] = (i < 4) ? 1000 + 500 * (i + 1) : 1000 + 2000 * 40 / (i + 36);
    end
    cfg = '0; cfg.enable = 1; cfg.fir_en = 1; cfg.pre = 8; cfg.post = 10;
    cfg.thr = 1800; cfg.post_thr = 1200; cfg.tot = 2;
    bcfg = '0; bcfg.decim = 2; bcfg.wave_af = 200; bcfg.params_af = 30; bcfg.wave_rec = 100; bcfg.params_rec = 10;
    for (int k = 0; k < 4; k++) bcfg.coef[k*16 +: 16] = 16'd8192;   // 4-tap average, Q1.15
    repeat (3) @(posedge clk); rst_n = 1;
    read_seg(300, 359, 1, 0);
    bcfg.comp_en = 1;
    read_seg(900, 959, 1, 1);
    bcfg.comp_en = 0; cfg.fir_en = 0; cfg.decim_en = 1;
    read_seg(1500, 1559, 2, 0);
    while (n < 2000) @(posedge clk);
    check(nseg == 3 && !p_valid, "one segment per pulse");
    check(!busy && !lost, "no busy, no loss");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
