// tb_channel_buffer: writes segments of known words into a small buffer
// (WAVE 16 words, PARAMS 8 words) and checks the header's word count, the
// word order on readback, the busy hysteresis (set at the almost-full
// threshold, held until both levels are below the recovery levels), the
// PARAMS almost-full path, and the lost flag when WAVE overflows.
module tb_channel_buffer;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0;
  logic w_valid = 0, seg_done = 0, p_pop = 0, wv_pop = 0;
  logic [63:0] w_data = 0;
  seg_params_t seg_p, p_data;
  logic [15:0] wave_af = 12, params_af = 6, wave_rec = 4, params_rec = 2;
  logic p_valid, wv_empty, almost_full, busy, lost;
  logic [63:0] wv_data;
  int checks = 0, failures = 0;

  channel_buffer #(.WAVE_DEPTH(16), .PARAMS_WORDS(8)) dut (.*);
  always #2 clk = ~clk;

  task automatic check(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic write_seg(input int id, input int nw);
    for (int i = 0; i < nw; i++) begin
      @(negedge clk);
      w_valid = 1; w_data = 64'(id * 1000 + i);
      seg_done = (i == nw - 1);
      seg_p = '0; seg_p.hdr.channel = 8'(id); seg_p.tstamp = 64'(id * 7);
    end
    @(negedge clk); w_valid = 0; seg_done = 0;
  endtask

  task automatic read_seg(input int id, input int nw);
    check(p_valid, "params present");
    check(p_data.hdr.nwords == 16'(nw), $sformatf("nwords %0d exp %0d", p_data.hdr.nwords, nw));
    check(p_data.hdr.channel == 8'(id) && p_data.tstamp == 64'(id * 7), "params content");
    @(negedge clk); p_pop = 1; @(negedge clk); p_pop = 0;
    for (int i = 0; i < nw; i++) begin
      check(!wv_empty && wv_data == 64'(id * 1000 + i), $sformatf("word %0d of seg %0d", i, id));
      wv_pop = 1; @(negedge clk); wv_pop = 0;
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    write_seg(1, 5);
    write_seg(2, 3);
    @(negedge clk);
    check(!busy, "not busy at 8 words");
    write_seg(3, 4);               // 12 words: almost full -> busy
    @(negedge clk);
    check(busy && almost_full, "busy at 12 words");
    read_seg(1, 5);                // 7 words left, 4 params words: still busy
    check(busy && !almost_full, "busy held above recovery");
    read_seg(2, 3);                // 4 words, 2 params words: still not below recovery
    check(busy, "busy held at recovery level");
    read_seg(3, 4);                // empty
    @(negedge clk);
    check(!busy, "busy released");
    // PARAMS almost full: 3 one-word segments = 6 params words
    write_seg(4, 1); write_seg(5, 1); write_seg(6, 1);
    @(negedge clk);
    check(busy, "busy from PARAMS");
    read_seg(4, 1); read_seg(5, 1); read_seg(6, 1);
    @(negedge clk);
    check(!busy && !lost, "released, nothing lost");
    // overflow: 20 words into 16
    write_seg(7, 20);
    @(negedge clk);
    check(lost, "lost flag on overflow");
    check(p_data.hdr.nwords == 16'd16, $sformatf("stored words %0d", p_data.hdr.nwords));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
