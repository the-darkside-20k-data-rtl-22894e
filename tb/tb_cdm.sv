// tb_cdm: checks that the CDM passes control packets down with one clock of
// latency, ORs the busy of its digitisers, forwards hit maps, and counts busy
// rises, pauses (veto rises) and resumes (veto falls).
module tb_cdm;
  import daq_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  ctrl_pkt_t ctrl_in = '0, ctrl_out;
  wfd_status_t st_in [N];
  logic busy_out, hm_valid_out;
  logic [63:0] hm_out [N];
  logic [31:0] n_busy, n_pause, n_resume;
  int checks = 0, failures = 0;

  cdm #(.N_WFD(N)) dut (.*);
  always #2 clk = ~clk;
  task automatic check(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    for (int i = 0; i < N; i++) st_in[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 20; k++) begin
      ctrl_pkt_t p;
      @(negedge clk);
      p = '0; p.ts_id = $urandom; p.trig_word = {$urandom, $urandom};
      p.tsm = k[0]; p.run = 1;
      ctrl_in = p;
      @(negedge clk);
      check(ctrl_out == p, "packet forwarded after one clock");
    end
    // busy OR and counting: two busy episodes, from different boards
    @(negedge clk); st_in[1].busy = 1; @(negedge clk); check(busy_out, "busy from board 1");
    st_in[2].busy = 1; st_in[1].busy = 0; @(negedge clk); check(busy_out, "busy from board 2");
    st_in[2].busy = 0; @(negedge clk); check(!busy_out, "busy cleared");
    st_in[0].busy = 1; @(negedge clk); st_in[0].busy = 0; @(negedge clk);
    check(n_busy == 2, $sformatf("busy count %0d", n_busy));
    // pause / resume
    ctrl_in.veto = 1; repeat (3) @(negedge clk); ctrl_in.veto = 0; repeat (2) @(negedge clk);
    ctrl_in.veto = 1; @(negedge clk); ctrl_in.veto = 0; repeat (2) @(negedge clk);
    check(n_pause == 2 && n_resume == 2, $sformatf("pause %0d resume %0d", n_pause, n_resume));
    // hit maps
    st_in[0].hit_valid = 1; st_in[0].hitmap = 64'h1234; st_in[2].hit_valid = 1; st_in[2].hitmap = 64'h8000_0000_0000_0001;
    @(negedge clk); st_in[0].hit_valid = 0; st_in[2].hit_valid = 0;
    check(hm_valid_out && hm_out[0] == 64'h1234 && hm_out[2] == 64'h8000_0000_0000_0001, "hit maps forwarded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
