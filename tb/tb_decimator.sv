// tb_decimator: feeds segments of known samples (value = index in segment
// + 100*segment) and checks which samples come out, the end-of-segment beat
// (also when the last sample is dropped), and the decimated flag, for
// factor 3 and for decimation disabled.
module tb_decimator;
  import daq_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  logic [7:0] factor = 3;
  seg_beat_t in, o;
  int checks = 0, failures = 0;
  int got [$];
  int eofs = 0, flagged = 0;

  decimator dut (.*);
  always #2 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (o.valid) begin
      got.push_back(int'(o.sample));
      if (o.sof && o.flags.decimated) flagged++;
    end
    if (o.eof) eofs++;
  end

  task automatic seg(input int id, input int len);
    for (int i = 0; i < len; i++) begin
      @(negedge clk);
      in = '0; in.valid = 1; in.sof = (i == 0); in.eof = (i == len - 1);
      in.sample = 16'(100 * id + i);
      @(negedge clk);
      in = '0;
    end
  endtask

  task automatic check(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    int e [$];
    in = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    en = 1;
    seg(1, 10);        // keeps 0,3,6,9
    seg(2, 8);         // keeps 0,3,6, eof alone
    en = 0;
    seg(3, 4);         // all
    repeat (4) @(posedge clk);
    e = '{100, 103, 106, 109, 200, 203, 206, 300, 301, 302, 303};
    check(got.size() == e.size(), $sformatf("count %0d", got.size()));
    foreach (e[i]) if (i < got.size()) check(got[i] == e[i], $sformatf("sample %0d: %0d exp %0d", i, got[i], e[i]));
    check(eofs == 3, $sformatf("eofs %0d", eofs));
    check(flagged == 2, $sformatf("flagged %0d", flagged));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
