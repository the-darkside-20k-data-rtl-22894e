// tb_hitmap: drives over-threshold bits on 8 channels and checks that each
// 10-sample window (shortened from 150) produces the OR of the bits seen in
// it, one hit_valid per window, exactly WIN samples apart, and that sync
// restarts the window.
module tb_hitmap;
  localparam int N = 8, WIN = 10;
  logic clk = 0, rst_n = 0, smp_en = 0, sync = 0;
  logic [N-1:0] over = 0, map;
  logic hit_valid;
  int checks = 0, failures = 0, smp = 0, last_v = -1;
  logic [N-1:0] acc = 0;
  logic [N-1:0] expq [$];

  hitmap #(.N_CH(N), .WIN(WIN)) dut (.*);
  always #2 clk = ~clk;

  task automatic check(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  always @(posedge clk) if (rst_n && hit_valid) begin
    check(expq.size() > 0 && map == expq[0], $sformatf("map %b exp %b", map, expq.size() ? expq[0] : 'x));
    if (expq.size()) void'(expq.pop_front());
    if (last_v >= 0) check(smp - last_v == WIN, $sformatf("window %0d samples", smp - last_v));
    last_v = smp;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int w = 0; w < 6; w++) begin
      acc = 0;
      for (int s = 0; s < WIN; s++) begin
        @(negedge clk); smp_en = 1;
        over = ($urandom_range(0, 9) == 0) ? N'(1 << $urandom_range(0, N - 1)) : '0;
        acc |= over;
        if (s == WIN - 1) expq.push_back(acc);
        @(negedge clk); smp_en = 0; over = 0; smp++;
      end
    end
    // sync in the middle of a window: partial bits are dropped, window restarts
    @(negedge clk); smp_en = 1; over = 8'hFF; @(negedge clk); smp_en = 0; over = 0; smp++;
    @(negedge clk); sync = 1; @(negedge clk); sync = 0; last_v = -1;
    for (int s = 0; s < WIN; s++) begin
      @(negedge clk); smp_en = 1; over = (s == 3) ? 8'h11 : 8'h00;
      @(negedge clk); smp_en = 0; over = 0; smp++;
    end
    expq.push_back(8'h11);
    repeat (4) @(negedge clk);
    check(expq.size() == 0, "all windows reported");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
