// tb_fir_filter: checks the time-shared 64-tap FIR against a direct
// convolution computed in the testbench. Random Q1.15 coefficients (kept
// small so the output stays in range most of the time, and some outputs
// clamp), random 16-bit samples, one sample every 4 clocks. Checks every
// output value and the latency: out_valid exactly 5 clocks after in_valid,
// i.e. one output per 4 clocks (62.5 MS/s at 250 MHz).
module tb_fir_filter;
  localparam int TAPS = 64;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  logic [15:0] in_sample = 0, out_sample;
  logic [TAPS*16-1:0] coef;
  int checks = 0, failures = 0;
  int hist [$];
  int sent_cyc [$];
  int cyc = 0;

  fir_filter dut (.*);

  always #2 clk = ~clk;
  always @(posedge clk) cyc++;

  function automatic int expect_out();
    longint acc = 0;
    for (int k = 0; k < TAPS; k++) begin
      longint x = (k < hist.size()) ? hist[hist.size() - 1 - k] : 0;
      acc += x * longint'($signed(coef[k*16 +: 16]));
    end
    acc = acc >>> 15;
    if (acc < 0) acc = 0;
    if (acc > 65535) acc = 65535;
    return int'(acc);
  endfunction

  int exp_q [$];
  always @(posedge clk) begin
    if (out_valid) begin
      int e, sc;
      e  = exp_q.pop_front();
      sc = sent_cyc.pop_front();
      checks += 2;
      if (out_sample !== 16'(e)) begin
        failures++;
        $display("FAIL value: got %0d exp %0d", out_sample, e);
      end
      if (cyc - sc != 5) begin
        failures++;
        $display("FAIL latency %0d", cyc - sc);
      end
    end
  end

  initial begin
    for (int k = 0; k < TAPS; k++) coef[k*16 +: 16] = 16'($urandom_range(0, 2000) - 600);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      in_valid  = 1;
      in_sample = (n % 50 < 5) ? 16'($urandom_range(40000, 65535)) : 16'($urandom_range(0, 3000));
      hist.push_back(int'(in_sample));
      exp_q.push_back(expect_out());
      sent_cyc.push_back(cyc + 1);
      @(negedge clk);
      in_valid = 0;
      repeat (2) @(negedge clk);
    end
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing outputs %0d", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
