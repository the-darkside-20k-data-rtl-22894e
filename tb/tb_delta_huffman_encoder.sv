// tb_delta_huffman_encoder: compresses segments and decodes the output with a
// decoder written here from the code definition: order-0 exp-Golomb of the
// zigzag index plus one, 130 = escape followed by the raw 16-bit sample,
// MSB first, the first residual of a segment taken against 0. It checks that
// every sample decodes back, that each segment ends with out_last, that the
// last word appears within 5 clocks of the closing beat, and that a smooth
// waveform compresses by more than 2. It also rewrites one table entry and
// checks that the new code is used.
module tb_delta_huffman_encoder;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0, in_eof = 0;
  logic [1:0] in_n = 0;
  logic [15:0] in_s0 = 0, in_s1 = 0;
  logic lut_we = 0; logic [7:0] lut_addr = 0; logic [4:0] lut_len = 0; logic [15:0] lut_code = 0;
  logic out_valid, out_last;
  logic [63:0] out_word;
  int checks = 0, failures = 0;
  int cyc = 0, last_cyc = 0, eof_cyc = 0;
  bit bits [$];
  int nlast = 0;

  delta_huffman_encoder dut (.*);
  always #2 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (out_valid) for (int b = 63; b >= 0; b--) bits.push_back(out_word[b]);
    if (out_last) begin nlast++; last_cyc = cyc; end
  end

  task automatic check(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  function automatic int getbits(inout int pos, input int k);
    int v = 0;
    for (int i = 0; i < k; i++) begin v = (v << 1) | int'(bits[pos]); pos++; end
    return v;
  endfunction

  // decode one segment of len samples from bit position pos; words are padded
  function automatic void decode(inout int pos, input int len, output int dec [$]);
    int prev = 0;
    dec = {};
    for (int i = 0; i < len; i++) begin
      int z = 0, v, r, s;
      while (pos < bits.size() && bits[pos] == 0) begin z++; pos++; end
      v = getbits(pos, z + 1);
      if (v == 130) s = getbits(pos, 16);
      else begin
        r = ((v - 1) % 2 == 0) ? (v - 1) / 2 : -(v / 2);
        s = (prev + r) & 16'hFFFF;
      end
      dec.push_back(s);
      prev = s;
    end
    pos = ((pos + 63) / 64) * 64;   // skip the padding of the last word
  endfunction

  task automatic send_seg(input int smp [$]);
    for (int i = 0; i < smp.size(); i += 2) begin
      @(negedge clk);
      in_valid = 1; in_sof = (i == 0);
      in_n = (i + 1 < smp.size()) ? 2'd2 : 2'd1;
      in_s0 = 16'(smp[i]); in_s1 = (i + 1 < smp.size()) ? 16'(smp[i+1]) : 16'd0;
      in_eof = (i + 2 >= smp.size());
      if (in_eof) eof_cyc = cyc + 1;
      @(negedge clk); in_valid = 0; in_sof = 0; in_eof = 0;
      repeat (2) @(negedge clk);
    end
    repeat (8) @(negedge clk);
    check(last_cyc > eof_cyc - 1 && last_cyc - eof_cyc <= 5, $sformatf("last word latency %0d", last_cyc - eof_cyc));
  endtask

  initial begin
    int segs [3][$];
    int pos = 0, nbits_raw = 0;
    // segment 0: smooth pulse; segment 1: random with big jumps; 2: odd length
    for (int i = 0; i < 400; i++) segs[0].push_back(3000 + ((i % 40 < 20) ? (i % 40) * 3 : (40 - i % 40) * 3) + $urandom_range(0, 4));
    for (int i = 0; i < 101; i++) segs[1].push_back((i % 7 == 0) ? $urandom_range(0, 65535) : 1000 + $urandom_range(0, 120));
    for (int i = 0; i < 33; i++) segs[2].push_back(500 + i);
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int s = 0; s < 3; s++) begin
      int nb0 = bits.size();
      send_seg(segs[s]);
      if (s == 0) check((bits.size() - nb0) * 2 < 400 * 16, $sformatf("compression: %0d bits for 400 samples", bits.size() - nb0));
    end
    // rewrite entry for residual +1 (index 65): was v=3 '011'; make it '010' (v=2 is
    // residual -1)... instead swap codes of +1 and -1 and check the decoder sees -1/+1 swapped
    @(negedge clk); lut_we = 1; lut_addr = 65; lut_len = 3; lut_code = 16'b010 << 13;
    @(negedge clk); lut_addr = 63; lut_code = 16'b011 << 13;
    @(negedge clk); lut_we = 0;
    begin
      int up [$];
      for (int i = 0; i < 20; i++) up.push_back(2000 + i);   // residuals +1
      send_seg(up);
    end
    check(nlast == 4, $sformatf("out_last count %0d", nlast));
    for (int s = 0; s < 3; s++) begin
      int dec [$];
      decode(pos, segs[s].size(), dec);
      foreach (segs[s][i]) if (dec[i] != segs[s][i]) begin
        check(0, $sformatf("seg %0d sample %0d: %0d exp %0d", s, i, dec[i], segs[s][i])); break;
      end
      check(dec.size() == segs[s].size(), "decoded count");
    end
    begin
      int dec [$];
      decode(pos, 20, dec);
      // with swapped codes the default decoder reads +1 steps as -1 steps
      check(dec[0] == 2000 && dec[1] == 1999 && dec[19] == 1981, $sformatf("LUT rewrite: %0d %0d %0d", dec[0], dec[1], dec[19]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
