// delta_huffman_encoder: two-stage lossless waveform compressor (delta
// coding, then a variable-length code from a lookup table), packing the code
// bits into 64-bit words.
//
// Following the paper: each sample is replaced by its difference from the
// previous sample. A residual in [-64, +64] is coded by the table entry at
// index residual+64. That entry holds the code length in bits and the code,
// shifted up (MSB-aligned, zero padded). Any other residual is coded by the
// escape entry (index 129) followed by the raw 16-bit sample. The encoder
// takes two samples per beat (four samples in two clocks), concatenates their
// codes into a bit buffer, and writes each full 64 bits out as one word. The
// bits left over stay in the buffer. The coding runs in four pipeline stages:
// residuals, table lookup, concatenation of the pair, buffer append.
//
// The paper builds the table from the statistics of real waveforms and does
// not print it. The table is therefore writable (lut_we/lut_addr/lut_len/lut_code),
// and reset loads a computed default: an order-0 exponential-Golomb code of
// the zigzag index v = (r >= 0 ? 2r : -2r-1) + 1, with v = 130 as the escape
// (length 2*floor(log2 v)+1, at most 15 bits). A Huffman table fitted to the
// data can be written over it. Also this design's choices: the first
// residual of a segment is taken against 0, so it is escaped; the stream is
// MSB-first; the last word of a segment is zero padded and flagged out_last.
// If a segment ends exactly on a word boundary, out_last comes alone
// (out_valid low) when the closing beat reaches the last stage.
//
// Interface: in_valid beats carry in_n (0..2) samples, in_s0 first; in_n=0 is
// allowed only with in_eof (it closes the segment). Beats must be at least
// two clocks apart. out_valid/out_word/out_last come four clocks after the
// beat that completes a word. A segment-closing flush may add one more clock.
module delta_huffman_encoder #(
  parameter int unsigned CODE_W = 16,
  localparam int unsigned LUT_N = 130,
  localparam int unsigned ESC   = 129
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [1:0]        in_n,
  input  logic [15:0]       in_s0,
  input  logic [15:0]       in_s1,
  input  logic              in_sof,
  input  logic              in_eof,
  input  logic              lut_we,
  input  logic [7:0]        lut_addr,
  input  logic [4:0]        lut_len,
  input  logic [CODE_W-1:0] lut_code,
  output logic              out_valid,
  output logic [63:0]       out_word,
  output logic              out_last
);
  // ---- lookup table -------------------------------------------------------
  logic [4:0]        t_len  [LUT_N];
  logic [CODE_W-1:0] t_code [LUT_N];

  function automatic logic [4:0] eg_len(input int unsigned v);
    int unsigned n = 0;
    while ((v >> (n + 1)) != 0) n++;
    return 5'(2 * n + 1);
  endfunction

  // order-0 exp-Golomb code of v, MSB-aligned in CODE_W bits
  function automatic logic [CODE_W-1:0] eg_code(input int unsigned v);
    int unsigned l = int'(eg_len(v));
    return CODE_W'(v << (CODE_W - l));
  endfunction

  function automatic int unsigned zz1(input int i);  // table index -> v
    int r = i - 64;
    return (r >= 0) ? unsigned'(2 * r + 1) : unsigned'(-2 * r);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < LUT_N; i++) begin
        t_len[i]  <= eg_len((i == ESC) ? 130 : zz1(i));
        t_code[i] <= eg_code((i == ESC) ? 130 : zz1(i));
      end
    end else if (lut_we && lut_addr < 8'(LUT_N)) begin
      t_len[lut_addr]  <= lut_len;
      t_code[lut_addr] <= lut_code;
    end
  end

  // ---- stage 1: residuals -------------------------------------------------
  logic               v1, eof1;
  logic [1:0]         n1;
  logic signed [16:0] r1 [2];
  logic [15:0]        raw1 [2];
  logic [15:0]        prev;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0; eof1 <= 1'b0; n1 <= '0; prev <= '0;
      r1[0] <= '0; r1[1] <= '0; raw1[0] <= '0; raw1[1] <= '0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        eof1    <= in_eof;
        n1      <= in_n;
        raw1[0] <= in_s0;
        raw1[1] <= in_s1;
        r1[0]   <= $signed({1'b0, in_s0}) - $signed({1'b0, in_sof ? 16'd0 : prev});
        r1[1]   <= $signed({1'b0, in_s1}) - $signed({1'b0, in_s0});
        if (in_n == 2'd2)      prev <= in_s1;
        else if (in_n == 2'd1) prev <= in_s0;
      end
    end
  end

  // ---- stage 2: table lookup ----------------------------------------------
  logic        v2, eof2;
  logic [31:0] cw2 [2];
  logic [5:0]  len2 [2];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v2 <= 1'b0; eof2 <= 1'b0;
      cw2[0] <= '0; cw2[1] <= '0; len2[0] <= '0; len2[1] <= '0;
    end else begin
      v2   <= v1;
      eof2 <= eof1;
      for (int i = 0; i < 2; i++) begin
        logic        inr;
        logic [7:0]  idx;
        logic [31:0] w;
        inr = (r1[i] >= -17'sd64) && (r1[i] <= 17'sd64);
        idx = inr ? 8'(r1[i] + 17'sd64) : 8'(ESC);
        w   = {t_code[idx], {(32 - CODE_W){1'b0}}};
        if (!inr) w = w | (32'(raw1[i]) << (16 - int'(t_len[idx])));
        if (32'(i) < 32'(n1)) begin
          cw2[i]  <= w;
          len2[i] <= inr ? 6'(t_len[idx]) : 6'(t_len[idx]) + 6'd16;
        end else begin
          cw2[i]  <= '0;
          len2[i] <= '0;
        end
      end
    end
  end

  // ---- stage 3: concatenate the pair --------------------------------------
  logic        v3, eof3;
  logic [63:0] cat3;
  logic [6:0]  len3;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v3 <= 1'b0; eof3 <= 1'b0; cat3 <= '0; len3 <= '0;
    end else begin
      v3   <= v2;
      eof3 <= eof2;
      cat3 <= {cw2[0], 32'd0} | ({cw2[1], 32'd0} >> len2[0]);
      len3 <= 7'(len2[0]) + 7'(len2[1]);
    end
  end

  // ---- stage 4: bit buffer and word output --------------------------------
  logic [127:0] bbuf, nbuf;
  logic [7:0]   bcnt, ncnt;
  logic         flush_pend;

  always_comb begin
    nbuf = bbuf | ({cat3, 64'd0} >> bcnt);
    ncnt = bcnt + 8'(len3);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      bbuf <= '0; bcnt <= '0; flush_pend <= 1'b0;
      out_valid <= 1'b0; out_word <= '0; out_last <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (flush_pend) begin
        out_valid  <= 1'b1;
        out_word   <= bbuf[127:64];
        out_last   <= 1'b1;
        bbuf       <= '0;
        bcnt       <= '0;
        flush_pend <= 1'b0;
      end else if (v3) begin
        if (ncnt >= 8'd64) begin
          out_valid <= 1'b1;
          out_word  <= nbuf[127:64];
          bbuf      <= nbuf << 64;
          bcnt      <= ncnt - 8'd64;
          if (eof3) begin
            if (ncnt == 8'd64) out_last <= 1'b1;
            else               flush_pend <= 1'b1;
          end
        end else if (eof3 && ncnt != 8'd0) begin
          out_valid <= 1'b1;
          out_word  <= nbuf[127:64];
          out_last  <= 1'b1;
          bbuf      <= '0;
          bcnt      <= '0;
        end else begin
          bbuf     <= nbuf;
          bcnt     <= ncnt;
          out_last <= eof3;   // segment closed exactly on a word boundary
        end
      end
    end
  end

  a_spacing: assert property (@(posedge clk) disable iff (!rst_n) in_valid |=> !in_valid);
endmodule
