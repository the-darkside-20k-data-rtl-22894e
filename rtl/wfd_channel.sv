// wfd_channel: the custom firmware of one digitiser channel, from ADC samples
// to the channel's WAVE and PARAMS buffers ("DS-20k Firmware" and "CH
// Buffer" in the paper's board data-path figure).
//
// Chain: fir_filter -> daw_trigger -> decimator -> (raw 4-sample packing |
// delta_huffman_encoder) -> channel_buffer. The FIR takes every other ADC
// sample (62.5 MS/s). Each output is used for two samples, so the trigger
// value runs at 125 MS/s. With fir_en low the trigger looks at the raw
// samples. The stored waveform is always the raw samples: the paper uses the
// filter to find segments, not to change the data, and this design reads it
// so. Raw packing puts four samples in a 64-bit word, the first sample in
// the LSBs, and zero-pads the last word. With comp_en the words come from the
// compressor instead. When a segment closes, its header and timestamp are
// written to PARAMS: channel, board, flags, missed triggers, number of
// samples kept and number of words.
//
// Timing: smp_en marks ADC samples (every 2nd clock); smp_ph selects the
// samples the FIR takes (every other one). seg_start pulses when a segment's
// first sample leaves the trigger. The sort & merge logic uses it to order
// segments by start time. The segment's PARAMS entry appears 2 clocks after its
// last sample leaves the decimator without compression, about 6 with it.
// Lint note: FIFO fill levels and almost-full outputs that nothing reads
// are left unconnected on purpose (empty pin connections).
module wfd_channel
  import daq_pkg::*;
#(
  parameter int unsigned RING         = 1024,
  parameter int unsigned MAX_GATE     = 4096,
  parameter int unsigned WAVE_DEPTH   = 4096,
  parameter int unsigned PARAMS_WORDS = 512
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                smp_en,
  input  logic                smp_ph,
  input  logic [15:0]         raw,
  input  logic [TSTAMP_W-1:0] tnow,
  input  logic [7:0]          chan_id,
  input  logic [7:0]          board_id,
  input  ch_cfg_t             cfg,
  input  board_cfg_t          bcfg,
  input  logic                run,
  input  logic                veto,
  input  logic                trig_mode,
  input  logic                ext_trig,
  input  logic                lut_we,
  input  logic [7:0]          lut_addr,
  input  logic [4:0]          lut_len,
  input  logic [15:0]         lut_code,
  output logic                seg_start,
  output logic                over,
  output logic                p_valid,
  output seg_params_t         p_data,
  input  logic                p_pop,
  output logic                wv_empty,
  output logic [63:0]         wv_data,
  input  logic                wv_pop,
  output logic                almost_full,
  output logic                busy,
  output logic                lost
);
  // ---- trigger value --------------------------------------------------------
  logic        fir_v;
  logic [15:0] fir_y, fir_hold, trig_val;

  fir_filter #(.TAPS(FIR_TAPS), .N_DSP(16), .COEF_W(COEF_W)) u_fir (
    .clk, .rst_n, .in_valid(smp_en && !smp_ph), .in_sample(raw), .coef(bcfg.coef),
    .out_valid(fir_v), .out_sample(fir_y));

  always_ff @(posedge clk) begin
    if (!rst_n)     fir_hold <= '0;
    else if (fir_v) fir_hold <= fir_y;
  end
  assign trig_val = cfg.fir_en ? fir_hold : raw;

  // ---- acquisition window and decimation ------------------------------------
  seg_beat_t daw_o, d;

  daw_trigger #(.RING(RING), .MAX_GATE(MAX_GATE)) u_daw (
    .clk, .rst_n, .smp_en, .raw, .trig_val, .tnow, .cfg, .max_seg(bcfg.max_seg),
    .run, .veto, .trig_mode, .ext_trig, .o(daw_o), .over);

  assign seg_start = daw_o.valid && daw_o.sof;

  decimator u_dec (
    .clk, .rst_n, .en(cfg.decim_en), .factor(bcfg.decim), .in(daw_o), .o(d));

  // ---- segment bookkeeping --------------------------------------------------
  logic [15:0]         nsamp;
  logic [TSTAMP_W-1:0] ts0;
  seg_flags_t          fl0;
  logic [7:0]          miss0;
  seg_params_t         meta_in, meta_out;
  logic                meta_empty, meta_full, seg_done;
  logic [15:0]         nsamp_cur;

  assign nsamp_cur = (d.sof ? 16'd0 : nsamp) + 16'(d.valid);

  always_comb begin
    meta_in                  = '0;
    meta_in.hdr.flags        = d.sof ? d.flags : fl0;
    meta_in.hdr.flags.truncated  = d.flags.truncated;
    meta_in.hdr.flags.compressed = bcfg.comp_en;
    meta_in.hdr.channel      = chan_id;
    meta_in.hdr.board        = board_id;
    meta_in.hdr.missed       = d.sof ? d.missed : miss0;
    meta_in.hdr.nsamples     = nsamp_cur;
    meta_in.tstamp           = 64'(d.sof ? d.tstamp : ts0);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      nsamp <= '0; ts0 <= '0; fl0 <= '0; miss0 <= '0;
    end else if (d.valid || d.eof) begin
      nsamp <= nsamp_cur;
      if (d.sof) begin
        ts0   <= d.tstamp;
        fl0   <= d.flags;
        miss0 <= d.missed;
      end
    end
  end

  sync_fifo #(.W(128), .DEPTH(4)) u_meta (
    .clk, .rst_n, .wr_en(d.eof && !meta_full), .wr_data(meta_in), .full(meta_full),
    .rd_en(seg_done), .rd_data(meta_out), .empty(meta_empty), .level());

  // ---- raw packing ----------------------------------------------------------
  logic        rw_valid, rw_last;
  logic [63:0] rw_word, racc;
  logic [1:0]  rk;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      racc <= '0; rk <= '0; rw_valid <= 1'b0; rw_last <= 1'b0; rw_word <= '0;
    end else begin
      rw_valid <= 1'b0;
      rw_last  <= 1'b0;
      if (!bcfg.comp_en && (d.valid || d.eof)) begin
        logic [63:0] w;
        logic [1:0]  k;
        k = d.sof ? 2'd0 : rk;
        w = d.sof ? 64'd0 : racc;
        if (d.valid) w[16*k +: 16] = d.sample;
        if ((d.valid && k == 2'd3) || (d.eof && (d.valid || k != 2'd0))) begin
          rw_valid <= 1'b1;
          rw_word  <= w;
          racc     <= '0;
          rk       <= '0;
        end else begin
          racc <= w;
          rk   <= k + 2'(d.valid);
        end
        rw_last <= d.eof;
      end
    end
  end

  // ---- compression ----------------------------------------------------------
  logic        have, have_sof, e_in_v, e_sof, e_eof;
  logic [1:0]  e_n;
  logic [15:0] hold_s, e_s0, e_s1;
  logic        cw_valid, cw_last;
  logic [63:0] cw_word;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      have <= 1'b0; have_sof <= 1'b0; hold_s <= '0;
      e_in_v <= 1'b0; e_n <= '0; e_s0 <= '0; e_s1 <= '0; e_sof <= 1'b0; e_eof <= 1'b0;
    end else begin
      e_in_v <= 1'b0;
      if (bcfg.comp_en && (d.valid || d.eof)) begin
        if (d.valid && !have && !d.eof) begin
          have <= 1'b1; have_sof <= d.sof; hold_s <= d.sample;
        end else begin
          e_in_v <= 1'b1;
          e_eof  <= d.eof;
          have   <= 1'b0;
          if (have) begin
            e_n <= d.valid ? 2'd2 : 2'd1; e_s0 <= hold_s; e_s1 <= d.sample; e_sof <= have_sof;
          end else begin
            e_n <= d.valid ? 2'd1 : 2'd0; e_s0 <= d.sample; e_s1 <= '0; e_sof <= d.sof;
          end
        end
      end
    end
  end

  delta_huffman_encoder u_enc (
    .clk, .rst_n, .in_valid(e_in_v), .in_n(e_n), .in_s0(e_s0), .in_s1(e_s1),
    .in_sof(e_sof), .in_eof(e_eof), .lut_we, .lut_addr, .lut_len, .lut_code,
    .out_valid(cw_valid), .out_word(cw_word), .out_last(cw_last));

  // ---- channel buffer -------------------------------------------------------
  logic        b_valid;
  logic [63:0] b_word;
  assign b_valid  = bcfg.comp_en ? cw_valid : rw_valid;
  assign b_word   = bcfg.comp_en ? cw_word  : rw_word;
  assign seg_done = (bcfg.comp_en ? cw_last : rw_last) && !meta_empty;

  channel_buffer #(.WAVE_DEPTH(WAVE_DEPTH), .PARAMS_WORDS(PARAMS_WORDS)) u_buf (
    .clk, .rst_n, .w_valid(b_valid), .w_data(b_word), .seg_done, .seg_p(meta_out),
    .wave_af(bcfg.wave_af), .params_af(bcfg.params_af), .wave_rec(bcfg.wave_rec),
    .params_rec(bcfg.params_rec), .p_valid, .p_data, .p_pop, .wv_empty, .wv_data,
    .wv_pop, .almost_full, .busy, .lost);
endmodule
