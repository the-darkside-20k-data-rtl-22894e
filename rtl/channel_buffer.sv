// channel_buffer: the two FIFOs of one digitiser channel (the paper's WAVE
// and PARAMS buffers) and the almost-full (busy) logic.
//
// WAVE holds the 64-bit waveform words of the channel's segments, 4096 words
// (16384 samples) deep. PARAMS holds one entry per finished segment, 512
// 64-bit words deep. An entry is two words here, a header and a timestamp
// (seg_params_t), so 256 entries fit. The header's nwords field is filled in
// here from the number of words actually stored for the segment. The
// channel is almost full when the WAVE level reaches wave_af or the PARAMS
// level (in 64-bit words) reaches params_af. These are the two almost-full
// thresholds of the paper's configuration table. busy follows almost full
// with hysteresis: it stays set until both levels drop below the recovery
// levels (wave_rec, params_rec). The paper names a recovery threshold but not
// its setting, so these two are this design's own configuration. A word
// that finds WAVE full is dropped and sets the sticky `lost` flag. This should
// not happen while the busy threshold is below the depth.
//
// Interface: w_valid/w_data write one word; seg_done (with seg_p) closes the
// segment and may come on the same clock as its last word. The reader sees
// p_valid/p_data and wv_empty/wv_data (first-word fall-through) and pops with
// p_pop and wv_pop.
module channel_buffer
  import daq_pkg::*;
#(
  parameter int unsigned WAVE_DEPTH   = 4096,
  parameter int unsigned PARAMS_WORDS = 512,
  localparam int unsigned P_ENTRIES   = PARAMS_WORDS / 2,
  localparam int unsigned WLW         = $clog2(WAVE_DEPTH + 1),
  localparam int unsigned PLW         = $clog2(P_ENTRIES + 1)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        w_valid,
  input  logic [63:0] w_data,
  input  logic        seg_done,
  input  seg_params_t seg_p,
  input  logic [15:0] wave_af,
  input  logic [15:0] params_af,
  input  logic [15:0] wave_rec,
  input  logic [15:0] params_rec,
  output logic        p_valid,
  output seg_params_t p_data,
  input  logic        p_pop,
  output logic        wv_empty,
  output logic [63:0] wv_data,
  input  logic        wv_pop,
  output logic        almost_full,
  output logic        busy,
  output logic        lost
);
  logic           w_full, p_full, p_empty, w_store;
  logic [WLW-1:0] w_level;
  logic [PLW-1:0] p_level;
  logic [16:0]    p_words;
  logic [15:0]    cnt;
  seg_params_t    p_in;

  assign w_store = w_valid && !w_full;

  always_comb begin
    p_in            = seg_p;
    p_in.hdr.nwords = cnt + 16'(w_store);
  end

  sync_fifo #(.W(64), .DEPTH(WAVE_DEPTH)) u_wave (
    .clk, .rst_n, .wr_en(w_store), .wr_data(w_data), .full(w_full),
    .rd_en(wv_pop), .rd_data(wv_data), .empty(wv_empty), .level(w_level));

  sync_fifo #(.W(128), .DEPTH(P_ENTRIES)) u_params (
    .clk, .rst_n, .wr_en(seg_done && !p_full), .wr_data(p_in), .full(p_full),
    .rd_en(p_pop), .rd_data(p_data), .empty(p_empty), .level(p_level));

  assign p_valid     = !p_empty;
  assign p_words     = 17'(p_level) << 1;
  assign almost_full = (17'(w_level) >= 17'(wave_af)) || (p_words >= 17'(params_af));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt  <= '0;
      busy <= 1'b0;
      lost <= 1'b0;
    end else begin
      if (seg_done)     cnt <= '0;
      else if (w_store) cnt <= cnt + 1'b1;
      if (almost_full) busy <= 1'b1;
      else if (17'(w_level) < 17'(wave_rec) && p_words < 17'(params_rec)) busy <= 1'b0;
      if ((w_valid && w_full) || (seg_done && p_full)) lost <= 1'b1;
    end
  end
endmodule
