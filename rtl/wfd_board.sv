// wfd_board: the custom firmware of one 64-channel, 16-bit, 125 MS/s
// waveform digitiser (WFD), from the ADC sample streams to the board's
// Sort & Merge FIFO.
//
// Contents: N_CH wfd_channel instances (trigger, segment selection, optional
// decimation and compression, WAVE/PARAMS buffers), the sort_merge block, the
// hit-map block, a sample-time counter and the control-packet decoder. The
// board busy sent to the CDM is the OR of the channel busy flags, as in the
// paper, plus the Sort & Merge module busy. From each control packet the board
// takes the run and veto levels, the trigger mode, and three pulses: sync,
// TSM and the external trigger, which counts only if the board's bit in
// trig_word is set. On a TSM the board queues a TSM event for the FEPs. The
// event's second word is {ts_id[15:0], sample time[47:0]}.
//
// Timing: one clock (250 MHz). A 2-bit phase counter, cleared by sync, makes
// the 125 MS/s sample enable (phases 1 and 3). The FIR phase is the sample at
// phase 1. adc[] is read on sample-enable clocks only. The sample counter
// counts samples since the last sync, so boards that share the clock and the
// sync pulse agree on time. That shared timing is the point of the GDM/CDM
// clock tree. External-trigger pulses are held until the next sample enable.
// Outputs to the DDR4/ARM/Ethernet readout (vendor parts, not in this design)
// are m_valid/m_data/m_sop/m_ready.
// Lint note: the channels' almost_full outputs are left unconnected on
// purpose; the board uses their busy outputs, which add the hysteresis.
module wfd_board
  import daq_pkg::*;
#(
  parameter int unsigned N_CH         = 64,
  parameter int unsigned RING         = 1024,
  parameter int unsigned MAX_GATE     = 4096,
  parameter int unsigned WAVE_DEPTH   = 4096,
  parameter int unsigned PARAMS_WORDS = 512,
  parameter int unsigned SM_DEPTH     = 1024,
  parameter int unsigned SM_BUSY      = 1000,
  parameter int unsigned ORDER_DEPTH  = 1024,
  parameter int unsigned HIT_WIN      = 150
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [7:0]    board_id,
  input  logic [15:0]   adc [N_CH],
  input  ctrl_pkt_t     ctrl,
  input  ch_cfg_t       cfg_ch [N_CH],
  input  board_cfg_t    bcfg,
  input  logic          lut_we,
  input  logic [7:0]    lut_addr,
  input  logic [4:0]    lut_len,
  input  logic [15:0]   lut_code,
  output wfd_status_t   status,
  output logic          m_valid,
  output logic [63:0]   m_data,
  output logic          m_sop,
  input  logic          m_ready,
  output logic          lost
);
  logic [1:0]          ph;
  logic                smp_en, smp_ph, ext_pend, ext_s;
  logic [TSTAMP_W-1:0] tnow;

  assign smp_en = ph[0];
  assign smp_ph = ph[1];
  assign ext_s  = ext_pend || (ctrl.ext_trig && ctrl.trig_word[board_id[5:0]]);

  always_ff @(posedge clk) begin
    if (!rst_n || ctrl.sync) begin
      ph       <= '0;
      tnow     <= '0;
      ext_pend <= 1'b0;
    end else begin
      ph <= ph + 1'b1;
      if (smp_en) tnow <= tnow + 1'b1;
      ext_pend <= smp_en ? 1'b0 : ext_s;
    end
  end

  // ---- channels -------------------------------------------------------------
  logic [N_CH-1:0] seg_start, over, p_valid, p_pop, wv_empty, wv_pop, ch_busy, ch_lost;
  seg_params_t     p_data  [N_CH];
  logic [63:0]     wv_data [N_CH];

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    wfd_channel #(.RING(RING), .MAX_GATE(MAX_GATE), .WAVE_DEPTH(WAVE_DEPTH),
                  .PARAMS_WORDS(PARAMS_WORDS)) u_ch (
      .clk, .rst_n, .smp_en, .smp_ph, .raw(adc[c]), .tnow, .chan_id(8'(c)), .board_id,
      .cfg(cfg_ch[c]), .bcfg, .run(ctrl.run), .veto(ctrl.veto), .trig_mode(ctrl.trig_mode),
      .ext_trig(ext_s && smp_en), .lut_we, .lut_addr, .lut_len, .lut_code,
      .seg_start(seg_start[c]), .over(over[c]), .p_valid(p_valid[c]), .p_data(p_data[c]),
      .p_pop(p_pop[c]), .wv_empty(wv_empty[c]), .wv_data(wv_data[c]), .wv_pop(wv_pop[c]),
      .almost_full(), .busy(ch_busy[c]), .lost(ch_lost[c]));
  end

  // ---- sort & merge ---------------------------------------------------------
  logic sm_busy, order_lost;

  sort_merge #(.N_CH(N_CH), .SM_DEPTH(SM_DEPTH), .SM_BUSY(SM_BUSY),
               .ORDER_DEPTH(ORDER_DEPTH)) u_sm (
    .clk, .rst_n, .board_id, .seg_start, .tsm(ctrl.tsm),
    .tsm_word({ctrl.ts_id[15:0], tnow}), .p_valid, .p_data, .p_pop, .wv_empty,
    .wv_data, .wv_pop, .m_valid, .m_data, .m_sop, .m_ready, .busy(sm_busy), .order_lost);

  // ---- hit map and status ---------------------------------------------------
  logic            hm_valid;
  logic [N_CH-1:0] hm;

  hitmap #(.N_CH(N_CH), .WIN(HIT_WIN)) u_hm (
    .clk, .rst_n, .smp_en, .sync(ctrl.sync), .over, .hit_valid(hm_valid), .map(hm));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      status <= '0;
      lost   <= 1'b0;
    end else begin
      status.busy      <= (|ch_busy) || sm_busy;
      status.hit_valid <= hm_valid;
      status.hitmap    <= 64'(hm);
      lost             <= (|ch_lost) || order_lost;
    end
  end
endmodule
