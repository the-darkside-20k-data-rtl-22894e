// daq_top: the synchronous front end of the DarkSide-20k DAQ. One Global
// Data Manager, two Crate Data Managers per crate and twelve digitiser
// firmwares per crate; four crates give 48 digitisers, 3072 channels.
//
// Wiring, following the paper: in each crate the first CDM serves the nine
// digitisers of the TPC and the second serves the three of the inner and
// outer vetoes. All eight CDMs take the same control packet from the GDM.
// Their busy and hit-map lines go back to the GDM. Digitiser w of crate c,
// k = 0..11 within the crate, has board number 12c+k. The same number picks
// its bit in the 48-bit trigger word. The links between the boards (2.5 Gb/s
// optical, serial data to the digitisers) are modelled as registered
// parallel words on the shared clock. The parts the paper does not design
// come out as ports: the ADC sample streams (adc), the Sort & Merge FIFO
// outputs towards each board's DDR4/ARM/10 GbE readout (m_*), the GPS/clock
// box inputs (pps, gps_*), and the MIDAS run control and configuration
// (run_req, trig_mode, cfg_ch, bcfg, lut_*). The Front End Processors, Pool
// Manager, Time Slice Processors and Merger are software and sit behind the
// m_* ports.
//
// Timing: clk is the 250 MHz digitiser FPGA clock; samples are every second
// clock. A control packet needs two clocks (GDM, then CDM register) to reach
// the digitisers; a busy needs two clocks (board, then CDM register) to reach
// the GDM, and the veto one more clock to leave it.
module daq_top
  import daq_pkg::*;
#(
  parameter int unsigned N_CRATE       = 4,
  parameter int unsigned N_TPC         = 9,
  parameter int unsigned N_VETO        = 3,
  parameter int unsigned N_CH          = 64,
  parameter int unsigned RING          = 1024,
  parameter int unsigned MAX_GATE      = 4096,
  parameter int unsigned WAVE_DEPTH    = 4096,
  parameter int unsigned PARAMS_WORDS  = 512,
  parameter int unsigned SM_DEPTH      = 1024,
  parameter int unsigned SM_BUSY       = 1000,
  parameter int unsigned ORDER_DEPTH   = 1024,
  parameter int unsigned HIT_WIN       = 150,
  parameter int unsigned TS_LEN        = 125_000_000,
  parameter int unsigned TICKS_PER_SEC = 125_000_000,
  localparam int unsigned N_PER        = N_TPC + N_VETO,
  localparam int unsigned N_WFD        = N_CRATE * N_PER,
  localparam int unsigned N_CDM        = 2 * N_CRATE
) (
  input  logic               clk,
  input  logic               rst_n,
  // GPS / clock box
  input  logic               pps,
  input  logic               gps_valid,
  input  logic [39:0]        gps_prev_sec,
  input  logic signed [31:0] gps_bias_ns,
  input  logic [15:0]        delay_ticks,
  // run control, triggers, configuration
  input  logic               run_req,
  input  logic               trig_mode,
  input  logic               ext_in,
  input  logic               hm_trig_en,
  input  logic [15:0]        hm_thr,
  input  ch_cfg_t            cfg_ch [N_WFD][N_CH],
  input  board_cfg_t         bcfg   [N_WFD],
  input  logic               lut_we,
  input  logic [7:0]         lut_addr,
  input  logic [4:0]         lut_len,
  input  logic [15:0]        lut_code,
  // ADC sample streams
  input  logic [15:0]        adc [N_WFD][N_CH],
  // Sort & Merge FIFO outputs, one per digitiser
  output logic [N_WFD-1:0]   m_valid,
  output logic [63:0]        m_data [N_WFD],
  output logic [N_WFD-1:0]   m_sop,
  input  logic [N_WFD-1:0]   m_ready,
  output logic [N_WFD-1:0]   lost,
  // monitoring
  output ctrl_pkt_t          ctrl,
  output logic [39:0]        abs_sec,
  output logic [31:0]        sub_tick,
  output logic               evt_pause,
  output logic               evt_resume,
  output logic [71:0]        run_t0,
  output logic [71:0]        pause_time,
  output logic [71:0]        resume_time,
  output logic [47:0]        deadtime,
  output logic [47:0]        hit_total,
  output logic [31:0]        n_trig,
  output logic [31:0]        n_busy   [N_CDM],
  output logic [31:0]        n_pause  [N_CDM],
  output logic [31:0]        n_resume [N_CDM]
);
  ctrl_pkt_t        cdm_ctrl [N_CDM];
  logic [N_CDM-1:0] cdm_busy, cdm_hmv;
  logic [63:0]      hitmaps [N_WFD];
  wfd_status_t      st [N_WFD];

  gdm #(.N_CDM(N_CDM), .N_WFD(N_WFD), .N_CH(N_CH), .TS_LEN(TS_LEN),
        .TICKS_PER_SEC(TICKS_PER_SEC)) u_gdm (
    .clk, .rst_n, .pps, .gps_valid, .gps_prev_sec, .gps_bias_ns, .delay_ticks,
    .run_req, .trig_mode, .ext_in, .hm_trig_en, .hm_thr, .cdm_busy,
    .cdm_hm_valid(cdm_hmv), .hitmaps, .ctrl, .abs_sec, .sub_tick, .evt_pause,
    .evt_resume, .run_t0, .pause_time, .resume_time, .deadtime, .hit_total, .n_trig);

  for (genvar c = 0; c < N_CRATE; c++) begin : g_crate
    wfd_status_t st_tpc [N_TPC];
    wfd_status_t st_veto [N_VETO];
    logic [63:0] hm_tpc [N_TPC];
    logic [63:0] hm_veto [N_VETO];

    for (genvar k = 0; k < N_TPC; k++) begin : g_t
      assign st_tpc[k]              = st[c*N_PER + k];
      assign hitmaps[c*N_PER + k]   = hm_tpc[k];
    end
    for (genvar k = 0; k < N_VETO; k++) begin : g_v
      assign st_veto[k]                    = st[c*N_PER + N_TPC + k];
      assign hitmaps[c*N_PER + N_TPC + k]  = hm_veto[k];
    end

    cdm #(.N_WFD(N_TPC)) u_cdm_tpc (
      .clk, .rst_n, .ctrl_in(ctrl), .ctrl_out(cdm_ctrl[2*c]), .st_in(st_tpc),
      .busy_out(cdm_busy[2*c]), .hm_valid_out(cdm_hmv[2*c]), .hm_out(hm_tpc),
      .n_busy(n_busy[2*c]), .n_pause(n_pause[2*c]), .n_resume(n_resume[2*c]));

    cdm #(.N_WFD(N_VETO)) u_cdm_veto (
      .clk, .rst_n, .ctrl_in(ctrl), .ctrl_out(cdm_ctrl[2*c+1]), .st_in(st_veto),
      .busy_out(cdm_busy[2*c+1]), .hm_valid_out(cdm_hmv[2*c+1]), .hm_out(hm_veto),
      .n_busy(n_busy[2*c+1]), .n_pause(n_pause[2*c+1]), .n_resume(n_resume[2*c+1]));

    for (genvar k = 0; k < N_PER; k++) begin : g_wfd
      localparam int unsigned W = c * N_PER + k;
      wfd_board #(.N_CH(N_CH), .RING(RING), .MAX_GATE(MAX_GATE), .WAVE_DEPTH(WAVE_DEPTH),
                  .PARAMS_WORDS(PARAMS_WORDS), .SM_DEPTH(SM_DEPTH), .SM_BUSY(SM_BUSY),
                  .ORDER_DEPTH(ORDER_DEPTH), .HIT_WIN(HIT_WIN)) u_wfd (
        .clk, .rst_n, .board_id(8'(W)), .adc(adc[W]),
        .ctrl(cdm_ctrl[(k < N_TPC) ? 2*c : 2*c+1]), .cfg_ch(cfg_ch[W]), .bcfg(bcfg[W]),
        .lut_we, .lut_addr, .lut_len, .lut_code, .status(st[W]), .m_valid(m_valid[W]),
        .m_data(m_data[W]), .m_sop(m_sop[W]), .m_ready(m_ready[W]), .lost(lost[W]));
    end
  end
endmodule
