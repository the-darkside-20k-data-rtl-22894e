// daq_pkg: types and constants shared by the digitiser firmware and the
// Global/Crate Data Manager (GDM/CDM) logic.
//
// Every block runs in one clock domain, the 250 MHz filter/merge clock of the
// digitiser FPGA. The 125 MS/s ADC sample rate is a clock enable every 2
// cycles, and the 62.5 MHz digitiser clock is an enable every 4 cycles.
// Timestamps count samples (8 ns). The paper does not give the bit layout of
// the control packet, the status word or the segment header. The layouts
// below are this design's choice. The field sizes of the configuration
// structs follow the digitiser configuration table of the paper.
package daq_pkg;

  localparam int unsigned SAMPLE_W = 16;   // ADC sample width (paper)
  localparam int unsigned TSTAMP_W = 48;   // timestamp width, in samples (assumed)
  localparam int unsigned FIR_TAPS = 64;   // FIR coefficients (paper)
  localparam int unsigned COEF_W   = 16;   // bits per coefficient (paper)

  // GDM -> CDM -> digitiser control packet, one per clock (assumed layout).
  typedef struct packed {
    logic        run;        // acquisition enabled
    logic        sync;       // one-clock pulse: zero all timestamp counters
    logic        tsm;        // one-clock pulse: Time Slice Marker
    logic        veto;       // pause: inhibit new self-triggered segments
    logic        ext_trig;   // one-clock pulse: external trigger request
    logic        trig_mode;  // 1 = triggered operation, 0 = triggerless
    logic [31:0] ts_id;      // number of the Time Slice the TSM opens
    logic [47:0] trig_word;  // one bit per digitiser (sector)
  } ctrl_pkt_t;

  // Digitiser -> CDM -> GDM status, one per clock (assumed layout).
  typedef struct packed {
    logic        busy;       // OR of the board's almost-full conditions
    logic        hit_valid;  // one-clock pulse: hitmap holds a new snapshot
    logic [63:0] hitmap;     // one bit per channel
  } wfd_status_t;

  // Per-channel configuration (Table 1 of the paper for the sizes).
  typedef struct packed {
    logic        enable;     // readout channel mask bit
    logic        fir_en;     // trigger on the FIR output, else on raw samples
    logic        decim_en;   // decimation enable bit
    logic        veto_en;    // CDM veto enable bit
    logic [11:0] pre;        // pre-trigger, samples
    logic [11:0] post;       // post-trigger, samples
    logic [15:0] thr;        // trigger threshold, ADC counts
    logic [15:0] post_thr;   // post-trigger threshold, ADC counts
    logic [15:0] tot;        // time over threshold, samples
  } ch_cfg_t;

  // Per-board configuration.
  typedef struct packed {
    logic [15:0] max_seg;     // max segment length, 4-sample units, 0 = no split
    logic [7:0]  decim;       // decimation factor (1 = keep all)
    logic [15:0] wave_af;     // WAVE FIFO almost full, words
    logic [15:0] params_af;   // PARAMS FIFO almost full, words
    logic [15:0] wave_rec;    // WAVE FIFO recovery level, words (assumed)
    logic [15:0] params_rec;  // PARAMS FIFO recovery level, words (assumed)
    logic        comp_en;     // delta+Huffman compression of waveform words
    logic [FIR_TAPS*COEF_W-1:0] coef;  // FIR coefficients, tap 0 in the LSBs
  } board_cfg_t;

  // Flags of a segment header.
  typedef struct packed {
    logic cont;        // continues a segment split at max_seg
    logic truncated;   // gate closed by the gate-length cap
    logic decimated;
    logic compressed;
  } seg_flags_t;

  // First 64-bit word of every segment and TSM event (assumed layout).
  typedef struct packed {
    logic        tsm;        // 63: Time Slice Marker event, no waveform
    seg_flags_t  flags;      // 62:59
    logic [2:0]  rsvd;       // 58:56
    logic [7:0]  channel;    // 55:48
    logic [7:0]  missed;     // 47:40 triggers inhibited by the veto
    logic [15:0] nsamples;   // 39:24
    logic [15:0] nwords;     // 23:8 waveform words that follow the 2 header words
    logic [7:0]  board;      // 7:0 digitiser number
  } seg_hdr_t;

  // One PARAMS entry: header word and timestamp word (2 x 64 bits).
  typedef struct packed {
    seg_hdr_t    hdr;
    logic [63:0] tstamp;
  } seg_params_t;

  // One sample of a waveform segment travelling down a channel.
  // eof may come with valid=0: it then only closes the segment.
  typedef struct packed {
    logic                valid;
    logic                sof;
    logic                eof;
    logic [SAMPLE_W-1:0] sample;
    logic [TSTAMP_W-1:0] tstamp;   // time of the first sample, valid with sof
    seg_flags_t          flags;    // valid with sof (truncated: with eof)
    logic [7:0]          missed;   // valid with sof
  } seg_beat_t;

endpackage
