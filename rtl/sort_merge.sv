// sort_merge: reads the channel buffers of a digitiser into its Sort & Merge
// FIFO. Segments go out in the order in which they started, as the paper's
// busy-logic figure shows.
//
// The paper's rule: a segment is queued when its start is seen, and it is
// sent only once its end has been recorded. A long segment therefore holds
// back every segment that started after it, even those that ended earlier.
// A start-order queue of channel numbers implements this. Each seg_start
// pulse adds the channel to a per-channel pending count. An arbiter moves one
// pending start per clock into the queue, lowest channel first, so starts a
// few clocks apart may swap places. The merger takes the oldest queue entry
// and waits for that channel's PARAMS entry (written when the segment ends).
// It then copies the header word, the timestamp word and the segment's
// waveform words into the Sort & Merge FIFO, one 64-bit word per clock (the
// paper's 64 bits per 4 ns at 250 MHz). A Time Slice Marker
// gets a queue entry of its own (number N_CH), ahead of any start pending
// on the same clock. It produces a two-word event with no waveform: a header
// with the tsm bit set, then tsm_word. The module busy is raised while the
// FIFO holds SM_BUSY words or more (1000 of 1024 in the paper's figure).
// The two-word event header (header word plus timestamp word) is this
// design's format; the digitiser's native format reserves five header words.
//
// Interface: per-channel arrays from channel_buffer; m_valid/m_data/m_sop/
// m_ready is the FIFO's output (m_sop marks the first word of a segment or TSM
// event) towards the board's DDR4 memory and ARM CPU, which are not part of
// this design. N_CH must be a power of two: the TSM entry is then the only
// queue value with the top bit set.
// Lint note: FIFO fill levels and almost-full outputs that nothing reads
// are left unconnected on purpose (empty pin connections).
module sort_merge
  import daq_pkg::*;
#(
  parameter int unsigned N_CH        = 64,
  parameter int unsigned SM_DEPTH    = 1024,
  parameter int unsigned SM_BUSY     = 1000,
  parameter int unsigned ORDER_DEPTH = 1024,
  localparam int unsigned IDW        = $clog2(N_CH + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [7:0]          board_id,
  input  logic [N_CH-1:0]     seg_start,
  input  logic                tsm,
  input  logic [63:0]         tsm_word,
  input  logic [N_CH-1:0]     p_valid,
  input  seg_params_t         p_data  [N_CH],
  output logic [N_CH-1:0]     p_pop,
  input  logic [N_CH-1:0]     wv_empty,
  input  logic [63:0]         wv_data [N_CH],
  output logic [N_CH-1:0]     wv_pop,
  output logic                m_valid,
  output logic [63:0]         m_data,
  output logic                m_sop,
  input  logic                m_ready,
  output logic                busy,
  output logic                order_lost
);
  // ---- pending starts and the start-order queue -----------------------------
  logic [3:0]     pend [N_CH];
  logic [1:0]     tsm_pend;
  logic           oq_full, oq_empty, oq_push, oq_pop;
  logic [IDW-1:0] oq_in, oq_head;
  logic           push_found;
  logic [IDW-1:0] push_ch;

  always_comb begin
    push_found = 1'b0;
    push_ch    = '0;
    for (int c = N_CH - 1; c >= 0; c--) begin
      if (pend[c] != '0) begin
        push_found = 1'b1;
        push_ch    = IDW'(c);
      end
    end
  end

  assign oq_push = !oq_full && ((tsm_pend != '0) || push_found);
  assign oq_in   = (tsm_pend != '0) ? IDW'(N_CH) : push_ch;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CH; c++) pend[c] <= '0;
      tsm_pend   <= '0;
      order_lost <= 1'b0;
    end else begin
      for (int c = 0; c < N_CH; c++) begin
        logic dec;
        dec = oq_push && (tsm_pend == '0) && (push_ch == IDW'(c));
        if (seg_start[c] && !dec) begin
          if (pend[c] != 4'hF) pend[c] <= pend[c] + 1'b1;
          else                 order_lost <= 1'b1;
        end else if (!seg_start[c] && dec) begin
          pend[c] <= pend[c] - 1'b1;
        end
      end
      if (tsm && !(oq_push && tsm_pend != '0)) tsm_pend <= tsm_pend + 1'b1;
      else if (!tsm && oq_push && tsm_pend != '0) tsm_pend <= tsm_pend - 1'b1;
    end
  end

  sync_fifo #(.W(IDW), .DEPTH(ORDER_DEPTH)) u_order (
    .clk, .rst_n, .wr_en(oq_push), .wr_data(oq_in), .full(oq_full),
    .rd_en(oq_pop), .rd_data(oq_head), .empty(oq_empty), .level());

  // TSM times wait here until their queue entry is served.
  logic        tq_empty, tq_full, tq_pop;
  logic [63:0] tq_data;
  sync_fifo #(.W(64), .DEPTH(4)) u_tsmq (
    .clk, .rst_n, .wr_en(tsm && !tq_full), .wr_data(tsm_word), .full(tq_full),
    .rd_en(tq_pop), .rd_data(tq_data), .empty(tq_empty), .level());

  // ---- merger ---------------------------------------------------------------
  typedef enum logic [2:0] {S_IDLE, S_TSM0, S_TSM1, S_HDR, S_TS, S_WAVE} mstate_t;
  mstate_t        ms;
  logic [IDW-2:0] cur;   // channel being copied
  logic [15:0]    left;
  logic           sm_full, sm_empty, sm_wr;
  logic [64:0]    sm_in, sm_out;
  logic [$clog2(SM_DEPTH+1)-1:0] sm_level;
  seg_params_t    pc;
  seg_hdr_t       th;
  logic [63:0]    wcur;

  assign pc   = p_data[cur];
  assign wcur = wv_data[cur];

  always_comb begin
    th          = '0;
    th.tsm      = 1'b1;
    th.channel  = 8'hFF;
    th.board    = board_id;
    sm_wr  = 1'b0;
    sm_in  = '0;
    oq_pop = 1'b0;
    tq_pop = 1'b0;
    p_pop  = '0;
    wv_pop = '0;
    unique case (ms)
      S_TSM0: if (!sm_full) begin sm_wr = 1'b1; sm_in = {1'b1, th}; end
      S_TSM1: if (!sm_full && !tq_empty) begin sm_wr = 1'b1; sm_in = {1'b0, tq_data};
                                   tq_pop = 1'b1; oq_pop = 1'b1; end
      S_HDR:  if (!sm_full) begin sm_wr = 1'b1; sm_in = {1'b1, pc.hdr}; end
      S_TS:   if (!sm_full) begin
                sm_wr = 1'b1; sm_in = {1'b0, pc.tstamp};
                p_pop[cur] = 1'b1;
                if (pc.hdr.nwords == '0) oq_pop = 1'b1;
              end
      S_WAVE: if (!sm_full && !wv_empty[cur]) begin
                sm_wr = 1'b1; sm_in = {1'b0, wcur};
                wv_pop[cur] = 1'b1;
                if (left == 16'd1) oq_pop = 1'b1;
              end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ms   <= S_IDLE;
      cur  <= '0;
      left <= '0;
    end else begin
      unique case (ms)
        S_IDLE: if (!oq_empty) begin
          cur <= oq_head[IDW-2:0];
          if (oq_head == IDW'(N_CH))          ms <= S_TSM0;
          else if (p_valid[oq_head[IDW-2:0]]) ms <= S_HDR;
        end
        S_TSM0: if (sm_wr) ms <= S_TSM1;
        S_TSM1: if (sm_wr) ms <= S_IDLE;
        S_HDR:  if (sm_wr) ms <= S_TS;
        S_TS:   if (sm_wr) begin
          left <= pc.hdr.nwords;
          ms   <= (pc.hdr.nwords == '0) ? S_IDLE : S_WAVE;
        end
        S_WAVE: if (sm_wr) begin
          left <= left - 1'b1;
          if (left == 16'd1) ms <= S_IDLE;
        end
        default: ms <= S_IDLE;
      endcase
    end
  end

  sync_fifo #(.W(65), .DEPTH(SM_DEPTH)) u_sm (
    .clk, .rst_n, .wr_en(sm_wr), .wr_data(sm_in), .full(sm_full),
    .rd_en(m_ready && !sm_empty), .rd_data(sm_out), .empty(sm_empty), .level(sm_level));

  assign m_valid = !sm_empty;
  assign m_sop   = sm_out[64];
  assign m_data  = sm_out[63:0];
  assign busy    = (32'(sm_level) >= SM_BUSY);
endmodule
