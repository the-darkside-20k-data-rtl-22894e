// cdm: Crate Data Manager. It sits between the Global Data Manager and the
// digitisers of one crate group.
//
// Downstream, the CDM passes the GDM's control packet (run, sync, TSM, veto,
// trigger mode, external trigger with its 48-bit trigger word) to its N_WFD
// digitisers. Upstream, it ORs their busy signals into one busy for the GDM
// and forwards their hit maps. For live-time monitoring it counts busy,
// pause and resume transitions, as the paper has the CDMs do (the counter
// widths and the edge definitions are this design's): busy is the rising edge of the crate busy, pause and resume
// are the rising and falling edges of the veto bit it passes down. In
// the paper the GDM-CDM link is a 2.5 Gb/s optical link, and the CDM also
// recovers a phase-aligned clock. Neither the serial link nor the clock
// circuits are part of this design. Packets cross here as parallel words, one
// per clock, through one register each way. The crate clock is the shared
// clk.
//
// Interface: ctrl_in -> ctrl_out (1 clock); st_in[] -> busy_out, hm_valid_out,
// hm_out[] (1 clock). Counters are 32-bit, cleared by reset.
module cdm
  import daq_pkg::*;
#(
  parameter int unsigned N_WFD = 12
) (
  input  logic         clk,
  input  logic         rst_n,
  input  ctrl_pkt_t    ctrl_in,
  output ctrl_pkt_t    ctrl_out,
  input  wfd_status_t  st_in [N_WFD],
  output logic         busy_out,
  output logic         hm_valid_out,
  output logic [63:0]  hm_out [N_WFD],
  output logic [31:0]  n_busy,
  output logic [31:0]  n_pause,
  output logic [31:0]  n_resume
);
  logic busy_any, hv_any;

  always_comb begin
    busy_any = 1'b0;
    hv_any   = 1'b0;
    for (int i = 0; i < N_WFD; i++) begin
      busy_any |= st_in[i].busy;
      hv_any   |= st_in[i].hit_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ctrl_out     <= '0;
      busy_out     <= 1'b0;
      hm_valid_out <= 1'b0;
      for (int i = 0; i < N_WFD; i++) hm_out[i] <= '0;
      n_busy   <= '0;
      n_pause  <= '0;
      n_resume <= '0;
    end else begin
      ctrl_out     <= ctrl_in;
      busy_out     <= busy_any;
      hm_valid_out <= hv_any;
      for (int i = 0; i < N_WFD; i++) begin
        if (st_in[i].hit_valid) hm_out[i] <= st_in[i].hitmap;
      end
      if (busy_any && !busy_out)           n_busy   <= n_busy + 1'b1;
      if (ctrl_in.veto && !ctrl_out.veto)  n_pause  <= n_pause + 1'b1;
      if (!ctrl_in.veto && ctrl_out.veto)  n_resume <= n_resume + 1'b1;
    end
  end
endmodule
