// fir_filter: 64-tap, 16-bit-coefficient FIR of one digitiser channel, built
// from 16 multipliers that are time-shared over 4 clock phases.
//
// As in the paper, the filter takes one input sample every 4 clocks of the
// 250 MHz filter clock (an effective 62.5 MS/s, every other ADC sample). In
// the 4 clocks after an input sample, phase p multiplies taps 16p..16p+15 by
// their coefficients and adds the 16 products to an accumulator, so the 16
// multipliers give the equivalent of 64 taps. The caller holds each output for
// two ADC samples, restoring the 125 MS/s rate.
//
// Interface: in_valid with in_sample (unsigned ADC counts), normally PHASES
// clocks apart. An earlier in_valid (this happens once, when a sync pulse
// realigns the sample phases) restarts the sum and drops the output in
// progress. coef holds the signed coefficients, tap 0 (the newest
// sample) in the LSBs. out_valid pulses PHASES+1 clocks after in_valid with
// out_sample = sum(coef[k]*x[n-k]) >>> FRAC, clamped to 0..65535.
// Design choices (the paper is silent): Q1.15 coefficients (FRAC=15), so a
// filter with unity DC gain keeps the baseline in ADC counts and the trigger
// thresholds stay in ADC counts; clamping instead of wrapping; taps reset to 0.
module fir_filter #(
  parameter int unsigned TAPS   = 64,
  parameter int unsigned N_DSP  = 16,
  parameter int unsigned COEF_W = 16,
  parameter int unsigned FRAC   = 15,
  localparam int unsigned PHASES = TAPS / N_DSP,
  localparam int unsigned ACC_W  = 17 + COEF_W + $clog2(TAPS) + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [15:0]              in_sample,
  input  logic [TAPS*COEF_W-1:0]   coef,
  output logic                     out_valid,
  output logic [15:0]              out_sample
);
  localparam int unsigned PW = (PHASES > 1) ? $clog2(PHASES) : 1;

  logic signed [16:0]      taps [TAPS];
  logic signed [ACC_W-1:0] acc, psum, total, shifted;
  logic [PW-1:0]           ph;
  logic                    running;

  // The N_DSP products of the current phase.
  always_comb begin
    psum = '0;
    for (int k = 0; k < N_DSP; k++) begin
      psum += ACC_W'(taps[int'(ph) * N_DSP + k] *
                     $signed(coef[(int'(ph) * N_DSP + k) * COEF_W +: COEF_W]));
    end
    total   = acc + psum;
    shifted = total >>> FRAC;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < TAPS; i++) taps[i] <= '0;
      acc        <= '0;
      ph         <= '0;
      running    <= 1'b0;
      out_valid  <= 1'b0;
      out_sample <= '0;
    end else begin
      out_valid <= 1'b0;
      if (running) begin
        acc <= total;
        ph  <= ph + 1'b1;
        if (ph == PW'(PHASES - 1)) begin
          running   <= 1'b0;
          out_valid <= 1'b1;
          if (shifted < 0)               out_sample <= 16'h0000;
          else if (shifted > 65535)      out_sample <= 16'hFFFF;
          else                           out_sample <= shifted[15:0];
        end
      end
      // A new sample restarts the sum; on the last phase the output above
      // is still delivered.
      if (in_valid) begin
        taps[0] <= $signed({1'b0, in_sample});
        for (int i = 1; i < TAPS; i++) taps[i] <= taps[i-1];
        acc     <= '0;
        ph      <= '0;
        running <= 1'b1;
      end
    end
  end

endmodule
