// dual_tc_integrator: dual time-constant discharging integrator (first stage).
//
// Filters the raw ADC samples with y += A*(x - y) before baseline extraction.
// At start-up, or when the output is far from the input, the filter is
// UNTRACKED and uses the long time constant, so it drifts slowly toward the
// data and does not follow a sudden beam loss. Once the output is close to
// the input it becomes TRACKED and uses the short time constant, so it follows
// the 60 Hz ripple while the high-frequency noise is averaged away. The
// TRACKED flag goes with the output to the de-ripple block, which updates the
// stored baseline only from TRACKED samples. This behaviour is the paper's;
// the switching rule, the fixed-point format and the default constants are
// this design's choices (see nl_iir_core and noise_elim_pkg).
//
// Interface: unsigned ADC_W-bit samples, one per clock when in_valid is high;
// cfg holds the user registers. y_out is the filter output in ADC counts
// (the accumulator truncated to an integer), tracked the state.
// Timing: both outputs are registered, one clock after the sample.
module dual_tc_integrator
  import noise_elim_pkg::*;
#(
  parameter int unsigned ADC_W  = ADC_W_DEFAULT,
  parameter int unsigned FRAC_W = 24
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [ADC_W-1:0] adc_in,
  input  nl_cfg_t          cfg,
  output logic [ADC_W-1:0] y_out,
  output logic             tracked
);

  logic signed [ADC_W:0] x_s, y_s;

  // Unsigned ADC code to a non-negative signed sample.
  assign x_s = signed'({1'b0, adc_in});

  nl_iir_core #(.DW(ADC_W + 1), .FRAC_W(FRAC_W)) u_core (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear    (1'b0),
    .in_valid (in_valid),
    .x        (x_s),
    .cfg      (cfg),
    .y        (y_s),
    .tracked  (tracked)
  );

  // The output is a weighted mean of non-negative samples, so it is never
  // negative; the clamp keeps the conversion safe for any accumulator value.
  assign y_out = y_s[ADC_W] ? '0 : y_s[ADC_W-1:0];

endmodule
