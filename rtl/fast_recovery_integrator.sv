// fast_recovery_integrator: discharging integrator on the baseline-corrected
// signal (last stage).
//
// Same two-state structure as the first-stage filter, used the other way
// round: while the input is stable (TRACKED) a long time constant removes the
// high-frequency noise; when a rapid change such as a beam loss is seen the
// filter goes UNTRACKED and uses a short time constant, so the output follows
// the loss promptly and recovers quickly when it is over. The time constants
// and the switching conditions come from user registers (cfg), as the paper
// describes. Holding the output at zero while no valid baseline exists
// (in_valid low) is this design's choice: the filter restarts from zero when
// the first baseline-corrected sample arrives.
//
// Interface: signed (ADC_W+1)-bit samples, one per clock when in_valid is
// high. y_out is the filtered signal, loss is high while the filter is
// UNTRACKED (and in_valid high). Timing: y_out is registered, one clock after the sample.
module fast_recovery_integrator
  import noise_elim_pkg::*;
#(
  parameter int unsigned ADC_W  = ADC_W_DEFAULT,
  parameter int unsigned FRAC_W = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [ADC_W:0]   x_in,
  input  nl_cfg_t                 cfg,
  output logic signed [ADC_W:0]   y_out,
  output logic                    loss
);

  logic tracked;

  nl_iir_core #(.DW(ADC_W + 1), .FRAC_W(FRAC_W)) u_core (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear    (!in_valid),
    .in_valid (in_valid),
    .x        (x_in),
    .cfg      (cfg),
    .y        (y_out),
    .tracked  (tracked)
  );

  assign loss = in_valid && !tracked;

endmodule
