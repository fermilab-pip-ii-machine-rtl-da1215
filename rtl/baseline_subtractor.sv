// baseline_subtractor: removes the stored baseline from the raw data.
//
// Computes raw - baseline as a signed (ADC_W+1)-bit value, the signal that is
// then fed to the fast-recovery integrator. The subtraction is the paper's.
// Gating it with the baseline-valid flag is this design's choice: while no
// baseline has been stored for the current point the difference is forced to
// zero and out_valid stays low, so the next stage is not fed the raw signal.
//
// Timing: one register stage; diff and out_valid appear one clock after the
// inputs.
module baseline_subtractor
  import noise_elim_pkg::*;
#(
  parameter int unsigned ADC_W = ADC_W_DEFAULT
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [ADC_W-1:0]      raw,
  input  logic [ADC_W-1:0]      baseline,
  input  logic                  baseline_valid,
  output logic signed [ADC_W:0] diff,
  output logic                  out_valid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      diff      <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && baseline_valid;
      if (in_valid && baseline_valid)
        diff <= signed'({1'b0, raw}) - signed'({1'b0, baseline});
      else
        diff <= '0;
    end
  end

endmodule
