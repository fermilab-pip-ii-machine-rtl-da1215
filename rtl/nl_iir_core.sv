// nl_iir_core: two-state nonlinear discharging integrator.
//
// Implements y[k+1] = y[k] + A*(x[k] - y[k]) with A = 2**-shift, where the
// shift is picked by a two-state tracker (TRACKED / UNTRACKED). The state of
// the integrator is a signed fixed-point accumulator with FRAC_W fraction
// bits, so A can be as small as 2**-FRAC_W without losing the update.
//
// Tracker: the error e = x[k] - y[k] (integer parts) is compared with two
// user thresholds. In UNTRACKED, cfg.cnt_track consecutive samples with
// |e| <= cfg.thr_track switch to TRACKED; in TRACKED, cfg.cnt_loss
// consecutive samples with |e| > cfg.thr_loss switch back to UNTRACKED. The
// recursion and the two states with their names follow the paper; the
// threshold-plus-run-length switching rule is this design's choice (the paper
// says only "close enough" and "a fast beam loss signal is seen").
//
// Interface: one sample per clock when in_valid is high; clear (synchronous)
// and rst_n (asynchronous, active low) return the accumulator to 0 and the
// state to UNTRACKED. Timing: y and tracked are registers and reflect all
// samples up to the previous clock edge (one-cycle latency); the state switch
// takes effect on the first sample after the run length is reached.
module nl_iir_core
  import noise_elim_pkg::*;
#(
  parameter int unsigned DW     = 15,   // signed sample width
  parameter int unsigned FRAC_W = 24    // fraction bits of the accumulator
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] x,
  input  nl_cfg_t              cfg,
  output logic signed [DW-1:0] y,
  output logic                 tracked
);

  localparam int unsigned AW = DW + FRAC_W;   // accumulator width

  logic signed [AW-1:0] acc;
  logic signed [AW:0]   diff;        // x - acc, one guard bit
  logic signed [AW:0]   step;        // diff * A
  logic signed [DW:0]   err;         // x - y, integer part
  logic        [DW:0]   abs_err;
  logic        [4:0]    shift;
  logic                 close_s, far_s;
  track_state_e         state;
  logic        [15:0]   run;         // length of the current close/far run

  assign shift   = (state == TRACKED) ? cfg.shift_tracked : cfg.shift_untracked;
  assign diff    = (AW+1)'(signed'({x, {FRAC_W{1'b0}}})) - (AW+1)'(acc);
  assign step    = diff >>> shift;
  assign y       = acc[AW-1 -: DW];
  assign err     = (DW+1)'(x) - (DW+1)'(y);
  assign abs_err = err[DW] ? (DW+1)'(-err) : (DW+1)'(err);
  assign close_s = 32'(abs_err) <= 32'(cfg.thr_track);
  assign far_s   = 32'(abs_err) >  32'(cfg.thr_loss);
  assign tracked = (state == TRACKED);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc   <= '0;
      state <= UNTRACKED;
      run   <= '0;
    end else if (clear) begin
      acc   <= '0;
      state <= UNTRACKED;
      run   <= '0;
    end else if (in_valid) begin
      acc <= AW'(acc + step);
      unique case (state)
        UNTRACKED: begin
          if (!close_s) begin
            run <= '0;
          end else if (run + 16'd1 >= cfg.cnt_track) begin
            state <= TRACKED;
            run   <= '0;
          end else begin
            run <= run + 16'd1;
          end
        end
        TRACKED: begin
          if (!far_s) begin
            run <= '0;
          end else if (run + 16'd1 >= cfg.cnt_loss) begin
            state <= UNTRACKED;
            run   <= '0;
          end else begin
            run <= run + 16'd1;
          end
        end
        default: state <= UNTRACKED;
      endcase
    end
  end

endmodule
