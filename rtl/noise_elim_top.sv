// noise_elim_top: beam loss data noise elimination block.
//
// Removes both high-frequency noise and the 60 Hz (and harmonics) ripple of
// the AC mains from one digitized beam loss signal, one sample per 125 MHz
// clock. The data flow follows the block diagram of the scheme:
//
//   adc_data --+--------------------------> (-) --> fast_recovery_integrator --> raw_sub_filtered
//              |                             ^
//              +--> dual_tc_integrator --> deripple_baseline <--> baseline_ram
//
// The dual time-constant filter yields a clean, slowly varying copy of the
// data and a TRACKED flag; the de-ripple block averages that copy, point by
// point, over many 60 Hz periods into the baseline RAM, skipping any point
// where the filter was not TRACKED (a beam loss). The stored baseline of the
// current point is subtracted from the raw sample and the difference is
// smoothed by the fast-recovery integrator, which switches to a short time
// constant when it sees a rapid change so that beam losses come through
// promptly.
//
// The ADC itself is outside this block: its samples enter on adc_data with
// adc_valid. The user registers of the scheme (time constants, switching
// thresholds, the averaging weight) are inputs here (dtc_cfg, fr_cfg,
// b_shift); the register bus that would hold them is not part of this design.
// The structure is the paper's; the widths, the register layout and the
// one-cycle input register are this design's choices.
//
// Timing: adc_data is registered once on entry; nl_filter/nl_tracked follow
// two clocks after the sample, raw_sub three clocks and raw_sub_filtered four.
// The baseline path is much slower than any of these delays, so no
// alignment delay is added on the raw path.
module noise_elim_top
  import noise_elim_pkg::*;
#(
  parameter int unsigned ADC_W     = ADC_W_DEFAULT,
  parameter int unsigned FRAC_W    = 24,
  parameter int unsigned Q_FRAC    = 4,
  parameter int unsigned DEPTH     = RAM_DEPTH_DEFAULT,
  parameter int unsigned POINTS    = POINTS_DEFAULT,
  parameter int unsigned F_CLK_HZ  = F_CLK_HZ_DEFAULT,
  parameter int unsigned F_LINE_HZ = F_LINE_HZ_DEFAULT,
  localparam int unsigned AW       = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // ADC sample stream
  input  logic                  adc_valid,
  input  logic [ADC_W-1:0]      adc_data,
  // user registers
  input  nl_cfg_t               dtc_cfg,
  input  nl_cfg_t               fr_cfg,
  input  logic [3:0]            b_shift,
  // outputs
  output logic [ADC_W-1:0]      nl_filter,
  output logic                  nl_tracked,
  output logic [ADC_W-1:0]      baseline,
  output logic                  baseline_valid,
  output logic signed [ADC_W:0] raw_sub,
  output logic                  raw_sub_valid,
  output logic signed [ADC_W:0] raw_sub_filtered,
  output logic                  loss,
  // status
  output logic [AW-1:0]         point,
  output logic                  init_busy,
  output logic                  upd_write,
  output logic                  upd_skip
);

  localparam int unsigned WW = ADC_W + Q_FRAC + 1;

  logic [ADC_W-1:0] raw_q;
  logic             raw_v;
  logic             ram_we;
  logic [AW-1:0]    ram_waddr, ram_raddr;
  logic [WW-1:0]    ram_wdata, ram_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      raw_q <= '0;
      raw_v <= 1'b0;
    end else begin
      raw_q <= adc_data;
      raw_v <= adc_valid;
    end
  end

  dual_tc_integrator #(.ADC_W(ADC_W), .FRAC_W(FRAC_W)) u_dtc (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (raw_v),
    .adc_in   (raw_q),
    .cfg      (dtc_cfg),
    .y_out    (nl_filter),
    .tracked  (nl_tracked)
  );

  deripple_baseline #(
    .ADC_W     (ADC_W),
    .Q_FRAC    (Q_FRAC),
    .DEPTH     (DEPTH),
    .POINTS    (POINTS),
    .F_CLK_HZ  (F_CLK_HZ),
    .F_LINE_HZ (F_LINE_HZ)
  ) u_deripple (
    .clk            (clk),
    .rst_n          (rst_n),
    .in_valid       (raw_v),
    .y_in           (nl_filter),
    .y_tracked      (nl_tracked),
    .b_shift        (b_shift),
    .ram_we         (ram_we),
    .ram_waddr      (ram_waddr),
    .ram_wdata      (ram_wdata),
    .ram_raddr      (ram_raddr),
    .ram_rdata      (ram_rdata),
    .baseline       (baseline),
    .baseline_valid (baseline_valid),
    .point          (point),
    .init_busy      (init_busy),
    .upd_write      (upd_write),
    .upd_skip       (upd_skip)
  );

  baseline_ram #(.DEPTH(DEPTH), .WIDTH(WW)) u_ram (
    .clk   (clk),
    .we    (ram_we),
    .waddr (ram_waddr),
    .wdata (ram_wdata),
    .raddr (ram_raddr),
    .rdata (ram_rdata)
  );

  baseline_subtractor #(.ADC_W(ADC_W)) u_sub (
    .clk            (clk),
    .rst_n          (rst_n),
    .in_valid       (raw_v),
    .raw            (raw_q),
    .baseline       (baseline),
    .baseline_valid (baseline_valid),
    .diff           (raw_sub),
    .out_valid      (raw_sub_valid)
  );

  fast_recovery_integrator #(.ADC_W(ADC_W), .FRAC_W(FRAC_W)) u_fr (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (raw_sub_valid),
    .x_in     (raw_sub),
    .cfg      (fr_cfg),
    .y_out    (raw_sub_filtered),
    .loss     (loss)
  );

endmodule
