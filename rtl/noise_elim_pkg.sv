// noise_elim_pkg: types and constants shared by the noise elimination blocks.
//
// The beam loss data path runs at one ADC sample per 125 MHz clock. Both
// discharging integrators (the dual time-constant filter in front of the
// baseline extractor and the fast-recovery filter at the output) use the same
// two-state scheme, TRACKED and UNTRACKED, with one discharge constant per
// state. Their run-time settings are held in user registers, modelled here as
// the packed struct nl_cfg_t.
//
// Discharge constants are powers of two: A = 2**-shift, so the time constant
// is about 2**shift samples. The paper gives the recursion y += A*(x-y) but no
// number for A, the thresholds or the widths; every default below is this
// design's own choice.
package noise_elim_pkg;

  // ADC sample width. Not given by the paper (its plots stay below 2000
  // counts); 14 bits is this design's choice.
  localparam int unsigned ADC_W_DEFAULT = 14;

  // Sample clock and AC line frequency (125 MS/s and 60 Hz are the paper's).
  localparam int unsigned F_CLK_HZ_DEFAULT  = 125_000_000;
  localparam int unsigned F_LINE_HZ_DEFAULT = 60;

  // Baseline RAM: 4096 words, one 1/60 s period kept as 4094 points (paper).
  localparam int unsigned RAM_DEPTH_DEFAULT = 4096;
  localparam int unsigned POINTS_DEFAULT    = 4094;

  typedef enum logic {
    UNTRACKED = 1'b0,
    TRACKED   = 1'b1
  } track_state_e;

  // User registers of one discharging integrator.
  //   shift_tracked   : A = 2**-shift_tracked while TRACKED
  //   shift_untracked : A = 2**-shift_untracked while UNTRACKED
  //   thr_track       : |x - y| <= thr_track counts toward TRACKED
  //   thr_loss        : |x - y| >  thr_loss  counts toward UNTRACKED
  //   cnt_track       : consecutive close samples needed to enter TRACKED
  //   cnt_loss        : consecutive far samples needed to leave TRACKED
  typedef struct packed {
    logic [4:0]  shift_tracked;
    logic [4:0]  shift_untracked;
    logic [15:0] thr_track;
    logic [15:0] thr_loss;
    logic [15:0] cnt_track;
    logic [15:0] cnt_loss;
  } nl_cfg_t;

  // Dual time-constant filter: slow (2**18 samples) while UNTRACKED, faster
  // (2**12 samples, still far below the 2.08 M samples of a 60 Hz period)
  // while TRACKED.
  localparam nl_cfg_t DTC_CFG_DEFAULT = '{
    shift_tracked:   5'd12,
    shift_untracked: 5'd18,
    thr_track:       16'd100,
    thr_loss:        16'd150,
    cnt_track:       16'd256,
    cnt_loss:        16'd64
  };

  // Fast-recovery filter: long constant while the input is stable (TRACKED),
  // short one while a rapid change is being followed (UNTRACKED).
  localparam nl_cfg_t FR_CFG_DEFAULT = '{
    shift_tracked:   5'd6,
    shift_untracked: 5'd2,
    thr_track:       16'd60,
    thr_loss:        16'd100,
    cnt_track:       16'd16,
    cnt_loss:        16'd4
  };

  // De-ripple weight B = 2**-B_SHIFT. The paper's worked example uses B = 0.5.
  localparam logic [3:0] B_SHIFT_DEFAULT = 4'd1;

endpackage
