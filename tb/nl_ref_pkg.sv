// nl_ref_pkg: reference model of the two-state discharging integrator, used
// by the testbenches to work out expected outputs independently of the RTL.
//
// The model keeps the accumulator as a 64-bit integer scaled by 2**frac and
// applies y += (x - y) / 2**shift with floor rounding, choosing the shift and
// switching state with the same threshold and run-length rule as documented
// for the filters: UNTRACKED -> TRACKED after cnt_track consecutive samples
// with |x - y| <= thr_track, TRACKED -> UNTRACKED after cnt_loss consecutive
// samples with |x - y| > thr_loss. y is the floor of the accumulator.
package nl_ref_pkg;
  import noise_elim_pkg::*;

  class nl_ref;
    longint acc;
    int     frac;
    bit     trk;
    int     run;
    int     n_enter;   // UNTRACKED -> TRACKED transitions
    int     n_leave;   // TRACKED -> UNTRACKED transitions

    function new(int frac_bits);
      frac = frac_bits;
      reset();
      n_enter = 0;
      n_leave = 0;
    endfunction

    function void reset();
      acc = 0;
      trk = 0;
      run = 0;
    endfunction

    function longint y();
      return acc >>> frac;
    endfunction

    // One sample; the outputs for it appear after the call.
    function void step(longint x, nl_cfg_t cfg);
      longint d, e, ae;
      int s;
      s  = trk ? int'(cfg.shift_tracked) : int'(cfg.shift_untracked);
      e  = x - y();
      ae = (e < 0) ? -e : e;
      d  = (x <<< frac) - acc;
      acc = acc + (d >>> s);
      if (!trk) begin
        if (ae > longint'(cfg.thr_track)) run = 0;
        else if (run + 1 >= int'(cfg.cnt_track)) begin trk = 1; run = 0; n_enter++; end
        else run++;
      end else begin
        if (ae <= longint'(cfg.thr_loss)) run = 0;
        else if (run + 1 >= int'(cfg.cnt_loss)) begin trk = 0; run = 0; n_leave++; end
        else run++;
      end
    endfunction
  endclass

endpackage
