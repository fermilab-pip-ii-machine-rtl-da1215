// tb_noise_elim_top: end-to-end test of the noise elimination block at its
// default size (125 MHz sample clock, 60 Hz line, 4094 points in a 4096-word
// baseline RAM) with the default register settings.
//
// Stimulus: 6.25 million samples (three line periods) of a synthetic beam
// loss signal: a 60 Hz ripple (fundamental of 90 counts plus a third harmonic
// of 25 counts) on a level of 1650 counts, uniform noise of +-50 counts, and
// one beam loss of +250 counts lasting 60000 samples near the end. The
// filters start from zero.
//
// Checks, against the noise-free ripple computed here:
//  * the first-stage filter acquires slowly (long constant), locks, follows
//    the ripple within 20 counts once settled after each lock, leaves TRACKED during the loss and locks
//    again after it;
//  * the baseline follows the ripple within 20 counts once valid, including
//    during the loss (no baseline updates are taken from the loss);
//  * the de-ripple block writes updates and drops some during the loss;
//  * the corrected, filtered output stays within 30 counts of zero away from
//    the loss, exceeds 200 counts during it, flags the loss promptly and
//    recovers within 200 samples after it;
//  * the point index wraps once per line period (125e6/60 samples).
// Each mechanism (lock, unlock, update, dropped update, loss flag, recovery)
// is counted and must occur at least once.
module tb_noise_elim_top;
  import noise_elim_pkg::*;

  localparam int ADC_W = ADC_W_DEFAULT;
  localparam int AW = $clog2(RAM_DEPTH_DEFAULT);
  localparam int N_SAMPLES = 6_250_000;
  localparam int LOSS_START = 5_100_000;
  localparam int LOSS_LEN = 60_000;
  localparam real PERIOD = real'(F_CLK_HZ_DEFAULT) / real'(F_LINE_HZ_DEFAULT);
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst_n = 0, adc_valid = 0;
  logic [ADC_W-1:0] adc_data = '0;
  nl_cfg_t dtc_cfg, fr_cfg;
  logic [3:0] b_shift;
  logic [ADC_W-1:0] nl_filter, baseline;
  logic nl_tracked, baseline_valid, raw_sub_valid, loss;
  logic signed [ADC_W:0] raw_sub, raw_sub_filtered;
  logic [AW-1:0] point;
  logic init_busy, upd_write, upd_skip;

  noise_elim_top dut (.*);

  always #4 clk = ~clk;

  int checks = 0, failures = 0;
  int t = 0;          // index of the sample being presented

  initial begin
    repeat (N_SAMPLES + 20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL @%0d: %s", t, what);
    end
  endfunction

  function automatic real ripple(int s);
    real ph;
    ph = 2.0 * PI * real'(s) / PERIOD;
    return 1650.0 + 90.0 * $sin(ph) + 25.0 * $sin(3.0 * ph);
  endfunction

  function automatic bit in_loss(int s);
    return s >= LOSS_START && s < LOSS_START + LOSS_LEN;
  endfunction

  // mechanism counters
  int n_lock = 0, n_unlock = 0, n_upd = 0, n_skip = 0, n_fr_loss = 0, n_recover = 0;
  int first_lock = -1, fr_flag_delay = -1, recover_delay = -1;
  bit prev_trk = 0, prev_loss = 0;
  int err_f_max = 0, err_b_max = 0, rsf_max = 0, rsf_loss_min = 100000;

  int n_wrap = 0, last_wrap = -1, last_lock = 0;
  logic [AW-1:0] prev_point = '0;

  // The filter locks when it is within thr_track of the input and then
  // settles with its short constant (2**12 samples); baseline points stored
  // in that first SETTLE samples after the first lock carry its error until
  // two averaging updates (B = 1/2) have cut it by four. Those samples are not compared.
  localparam int SETTLE = 50_000;
  function automatic bit settling(int s);
    if (first_lock < 0 || s < first_lock) return 1;
    for (int k = 0; k < 3; k++)
      if (real'(s - first_lock) >= k * PERIOD && real'(s - first_lock) < k * PERIOD + SETTLE)
        return 1;
    return 0;
  endfunction

  // outputs are compared a few samples after their input (pipeline delay)
  always @(posedge clk) if (rst_n && !init_busy) begin
    automatic int tn = t - 2;           // sample behind nl_filter / baseline
    automatic real rp = ripple(tn);
    automatic int ef, eb, rs, ars;
    if (upd_write) n_upd++;
    if (upd_skip && in_loss(tn - 600)) n_skip++;
    if (nl_tracked && !prev_trk) begin
      n_lock++;
      last_lock = tn;
      if (first_lock < 0) first_lock = tn;
    end
    if (!nl_tracked && prev_trk) n_unlock++;
    prev_trk = nl_tracked;

    ef = int'(nl_filter) - int'(rp);
    eb = int'(baseline) - int'(rp);
    if (point == 0 && prev_point != 0) begin
      if (last_wrap >= 0) begin
        n_wrap++;
        check(real'(tn - last_wrap) > PERIOD - 2.0 && real'(tn - last_wrap) < PERIOD + 2.0,
              $sformatf("point index period %0d samples", tn - last_wrap));
      end
      last_wrap = tn;
    end
    prev_point = point;
    if (nl_tracked && !in_loss(tn) && tn - last_lock >= SETTLE) begin
      if ((ef < 0 ? -ef : ef) > err_f_max) err_f_max = (ef < 0 ? -ef : ef);
      check(ef > -20 && ef < 20, $sformatf("filter off the ripple by %0d", ef));
    end
    if (baseline_valid && tn > 1_300_000 && !settling(tn)) begin
      if ((eb < 0 ? -eb : eb) > err_b_max) err_b_max = (eb < 0 ? -eb : eb);
      check(eb > -20 && eb < 20, $sformatf("baseline off the ripple by %0d", eb));
    end

    // fast-recovery output
    rs  = int'(raw_sub_filtered);
    ars = rs < 0 ? -rs : rs;
    if (raw_sub_valid && tn > 1_300_000 && !settling(tn)) begin
      if (in_loss(tn) && tn >= LOSS_START + 200) begin
        if (rs < rsf_loss_min) rsf_loss_min = rs;
        check(rs > 200, $sformatf("loss not passed: %0d", rs));
      end else if (!in_loss(tn) && !in_loss(tn - 200)) begin
        if (ars > rsf_max) rsf_max = ars;
        check(ars < 30, $sformatf("residual %0d", rs));
      end
    end
    if (loss && !prev_loss && tn > 1_300_000) begin
      n_fr_loss++;
      if (fr_flag_delay < 0) fr_flag_delay = tn - LOSS_START;
    end
    prev_loss = loss;
    if (tn >= LOSS_START + LOSS_LEN && recover_delay < 0 && rs < 30) begin
      recover_delay = tn - (LOSS_START + LOSS_LEN);
      n_recover++;
    end
  end

  real v;
  initial begin
    dtc_cfg = DTC_CFG_DEFAULT;
    fr_cfg  = FR_CFG_DEFAULT;
    b_shift = B_SHIFT_DEFAULT;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (init_busy) @(negedge clk);
    for (int s = 0; s < N_SAMPLES; s++) begin
      @(negedge clk);
      v = ripple(s) + real'(int'($urandom_range(0, 100)) - 50);
      if (in_loss(s)) v = v + 250.0;
      adc_data  = ADC_W'(int'(v));
      adc_valid = 1;
      t = s;
    end
    repeat (8) @(negedge clk);

    $display("first lock at sample %0d; locks=%0d unlocks=%0d", first_lock, n_lock, n_unlock);
    $display("updates=%0d dropped during loss=%0d", n_upd, n_skip);
    $display("max |filter-ripple|=%0d max |baseline-ripple|=%0d", err_f_max, err_b_max);
    $display("max |residual|=%0d, min output in loss=%0d, loss flagged after %0d, recovered after %0d",
             rsf_max, rsf_loss_min, fr_flag_delay, recover_delay);
    // slow acquisition: long constant 2**18, lock expected after ~2**18*ln(1650/100)
    check(first_lock > 400_000 && first_lock < 1_200_000, "first lock with the long constant");
    check(n_lock >= 2, $sformatf("filter locked %0d times", n_lock));
    check(n_unlock >= 1, $sformatf("filter unlocked %0d times", n_unlock));
    check(n_wrap >= 2, $sformatf("full line periods seen %0d", n_wrap));
    check(n_upd > 8000, $sformatf("baseline updates %0d", n_upd));
    check(n_skip > 50, $sformatf("updates dropped during loss %0d", n_skip));
    check(n_fr_loss >= 1 && fr_flag_delay >= 0 && fr_flag_delay < 20, "loss flagged promptly");
    check(n_recover == 1 && recover_delay < 200, "fast recovery after the loss");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
