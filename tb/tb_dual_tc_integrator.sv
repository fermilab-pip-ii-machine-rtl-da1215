// tb_dual_tc_integrator: self-checking test of the dual time-constant filter.
//
// Drives a noisy flat input from a zero start (slow acquisition while
// UNTRACKED), lets the filter lock (TRACKED), applies a beam-loss-like step
// that must switch it back to UNTRACKED and then removes it so that it locks
// again. Every output sample is compared with the reference model in
// nl_ref_pkg. Independently of the model it checks: the first acquisition
// follows the long time constant (after 2**shift_untracked samples the
// output is within 1 count of (1 - (1 - 2**-s)**n) of the input), the
// output moves less than a fixed bound during the loss, and each state
// transition happens at least once.
module tb_dual_tc_integrator;
  import noise_elim_pkg::*;
  import nl_ref_pkg::*;

  localparam int ADC_W = 14;
  localparam int FRAC_W = 24;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [ADC_W-1:0] adc_in = '0;
  logic [ADC_W-1:0] y_out;
  logic tracked;
  nl_cfg_t cfg;

  int checks = 0, failures = 0;
  int cyc = 0;

  dual_tc_integrator #(.ADC_W(ADC_W), .FRAC_W(FRAC_W)) dut (
    .clk, .rst_n, .in_valid, .adc_in, .cfg, .y_out, .tracked
  );

  always #4 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  nl_ref m;
  bit prev_trk;
  int enter_seen = 0, leave_seen = 0;

  // Drive one sample and compare with the model.
  task automatic sample(int x);
    @(negedge clk);
    adc_in   = ADC_W'(x);
    in_valid = 1;
    @(posedge clk);
    m.step(longint'(x), cfg);
    #1;
    check(longint'(y_out) == m.y(), $sformatf("y %0d exp %0d", y_out, m.y()));
    check(tracked == m.trk, $sformatf("tracked %0d exp %0d", tracked, m.trk));
    if (tracked && !prev_trk) enter_seen++;
    if (!tracked && prev_trk) leave_seen++;
    prev_trk = tracked;
  endtask

  int base, y_before, n_loss;
  real expct;

  initial begin
    cfg = '{shift_tracked: 5'd4, shift_untracked: 5'd10, thr_track: 16'd40,
            thr_loss: 16'd80, cnt_track: 16'd32, cnt_loss: 16'd8};
    m = new(FRAC_W);
    prev_trk = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check(y_out == 0 && tracked == 0, "reset state");

    // 1. slow acquisition of a clean level with the long constant
    base = 1600;
    for (int i = 0; i < 1024; i++) sample(base);
    expct = base * (1.0 - (1.0 - 1.0/1024.0) ** 1024);
    check(tracked == 0, "still UNTRACKED after 1024 samples");
    check(y_out >= int'(expct) - 2 && y_out <= int'(expct) + 1,
          $sformatf("long time constant: y %0d expected about %0f", y_out, expct));

    // 2. noisy level until locked, then some more
    for (int i = 0; i < 20000; i++) sample(base + int'($urandom_range(0, 60)) - 30);
    check(tracked == 1, "TRACKED after convergence");
    check(y_out > base - 20 && y_out < base + 20, "output near level");

    // 3. beam loss: +300 for 2000 samples
    y_before = y_out;
    n_loss = 0;
    for (int i = 0; i < 2000; i++) begin
      sample(base + 300 + int'($urandom_range(0, 60)) - 30);
      if (!tracked) n_loss++;
    end
    check(n_loss > 1900, $sformatf("UNTRACKED during loss (%0d of 2000)", n_loss));
    // Long constant: at most 2000/1024 of the step (plus the few TRACKED samples)
    check(y_out - y_before < 300 * 2 * 2000 / 1024 / 2 + 120,
          $sformatf("output held near baseline during loss: moved %0d", y_out - y_before));

    // 4. loss over: relock
    for (int i = 0; i < 20000; i++) sample(base + int'($urandom_range(0, 60)) - 30);
    check(tracked == 1, "TRACKED again after the loss");

    check(enter_seen >= 2, $sformatf("UNTRACKED->TRACKED seen %0d times", enter_seen));
    check(leave_seen >= 1, $sformatf("TRACKED->UNTRACKED seen %0d times", leave_seen));
    $display("transitions: enter=%0d leave=%0d", enter_seen, leave_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
