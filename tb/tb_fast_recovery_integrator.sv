// tb_fast_recovery_integrator: self-checking test of the fast-recovery filter.
//
// The input is held invalid first (the output must stay 0), then carries
// zero-mean noise, a beam-loss pulse of +200 counts and noise again. Every
// output sample is compared with the reference model in nl_ref_pkg. Checks
// made independently of the model: the filter goes to loss within a few
// samples of the pulse edge, reaches 85% of the pulse within 40 samples
// (short constant) and comes back below 40 counts within 60 samples of the
// pulse end, and on the noise alone the output spread is well below the
// input spread (long constant).
module tb_fast_recovery_integrator;
  import noise_elim_pkg::*;
  import nl_ref_pkg::*;

  localparam int ADC_W = 14;
  localparam int FRAC_W = 24;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [ADC_W:0] x_in = '0;
  logic signed [ADC_W:0] y_out;
  logic loss;
  nl_cfg_t cfg;

  int checks = 0, failures = 0;
  int cyc = 0;

  fast_recovery_integrator #(.ADC_W(ADC_W), .FRAC_W(FRAC_W)) dut (
    .clk, .rst_n, .in_valid, .x_in, .cfg, .y_out, .loss
  );

  always #4 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
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

  task automatic sample(bit v, int x);
    @(negedge clk);
    x_in     = (ADC_W+1)'(x);
    in_valid = v;
    @(posedge clk);
    if (v) m.step(longint'(x), cfg);
    else   m.reset();
    #1;
    check(longint'(y_out) == m.y(), $sformatf("y %0d exp %0d", y_out, m.y()));
    check(loss == (v && !m.trk), $sformatf("loss %0d", loss));
  endtask

  function automatic int noise();
    return int'($urandom_range(0, 80)) - 40;
  endfunction

  int first_loss, reach, back, loss_events;
  longint sum_in2, sum_out2;
  bit prev_loss;

  initial begin
    cfg = FR_CFG_DEFAULT;
    m = new(FRAC_W);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // invalid input: output held at 0
    for (int i = 0; i < 50; i++) sample(0, 500);
    check(y_out == 0, "output 0 while input invalid");

    // noise, then measure noise suppression
    for (int i = 0; i < 2000; i++) sample(1, noise());
    sum_in2 = 0; sum_out2 = 0;
    loss_events = 0; prev_loss = loss;
    for (int i = 0; i < 20000; i++) begin
      int n;
      n = noise();
      sample(1, n);
      sum_in2  += longint'(n * n);
      sum_out2 += longint'(y_out) * longint'(y_out);
    end
    $display("noise power in=%0d out=%0d", sum_in2 / 20000, sum_out2 / 20000);
    check(sum_out2 * 8 < sum_in2, "long time constant suppresses noise by more than 8x in power");

    // beam loss pulse
    first_loss = -1; reach = -1;
    for (int i = 0; i < 500; i++) begin
      sample(1, 200 + noise());
      if (loss && first_loss < 0) first_loss = i;
      if (y_out >= 170 && reach < 0) reach = i;
      if (loss && !prev_loss) loss_events++;
      prev_loss = loss;
    end
    $display("loss flagged after %0d, 85%% reached after %0d samples", first_loss, reach);
    check(first_loss >= 0 && first_loss <= 8, "loss flagged promptly");
    check(reach >= 0 && reach <= 40, "output follows the loss promptly");

    back = -1;
    for (int i = 0; i < 2000; i++) begin
      sample(1, noise());
      if (back < 0 && y_out < 40) back = i;
      if (loss && !prev_loss) loss_events++;
      prev_loss = loss;
    end
    $display("recovered after %0d samples", back);
    check(back >= 0 && back <= 60, "fast recovery after the loss");
    check(loss == 0, "stable again after the loss");
    check(loss_events >= 2, $sformatf("loss entered %0d times", loss_events));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
