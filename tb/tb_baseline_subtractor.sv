// tb_baseline_subtractor: self-checking test of the baseline subtractor.
//
// Random raw samples and baselines over the full ADC range, with random
// valid flags. Checks raw - baseline (signed, one clock later), and that
// the output is zero and not valid unless both the sample and the baseline
// are valid.
module tb_baseline_subtractor;

  localparam int ADC_W = 14;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, baseline_valid = 0;
  logic [ADC_W-1:0] raw = '0, baseline = '0;
  logic signed [ADC_W:0] diff;
  logic out_valid;

  int checks = 0, failures = 0;
  int cyc = 0;

  baseline_subtractor #(.ADC_W(ADC_W)) dut (.clk, .rst_n, .in_valid, .raw, .baseline,
                                            .baseline_valid, .diff, .out_valid);

  always #4 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (50000) @(posedge clk);
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

  int e, nneg = 0, nvalid = 0;
  bit ev;

  initial begin
    repeat (2) @(posedge clk);
    #1 check(out_valid == 0 && diff == 0, "reset");
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      raw            = ADC_W'($urandom);
      baseline       = (i % 3 == 0) ? ADC_W'($urandom) : raw + ADC_W'($urandom_range(0, 200)) - ADC_W'(100);
      in_valid       = ($urandom_range(0, 9) != 0);
      baseline_valid = ($urandom_range(0, 9) != 0);
      ev = in_valid && baseline_valid;
      e  = ev ? int'(raw) - int'(baseline) : 0;
      @(posedge clk); #1;
      check(out_valid == ev, "out_valid");
      check(int'(diff) == e, $sformatf("diff %0d exp %0d", diff, e));
      if (ev && e < 0) nneg++;
      if (ev) nvalid++;
    end
    check(nneg > 1000 && nvalid > 10000, "negative differences exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
