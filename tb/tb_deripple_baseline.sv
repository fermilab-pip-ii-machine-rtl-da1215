// tb_deripple_baseline: self-checking test of the de-ripple baseline block.
//
// Runs the block at a reduced size (16-word RAM, 14 points per period, a
// "clock" of 9000 Hz so a point lasts 10 or 11 clocks) against a
// behavioural RAM. The testbench keeps its own phase accumulator, its own
// copy of the stored words and its own record of the TRACKED flag over each
// point, and checks every clock:
//  * after reset, every RAM word is written with zero, in order, once;
//  * the point index steps exactly when POINTS*F_LINE added to the phase
//    reaches F_CLK, so POINTS points span one line period;
//  * an update is written within 3 clocks of the end of a point if and only
//    if the input was TRACKED over the whole point, to that point's address,
//    with q + (y - q)/2**b (floor) or y for a first load;
//  * the baseline output is the stored word of the current point, or the
//    TRACKED input while that word is empty.
// It also counts first loads, averaging updates and dropped updates and
// fails if any of them never happened.
module tb_deripple_baseline;
  import noise_elim_pkg::*;

  localparam int ADC_W = 14, Q_FRAC = 4, DEPTH = 16, POINTS = 14;
  localparam int F_CLK_HZ = 9000, F_LINE_HZ = 60;
  localparam int AW = $clog2(DEPTH), QW = ADC_W + Q_FRAC, WW = QW + 1;
  localparam longint INC = longint'(POINTS * F_LINE_HZ), MODV = longint'(F_CLK_HZ);

  logic clk = 0, rst_n = 0, in_valid = 0, y_tracked = 0;
  logic [ADC_W-1:0] y_in = '0;
  logic [3:0] b_shift = 4'd1;
  logic ram_we;
  logic [AW-1:0] ram_waddr, ram_raddr, point;
  logic [WW-1:0] ram_wdata, ram_rdata;
  logic [ADC_W-1:0] baseline;
  logic baseline_valid, init_busy, upd_write, upd_skip;

  int checks = 0, failures = 0;
  int cyc = 0;

  deripple_baseline #(.ADC_W(ADC_W), .Q_FRAC(Q_FRAC), .DEPTH(DEPTH), .POINTS(POINTS),
                      .F_CLK_HZ(F_CLK_HZ), .F_LINE_HZ(F_LINE_HZ)) dut (.*);

  // behavioural RAM seen by the block
  logic [WW-1:0] ram [DEPTH];
  always @(posedge clk) begin
    if (ram_we) ram[ram_waddr] <= ram_wdata;
    ram_rdata <= ram[ram_raddr];
  end

  always #4 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL @%0d: %s", cyc, what);
    end
  endfunction

  // ---------------- reference model, sampled at every rising edge
  bit          sv_valid [DEPTH];
  longint      sv_q     [DEPTH];
  longint      phase_m = 0;
  int          point_m = 0, since_step = 0, clr_next = 0;
  bit          bin_ok_m = 1;
  bit          pend = 0, pend_ok = 0, pend_done = 0;
  int          pend_addr = 0, pend_age = 0;
  longint      pend_y = 0;
  bit          prev_trk = 0;
  longint      prev_y = 0;
  int          n_first = 0, n_avg = 0, n_skip = 0, n_steps = 0;
  bit          running = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (init_busy) begin
        check(!running, "no clearing after the run started");
        check(ram_we && ram_wdata == 0 && int'(ram_waddr) == clr_next,
              $sformatf("clear write %0d", clr_next));
        clr_next++;
      end else begin
        if (!running) check(clr_next == DEPTH, "all words cleared");
        running = 1;
        // point index
        check(int'(point) == point_m, $sformatf("point %0d exp %0d", point, point_m));
        // writes
        if (ram_we) begin
          longint exp_q;
          check(pend && pend_ok && !pend_done && int'(ram_waddr) == pend_addr,
                $sformatf("unexpected write to %0d", ram_waddr));
          if (!sv_valid[pend_addr]) begin
            exp_q = pend_y <<< Q_FRAC;
            n_first++;
          end else begin
            exp_q = sv_q[pend_addr] + (((pend_y <<< Q_FRAC) - sv_q[pend_addr]) >>> b_shift);
            n_avg++;
          end
          check(ram_wdata == {1'b1, QW'(exp_q)},
                $sformatf("write data %h exp %h", ram_wdata, {1'b1, QW'(exp_q)}));
          sv_valid[pend_addr] = 1;
          sv_q[pend_addr]     = exp_q;
          pend_done = 1;
        end
        if (pend) begin
          pend_age++;
          if (pend_ok && !pend_done && pend_age > 3) begin
            check(0, "update not written within 3 clocks");
            pend_done = 1;
          end
        end
        // baseline output, once the current point's word has been read back
        if (since_step >= 3) begin
          if (sv_valid[point_m])
            check(baseline_valid && longint'(baseline) == (sv_q[point_m] >>> Q_FRAC),
                  $sformatf("baseline %0d exp %0d", baseline, sv_q[point_m] >>> Q_FRAC));
          else
            check(baseline_valid == prev_trk && (!prev_trk || longint'(baseline) == prev_y),
                  "baseline from tracked input while the word is empty");
        end
        // point timing and update decision
        since_step++;
        if (phase_m + INC >= MODV) begin
          phase_m = phase_m + INC - MODV;
          pend = 1; pend_ok = bin_ok_m && y_tracked; pend_done = 0; pend_age = 0;
          pend_addr = point_m; pend_y = longint'(y_in);
          if (!pend_ok) n_skip++;
          point_m = (point_m == POINTS - 1) ? 0 : point_m + 1;
          bin_ok_m = 1;
          since_step = 0;
          n_steps++;
        end else begin
          phase_m = phase_m + INC;
          bin_ok_m = bin_ok_m && y_tracked;
        end
      end
    end
    prev_trk = y_tracked;
    prev_y   = longint'(y_in);
  end

  // ---------------- stimulus
  int lvl, glitch_pt;
  initial begin
    for (int a = 0; a < DEPTH; a++) ram[a] = WW'($urandom);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    in_valid = 1;
    while (init_busy || !rst_n) @(negedge clk);
    // period by period: ripple shape + noise; TRACKED except in a few points
    for (int per = 0; per < 40; per++) begin
      if (per == 20) b_shift = 4'd3;
      glitch_pt = $urandom_range(0, POINTS - 1);
      for (int c = 0; c < F_CLK_HZ / F_LINE_HZ; c++) begin
        @(negedge clk);
        lvl = 1500 + 15 * int'(point) + int'($urandom_range(0, 20));
        y_in = ADC_W'(lvl);
        // untracked for the first 2 periods, then a glitch in one point per period
        y_tracked = (per >= 2) && !(int'(point) == glitch_pt && $urandom_range(0, 3) == 0);
      end
    end
    check(n_steps >= 40 * POINTS - 1, $sformatf("point steps %0d", n_steps));
    check(n_first >= POINTS, $sformatf("first loads %0d", n_first));
    check(n_avg > 100, $sformatf("averaging updates %0d", n_avg));
    check(n_skip > 20, $sformatf("dropped updates %0d", n_skip));
    $display("steps=%0d first=%0d avg=%0d skip=%0d", n_steps, n_first, n_avg, n_skip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
