// deripple_baseline: de-ripple baseline extraction and storage control.
//
// The 60 Hz ripple on the beam loss signal repeats every 1/60 s, so its
// shape can be learned and subtracted. One period is divided into POINTS
// points (4094 in the paper), each with one word in the baseline RAM. For
// every point m the stored value is an exponentially weighted average over
// past periods, q <= q + B*(y - q) with B = 2**-b_shift, where y is the
// output of the dual time-constant filter (paper, Eq. 2). The average is
// updated only when the filter was TRACKED, so a beam loss never enters the
// baseline. All of this is the paper's.
//
// This design's choices, where the paper gives no detail:
//  * Point timing: a phase accumulator adds POINTS*F_LINE_HZ every clock and
//    steps to the next point when it passes F_CLK_HZ, so exactly POINTS points
//    span 1/F_LINE_HZ seconds (a point lasts 508 or 509 clocks at 125 MHz).
//    It free-runs from reset; there is no line-sync input.
//  * Update sample: y is taken at the last clock of each point, and the
//    update is done only if the filter was TRACKED on every clock of that
//    point (the "few other conditions" of the paper are not specified).
//  * Update as a multi-cycle read-modify-write: the stored word of the point
//    is already on the RAM read port, the new value is computed in the next
//    clock and written in the one after (3 clocks per update, far below the
//    ~509 clocks between updates).
//  * RAM word: a valid bit and the baseline with Q_FRAC fraction bits. The
//    first update of an empty word loads y directly. After reset the block
//    writes zero to every word (DEPTH clocks, init_busy high).
//  * Baseline output: the stored word of the current point, read back from
//    the RAM. While that word is still empty, the filter output is used if the
//    filter is TRACKED; otherwise baseline_valid is low.
//
// Two assertions state the rules of the read-modify-write: it is finished
// before the next point ends, and it never writes the word being read.
// They sample rst_n on the clock, so lint may note that rst_n is used both
// as an asynchronous reset and synchronously; the logic uses it only
// asynchronously.
//
// Timing: baseline and baseline_valid are registered; a new point's stored
// value reaches them two clocks after the point starts. upd_write and
// upd_skip pulse for one clock per point, when an update is written or
// dropped.
module deripple_baseline
  import noise_elim_pkg::*;
#(
  parameter int unsigned ADC_W     = ADC_W_DEFAULT,
  parameter int unsigned Q_FRAC    = 4,
  parameter int unsigned DEPTH     = RAM_DEPTH_DEFAULT,
  parameter int unsigned POINTS    = POINTS_DEFAULT,
  parameter int unsigned F_CLK_HZ  = F_CLK_HZ_DEFAULT,
  parameter int unsigned F_LINE_HZ = F_LINE_HZ_DEFAULT,
  localparam int unsigned AW       = $clog2(DEPTH),
  localparam int unsigned QW       = ADC_W + Q_FRAC,
  localparam int unsigned WW       = QW + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [ADC_W-1:0] y_in,
  input  logic             y_tracked,
  input  logic [3:0]       b_shift,
  // baseline RAM
  output logic             ram_we,
  output logic [AW-1:0]    ram_waddr,
  output logic [WW-1:0]    ram_wdata,
  output logic [AW-1:0]    ram_raddr,
  input  logic [WW-1:0]    ram_rdata,
  // baseline of the current point
  output logic [ADC_W-1:0] baseline,
  output logic             baseline_valid,
  // status
  output logic [AW-1:0]    point,
  output logic             init_busy,
  output logic             upd_write,
  output logic             upd_skip
);

  typedef struct packed {
    logic          valid;
    logic [QW-1:0] q;
  } bword_t;

  typedef enum logic [1:0] {
    S_CLEAR,
    S_RUN,
    S_CALC,
    S_WRITE
  } state_e;

  localparam longint unsigned PH_INC = longint'(POINTS) * longint'(F_LINE_HZ);
  localparam longint unsigned PH_MOD = longint'(F_CLK_HZ);

  if (POINTS > DEPTH) begin : g_chk_depth
    $error("deripple_baseline: POINTS must not exceed DEPTH");
  end
  if (PH_MOD < 4 * PH_INC) begin : g_chk_rate
    $error("deripple_baseline: a point must last at least 4 clocks");
  end

  state_e        state;
  logic [31:0]   phase;
  logic [AW-1:0] clr_addr;
  logic          step;
  logic          bin_ok;
  logic [QW-1:0] y_cap;
  logic          ok_cap;
  bword_t        q_cap;
  logic [AW-1:0] m_cap;
  bword_t        rd, wr_word;
  logic [QW-1:0] q_new;
  logic signed [QW+1:0] delta;

  assign rd = bword_t'(ram_rdata);
  assign step = (state != S_CLEAR) && (64'(phase) + PH_INC >= PH_MOD);

  // q + B*(y - q); an empty word takes y directly.
  assign delta = (QW+2)'(signed'({2'b00, y_cap})) - (QW+2)'(signed'({2'b00, q_cap.q}));
  assign q_new = q_cap.valid ? QW'((QW+2)'(signed'({2'b00, q_cap.q})) + (delta >>> b_shift))
                             : y_cap;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_CLEAR;
      clr_addr  <= '0;
      phase     <= '0;
      point     <= '0;
      bin_ok    <= 1'b1;
      y_cap     <= '0;
      ok_cap    <= 1'b0;
      q_cap     <= '0;
      m_cap     <= '0;
      wr_word   <= '0;
      upd_write <= 1'b0;
      upd_skip  <= 1'b0;
    end else begin
      upd_write <= 1'b0;
      upd_skip  <= 1'b0;

      if (state == S_CLEAR) begin
        clr_addr <= clr_addr + 1'b1;
        if (32'(clr_addr) == DEPTH - 1) state <= S_RUN;
      end else begin
        // point timing
        if (step) begin
          phase <= 32'(64'(phase) + PH_INC - PH_MOD);
          point <= (32'(point) == POINTS - 1) ? '0 : point + 1'b1;
        end else begin
          phase <= 32'(64'(phase) + PH_INC);
        end

        // TRACKED over the whole point
        if (step) bin_ok <= 1'b1;
        else      bin_ok <= bin_ok && in_valid && y_tracked;

        unique case (state)
          S_RUN: if (step) begin
            y_cap  <= {y_in, {Q_FRAC{1'b0}}};
            ok_cap <= bin_ok && in_valid && y_tracked;
            q_cap  <= rd;
            m_cap  <= point;
            state  <= S_CALC;
          end
          S_CALC: begin
            wr_word <= '{valid: 1'b1, q: q_new};
            if (ok_cap) begin
              state <= S_WRITE;
            end else begin
              upd_skip <= 1'b1;
              state    <= S_RUN;
            end
          end
          S_WRITE: begin
            upd_write <= 1'b1;
            state     <= S_RUN;
          end
          default: state <= S_RUN;
        endcase
      end
    end
  end

  // Rules of the multi-cycle update: it ends before the next point does,
  // and a write never targets the word being read for the baseline output.
  a_update_done: assert property (@(posedge clk) disable iff (!rst_n)
    step |-> state == S_RUN);
  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_WRITE) |-> ram_waddr != ram_raddr || POINTS == 1);

  assign init_busy = (state == S_CLEAR);
  assign ram_we    = (state == S_CLEAR) || (state == S_WRITE);
  assign ram_waddr = (state == S_CLEAR) ? clr_addr : m_cap;
  assign ram_wdata = (state == S_CLEAR) ? '0 : WW'(wr_word);
  assign ram_raddr = point;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      baseline       <= '0;
      baseline_valid <= 1'b0;
    end else if (state == S_CLEAR) begin
      baseline       <= '0;
      baseline_valid <= 1'b0;
    end else if (rd.valid) begin
      baseline       <= rd.q[QW-1 -: ADC_W];
      baseline_valid <= 1'b1;
    end else begin
      baseline       <= y_in;
      baseline_valid <= in_valid && y_tracked;
    end
  end

endmodule
