// baseline_ram: the baseline storage RAM.
//
// Simple dual-port RAM, DEPTH words of WIDTH bits, one synchronous write port
// and one synchronous read port, written so that FPGA tools infer block RAM.
// It holds one 60 Hz period of averaged baseline (4096 words in the paper).
// The word layout is the de-ripple block's: a valid bit above the fixed-point
// baseline value.
//
// Timing: a write takes effect at the clock edge where we is high; rdata
// shows mem[raddr] one clock after raddr is presented. A read of the address
// being written in the same cycle returns the old word (read-first). The
// contents are not reset: the de-ripple block clears them after reset.
module baseline_ram #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned WIDTH = 19,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
