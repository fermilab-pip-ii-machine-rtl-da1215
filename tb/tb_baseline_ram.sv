// tb_baseline_ram: self-checking test of the baseline storage RAM.
//
// Fills the full 4096-word RAM with random words through the write port,
// reads every word back and compares it with a shadow array, then runs
// random mixed traffic with simultaneous reads and writes. Checks the
// one-clock read latency and that a read of the address being written in
// the same clock returns the old word.
module tb_baseline_ram;

  localparam int DEPTH = 4096;
  localparam int WIDTH = 19;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0;
  logic we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] shadow [DEPTH];

  int checks = 0, failures = 0;
  int cyc = 0;

  baseline_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #4 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
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

  logic [WIDTH-1:0] expd;
  int same = 0;

  initial begin
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = WIDTH'($urandom); shadow[a] = wdata;
    end
    @(negedge clk) we = 0;
    // read back, one clock latency
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk) raddr = AW'(a);
      @(posedge clk); #1;
      check(rdata == shadow[a], $sformatf("read %0d: %h exp %h", a, rdata, shadow[a]));
    end
    // mixed traffic
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      raddr = AW'($urandom_range(0, 15));   // small range: frequent collisions
      we    = 1'($urandom);
      waddr = AW'($urandom_range(0, 15));
      wdata = WIDTH'($urandom);
      expd  = shadow[raddr];
      if (we && waddr == raddr) same++;
      @(posedge clk); #1;
      check(rdata == expd, $sformatf("mixed read %0d: %h exp %h", raddr, rdata, expd));
      if (we) shadow[waddr] = wdata;
    end
    check(same > 100, "read/write collisions exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
