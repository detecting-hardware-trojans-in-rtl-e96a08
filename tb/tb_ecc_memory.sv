// tb_ecc_memory: self-checking test of one ECC memory (64 x 4 here).
//
// Checks that ready rises exactly DEPTH cycles after reset, that every entry
// then reads zero, that writes during the sweep are ignored, that written
// values read back one cycle after the read address, that rdata holds while
// re is low, and random write/read traffic against an array model.
module tb_ecc_memory;

  localparam int unsigned DEPTH = 64;
  localparam int unsigned WIDTH = 4;
  localparam int unsigned AW    = 6;

  logic             clk = 1'b0;
  logic             rst_n = 1'b0;
  logic             ready, we, re;
  logic [AW-1:0]    waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  int unsigned      checks = 0;
  int unsigned      failures = 0;
  int unsigned      cyc;

  ecc_memory #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic expect_eq(input string what, input int unsigned got, input int unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    foreach (model[i]) model[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // A write during the sweep must be lost.
    we = 1; waddr = AW'(DEPTH - 1); wdata = 4'hF;
    cyc = 0;
    while (!ready) begin
      @(posedge clk); #1;
      cyc++;
      if (cyc > 2 * DEPTH) break;
    end
    we = 0;
    expect_eq("sweep cycles", cyc, DEPTH);
    for (int i = 0; i < DEPTH; i++) begin
      re = 1; raddr = AW'(i);
      @(posedge clk); #1;
      expect_eq("zero after sweep", rdata, 0);
    end
    // Directed: write, read one cycle later, hold.
    re = 0; we = 1; waddr = 6'd5; wdata = 4'hA;
    @(posedge clk); #1;
    we = 0; re = 1; raddr = 6'd5;
    @(posedge clk); #1;
    expect_eq("read back", rdata, 4'hA);
    re = 0; raddr = 6'd0;
    @(posedge clk); #1;
    expect_eq("hold while re low", rdata, 4'hA);
    model[5] = 4'hA;
    // Random traffic.
    for (int t = 0; t < 2000; t++) begin
      logic [WIDTH-1:0] exp_r;
      we = $urandom_range(1, 0) == 1; waddr = AW'($urandom); wdata = WIDTH'($urandom);
      re = 1; raddr = AW'($urandom);
      exp_r = model[raddr];            // read-before-write semantics
      if (we) model[waddr] = wdata;
      @(posedge clk); #1;
      expect_eq("random read", rdata, exp_r);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
