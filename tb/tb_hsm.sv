// tb_hsm: self-checking test of one Hardware Security Module (HSEC8 shape:
// four 8-bit chunks, 256-entry memories here).
//
// The test installs a random program in configure mode, switches to query
// mode and fetches: legitimate fetches, fetches whose instruction was
// swapped for another word (of the program or random), fetches from
// addresses never configured, fetches with a wait cycle between address
// and instruction, and back-to-back fetches. For every fetched instruction
// the expected warning and per-chunk mismatches are recomputed here from
// the installed words with an independent Hamming model. It also checks
// that no warning is raised in configure mode, and that the warning appears
// in the same cycle as the instruction (zero added latency).
module tb_hsm;
  import hsc_pkg::*;

  localparam int unsigned N     = 32;
  localparam int unsigned K     = 4;
  localparam int unsigned CW    = N / K;
  localparam int unsigned DEPTH = 256;
  localparam int unsigned PROG  = 100;

  logic         clk = 1'b0;
  logic         rst_n = 1'b0;
  hsc_mode_e    mode;
  logic         addr_valid, instr_valid;
  logic [N-1:0] addr, instr;
  logic         ready, warning;
  logic [K-1:0] chunk_mismatch;

  logic [N-1:0] installed [DEPTH];   // word installed per index, 0 if none
  int unsigned  checks = 0;
  int unsigned  failures = 0;
  int unsigned  n_warn = 0;
  int unsigned  n_clean = 0;

  hsm #(.N(N), .K(K), .DEPTH(DEPTH), .ADDR_LSB(2)) dut (.*);

  always #5 clk = ~clk;

  // Reference codeword positions of data bits 0..31: the integers from 1
  // upwards that are not powers of two.
  localparam int unsigned REF_POS [32] = '{
     3,  5,  6,  7,  9, 10, 11, 12, 13, 14, 15, 17, 18, 19, 20, 21,
    22, 23, 24, 25, 26, 27, 28, 29, 30, 31, 33, 34, 35, 36, 37, 38};

  function automatic int unsigned ref_pos(input int unsigned i);
    return REF_POS[i];
  endfunction

  function automatic int unsigned ref_check(input logic [N-1:0] d, input int unsigned lsb);
    int unsigned s;
    s = 0;
    for (int unsigned i = 0; i < CW; i++) if (d[lsb + i]) s = s ^ ref_pos(i);
    return s;
  endfunction

  function automatic logic [K-1:0] ref_mismatch(input logic [N-1:0] stored_w,
                                               input bit stored_valid,
                                               input logic [N-1:0] got);
    logic [K-1:0] m;
    for (int unsigned g = 0; g < K; g++) begin
      int unsigned s;
      s = stored_valid ? ref_check(stored_w, g * CW) : 0;
      m[g] = s != ref_check(got, g * CW);
    end
    return m;
  endfunction

  bit configured [DEPTH];

  task automatic expect_eq(input string what, input int unsigned got, input int unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // One query-mode fetch of word index idx, returning instruction word w
  // after `wait_cycles` idle cycles.
  task automatic fetch(input int unsigned idx, input logic [N-1:0] w, input int unsigned wait_cycles);
    logic [K-1:0] m;
    addr_valid = 1; addr = N'(idx) << 2; instr_valid = 0;
    @(posedge clk); #1;
    addr_valid = 0;
    repeat (wait_cycles) begin
      expect_eq("no warning without instruction", warning, 0);
      @(posedge clk); #1;
    end
    instr_valid = 1; instr = w;
    #1;
    m = ref_mismatch(installed[idx], configured[idx], w);
    expect_eq("chunk_mismatch", chunk_mismatch, m);
    expect_eq("warning", warning, |m);
    if (warning) n_warn++; else n_clean++;
    @(posedge clk); #1;
    instr_valid = 0;
  endtask

  initial begin
    int unsigned idx;
    logic [N-1:0] w;
    mode = MODE_CONFIGURE; addr_valid = 0; instr_valid = 0; addr = '0; instr = '0;
    foreach (installed[i]) begin installed[i] = '0; configured[i] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (!ready) @(posedge clk);
    #1;
    // Configure: program at word indices 0..PROG-1.
    for (int unsigned i = 0; i < PROG; i++) begin
      w = $urandom;
      if (i == 0) w = 32'hAB3456F8;
      if (i == 1) w = 32'hAB109CF2;
      installed[i] = w; configured[i] = 1;
      addr_valid = 1; instr_valid = 1; addr = N'(i) << 2; instr = w;
      #1 expect_eq("no warning in configure mode", warning, 0);
      @(posedge clk); #1;
    end
    addr_valid = 0; instr_valid = 0;
    mode = MODE_QUERY;
    @(posedge clk); #1;
    // Legitimate fetches, some with a wait cycle.
    for (int t = 0; t < 300; t++) begin
      idx = $urandom_range(PROG - 1, 0);
      fetch(idx, installed[idx], $urandom_range(2, 0));
    end
    expect_eq("no false positives", n_warn, 0);
    // Instruction swapped (threat model 2) or address outside program (1).
    for (int t = 0; t < 300; t++) begin
      if (t % 2 == 0) begin
        idx = $urandom_range(PROG - 1, 0);
        fetch(idx, installed[$urandom_range(PROG - 1, 0)], $urandom_range(1, 0));
      end else begin
        idx = $urandom_range(DEPTH - 1, PROG);
        fetch(idx, $urandom, 0);
      end
    end
    if (n_warn == 0) begin failures++; $display("FAIL no attack detected"); end
    // Back-to-back pipelined fetches: address k+1 issued with instruction k.
    n_warn = 0;
    addr_valid = 1; addr = 32'd0 << 2;
    @(posedge clk); #1;
    for (int unsigned i = 1; i <= 20; i++) begin
      logic [K-1:0] m;
      w = (i == 10) ? installed[i - 1] ^ 32'h0000_0100 : installed[i - 1];
      instr_valid = 1; instr = w;
      addr_valid = (i < 20); addr = N'(i) << 2;
      #1;
      m = ref_mismatch(installed[i - 1], 1'b1, w);
      expect_eq("pipelined warning", warning, |m);
      if (warning) n_warn++;
      @(posedge clk); #1;
    end
    instr_valid = 0; addr_valid = 0;
    expect_eq("pipelined: exactly the flipped fetch warns", n_warn, 1);
    // No warning after switching back to configure mode.
    mode = MODE_CONFIGURE; instr_valid = 1; instr = 32'hFFFF_FFFF;
    #1 expect_eq("configure gates warning", warning, 0);
    instr_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
