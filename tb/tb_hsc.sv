// tb_hsc: end-to-end test of the Hardware Security Checker at its default
// size (8192-entry ECC memories), running one pass per benchmark size.
//
// For each program size of the evaluation set (1288, 216, 1023, 4466 and
// 516 instructions) the test:
//   1. resets the checker and waits for the ECC memories to be zeroed;
//   2. installs a program of that many random 32-bit words (the first two
//      are the example words 0xAB3456F8 and 0xAB109CF2) in configure mode,
//      into a behavioural instruction memory and into the checker;
//   3. switches to query mode and runs a processor-like fetch stream:
//      sequential fetches with random jumps, back-to-back fetches, idle
//      cycles and fetches whose instruction arrives after a wait state;
//   4. injects Trojan activations: threat model 1 (the fetch address is
//      forced outside the program; the attacker's word comes back, either
//      from an unconfigured entry or from an address that aliases into the
//      program window) and threat model 2 (the bus returns a legitimate
//      instruction taken from another point of the program);
//   5. injects a directed pattern (three flipped bits of one byte whose
//      8-bit check bits cancel) that only the 32-bit code sees.
// Every fetched instruction's warning, per-module warnings and per-chunk
// mismatches are compared with a reference computed in this file from the
// installed words. Each mechanism is counted and must occur at least once.
// Undetected injections are reported (they are legitimate outcomes of the
// codes, not checker faults), and any warning on a clean fetch is a failure.
module tb_hsc;
  import hsc_pkg::*;

  localparam int unsigned DEPTH    = 8192;
  localparam int unsigned IMEM     = 2 * DEPTH;   // words of instruction memory
  localparam int unsigned N_CLEAN  = 3000;
  localparam int unsigned N_TM1    = 1000;
  localparam int unsigned N_TM2    = 1000;
  localparam int unsigned N_BENCH  = 5;

  logic            clk = 1'b0;
  logic            rst_n = 1'b0;
  hsc_mode_e       mode;
  logic            addr_valid, instr_valid;
  logic [XLEN-1:0] addr, instr;
  logic            ready, warning, warning_hsec32, warning_hsec8;
  logic [4:0]      chunk_mismatch;

  hsc dut (.*);

  always #5 clk = ~clk;

  // Behavioural instruction memory and the reference copy of what was
  // installed at each checker index.
  logic [31:0] imem [IMEM];
  logic [31:0] installed [DEPTH];
  bit          configured [DEPTH];

  int unsigned checks = 0;
  int unsigned failures = 0;
  // Mechanism counters.
  int unsigned n_sweep = 0, n_cfg = 0, n_switch = 0, n_clean = 0;
  int unsigned n_tm1 = 0, n_tm1_det = 0, n_tm1_alias = 0, n_tm2 = 0, n_tm2_det = 0;
  int unsigned n_only32 = 0, n_only8 = 0, n_both = 0, n_wait = 0, n_b2b = 0, n_idle = 0;
  int unsigned n_fp = 0, n_fn = 0;

  int unsigned bench_size [N_BENCH] = '{1288, 216, 1023, 4466, 516};
  string       bench_name [N_BENCH] = '{"CM", "MM", "QS", "RS", "SHA"};

  // Reference codeword positions of data bits 0..31: the integers from 1
  // upwards that are not powers of two.
  localparam int unsigned REF_POS [32] = '{
     3,  5,  6,  7,  9, 10, 11, 12, 13, 14, 15, 17, 18, 19, 20, 21,
    22, 23, 24, 25, 26, 27, 28, 29, 30, 31, 33, 34, 35, 36, 37, 38};

  function automatic int unsigned ref_pos(input int unsigned i);
    return REF_POS[i];
  endfunction

  function automatic int unsigned ref_check(input logic [31:0] d, input int unsigned lsb,
                                            input int unsigned w);
    int unsigned s;
    s = 0;
    for (int unsigned i = 0; i < w; i++) if (d[lsb + i]) s = s ^ ref_pos(i);
    return s;
  endfunction

  // Expected chunk_mismatch: [0] HSEC32, [4:1] HSEC8 chunks.
  function automatic logic [4:0] ref_mismatch(input int unsigned word_addr, input logic [31:0] got);
    logic [4:0]  m;
    int unsigned idx;
    logic [31:0] s;
    idx = word_addr % DEPTH;
    s   = configured[idx] ? installed[idx] : 32'd0;   // zero word -> zero check bits
    m[0] = ref_check(s, 0, 32) != ref_check(got, 0, 32);
    for (int unsigned g = 0; g < 4; g++) m[g + 1] = ref_check(s, 8 * g, 8) != ref_check(got, 8 * g, 8);
    return m;
  endfunction

  task automatic expect_eq(input string what, input int unsigned got, input int unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  // Fetch-stream state: at most one fetch outstanding.
  bit          pend;
  int unsigned pend_addr;     // word address presented to the checker
  logic [31:0] pend_word;     // word returned by the memory/bus
  int unsigned pend_wait;     // cycles still to wait before the word returns
  int unsigned pend_kind;     // 0 clean, 1 TM1, 2 TM2, 3 directed
  int unsigned pc;

  task automatic check_return();
    logic [4:0] m;
    m = ref_mismatch(pend_addr, pend_word);
    expect_eq("chunk_mismatch", chunk_mismatch, m);
    expect_eq("warning", warning, |m);
    expect_eq("warning_hsec32", warning_hsec32, m[0]);
    expect_eq("warning_hsec8", warning_hsec8, |m[4:1]);
    if (warning_hsec32 && !warning_hsec8) n_only32++;
    if (!warning_hsec32 && warning_hsec8) n_only8++;
    if (warning_hsec32 && warning_hsec8) n_both++;
    case (pend_kind)
      0: begin n_clean++; if (warning) n_fp++; end
      1: begin n_tm1++; if (warning) n_tm1_det++; else n_fn++; end
      2: begin n_tm2++; if (warning) n_tm2_det++; else n_fn++; end
      default: ;
    endcase
  endtask

  // Run `count` fetches; kind selects the injection applied to each.
  task automatic run_fetches(input int unsigned count, input int unsigned kind, input int unsigned prog);
    int unsigned issued;
    issued = 0;
    pend   = 0;
    while (issued < count || pend) begin
      bit returning, issue;
      returning   = pend && (pend_wait == 0);
      instr_valid = returning;
      instr       = returning ? pend_word : 32'h0;
      issue       = (issued < count) && (!pend || returning) && ($urandom_range(9, 0) != 0);
      if (!issue && issued < count && !pend) n_idle++;
      addr_valid  = issue;
      if (issue) begin
        int unsigned a;
        logic [31:0] w;
        if ($urandom_range(9, 0) == 0) pc = $urandom_range(prog - 1, 0);
        a = pc;
        w = imem[a];
        if (kind == 1) begin
          a = $urandom_range(IMEM - 1, prog);
          w = imem[a];
          if (a >= DEPTH) n_tm1_alias++;
        end else if (kind == 2) begin
          int unsigned other;
          other = $urandom_range(prog - 1, 0);
          if (other == a) other = (a + 1) % prog;
          w = imem[other];
        end else if (kind == 3) begin
          w = imem[a] ^ (32'h7 << (8 * $urandom_range(3, 0)));
        end
        addr = 32'(a) << 2;
        if (returning) n_b2b++;
        pc = (pc + 1) % prog;
        issued++;
        #1;
        if (returning) check_return();
        @(posedge clk); #1;
        pend      = 1;
        pend_addr = a;
        pend_word = w;
        pend_kind = kind;
        pend_wait = ($urandom_range(7, 0) == 0) ? 1 : 0;
        if (pend_wait != 0) n_wait++;
      end else begin
        #1;
        if (returning) begin
          check_return();
          pend = 0;
        end else if (pend) begin
          expect_eq("silent while waiting", warning, 0);
          pend_wait--;
        end
        @(posedge clk); #1;
      end
    end
    addr_valid = 0;
    instr_valid = 0;
  endtask

  initial begin
    int unsigned cyc;
    mode = MODE_CONFIGURE; addr_valid = 0; instr_valid = 0; addr = '0; instr = '0;
    for (int b = 0; b < N_BENCH; b++) begin
      int unsigned prog, fn0, fp0;
      prog = bench_size[b];
      fn0 = n_fn; fp0 = n_fp;
      // 1. Reset and zero sweep (DEPTH cycles).
      mode = MODE_CONFIGURE;
      rst_n = 0;
      repeat (2) @(posedge clk);
      #1 rst_n = 1;
      cyc = 0;
      while (!ready && cyc < 2 * DEPTH) begin @(posedge clk); #1; cyc++; end
      expect_eq("sweep length", cyc, DEPTH);
      n_sweep++;
      // 2. Install the program; the rest of memory holds attacker words.
      for (int unsigned i = 0; i < IMEM; i++) imem[i] = $urandom;
      imem[0] = 32'hAB3456F8;
      imem[1] = 32'hAB109CF2;
      for (int unsigned i = 0; i < DEPTH; i++) configured[i] = 0;
      for (int unsigned i = 0; i < prog; i++) begin
        addr_valid = 1; instr_valid = 1; addr = 32'(i) << 2; instr = imem[i];
        installed[i] = imem[i]; configured[i] = 1;
        #1 expect_eq("no warning while configuring", warning, 0);
        n_cfg++;
        @(posedge clk); #1;
      end
      addr_valid = 0; instr_valid = 0;
      @(posedge clk); #1;
      // 3-5. Query mode.
      mode = MODE_QUERY; n_switch++;
      pc = 0;
      run_fetches(N_CLEAN, 0, prog);
      run_fetches(N_TM1, 1, prog);
      run_fetches(N_TM2, 2, prog);
      run_fetches(50, 3, prog);
      run_fetches(200, 0, prog);
      $display("%s (%0d instr): false positives %0d, undetected injections %0d of %0d",
               bench_name[b], prog, n_fp - fp0, n_fn - fn0, N_TM1 + N_TM2);
    end
    // Every mechanism must have happened.
    if (n_sweep == 0 || n_cfg == 0 || n_switch == 0 || n_clean == 0 || n_tm1_det == 0 ||
        n_tm1_alias == 0 || n_tm2_det == 0 || n_only32 == 0 || n_only8 == 0 || n_both == 0 ||
        n_wait == 0 || n_b2b == 0 || n_idle == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    checks++;
    expect_eq("no false positives", n_fp, 0);
    $display("sweeps %0d, config writes %0d, mode switches %0d, clean fetches %0d",
             n_sweep, n_cfg, n_switch, n_clean);
    $display("TM1 %0d detected %0d (aliased %0d), TM2 %0d detected %0d",
             n_tm1, n_tm1_det, n_tm1_alias, n_tm2, n_tm2_det);
    $display("warnings: HSEC32 only %0d, HSEC8 only %0d, both %0d; wait-state %0d, back-to-back %0d, idle %0d",
             n_only32, n_only8, n_both, n_wait, n_b2b, n_idle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
