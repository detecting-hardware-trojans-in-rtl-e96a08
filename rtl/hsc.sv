// hsc: Hardware Security Checker, the top of the design.
//
// The checker is placed between a processor and its instruction memory and
// detects Hardware Trojans that make the processor run code other than the
// installed program. It holds two Hardware Security Modules side by side,
// fed with the same mode, address and instruction:
//   * u_hsec32: one chunk of 32 bits, 6 check bits per word (HSEC32);
//   * u_hsec8:  four chunks of 8 bits, 4 x 4 check bits per word (HSEC8).
// warning is the OR of the two modules' warnings, so an instruction is
// flagged when either code finds a difference between what was installed
// at the fetch address and what was fetched.
//
// Use: after reset wait for ready (the ECC memories are being zeroed),
// install the program with mode = MODE_CONFIGURE by presenting every
// (address, instruction) pair with addr_valid and instr_valid high in the
// same cycle, then switch to MODE_QUERY and connect addr_valid/addr to the
// processor's fetch address and instr_valid/instr to the instruction it
// receives. warning is valid in the cycle instr_valid is high.
//
// From the paper: the pairing of an HSEC32 and an HSEC8 module and the OR
// of their warnings. The port handshake, memory depth (8192 words, the
// 32 KiB instruction RAM of the evaluation platform) and the separate
// per-module warnings are this design's choices.
module hsc
  import hsc_pkg::*;
#(
  parameter int unsigned DEPTH    = 8192,
  parameter int unsigned ADDR_LSB = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  hsc_mode_e       mode,
  input  logic            addr_valid,
  input  logic [XLEN-1:0] addr,
  input  logic            instr_valid,
  input  logic [XLEN-1:0] instr,
  output logic            ready,
  output logic            warning,
  output logic            warning_hsec32,
  output logic            warning_hsec8,
  output logic [4:0]      chunk_mismatch   // [0]: HSEC32, [4:1]: HSEC8 chunks
);

  logic ready32, ready8;

  hsm #(
    .N        (XLEN),
    .K        (1),
    .DEPTH    (DEPTH),
    .ADDR_LSB (ADDR_LSB)
  ) u_hsec32 (
    .clk            (clk),
    .rst_n          (rst_n),
    .mode           (mode),
    .addr_valid     (addr_valid),
    .addr           (addr),
    .instr_valid    (instr_valid),
    .instr          (instr),
    .ready          (ready32),
    .warning        (warning_hsec32),
    .chunk_mismatch (chunk_mismatch[0])
  );

  hsm #(
    .N        (XLEN),
    .K        (4),
    .DEPTH    (DEPTH),
    .ADDR_LSB (ADDR_LSB)
  ) u_hsec8 (
    .clk            (clk),
    .rst_n          (rst_n),
    .mode           (mode),
    .addr_valid     (addr_valid),
    .addr           (addr),
    .instr_valid    (instr_valid),
    .instr          (instr),
    .ready          (ready8),
    .warning        (warning_hsec8),
    .chunk_mismatch (chunk_mismatch[4:1])
  );

  assign ready   = ready32 && ready8;
  assign warning = warning_hsec32 || warning_hsec8;

endmodule
