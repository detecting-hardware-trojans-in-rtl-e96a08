// hsm: Hardware Security Module built on Hamming SEC codes.
//
// The module sits beside the instruction-fetch port of a processor. Its
// instruction input is cut into K chunks of N/K bits (chunk g is
// instr[g*N/K +: N/K]); each chunk has its own Hamming encoder and its own
// ECC memory, and all K memories are indexed by the same word address.
//
//  * Configure mode (mode == MODE_CONFIGURE), while the program is
//    installed: in every cycle with addr_valid and instr_valid both high,
//    the check bits of each chunk of instr are written into that chunk's
//    memory at the entry selected by addr.
//  * Query mode (mode == MODE_QUERY), while the program runs: addr_valid
//    marks a fetch address issued by the processor; the K memories are read
//    in the same cycle that the instruction memory is. One or more cycles
//    later instr_valid marks the fetched instruction. Its check bits are
//    recomputed and compared, chunk by chunk, with the stored ones, and
//    warning is raised in that same cycle if any chunk differs.
//
// Interface timing: warning and chunk_mismatch are combinational outputs,
// valid in the cycle in which instr_valid is high, so the check adds no
// cycle to the fetch. A lookup stays open until its instruction arrives;
// a new fetch address may be issued in the cycle its predecessor's
// instruction returns (one outstanding fetch, as with a one-cycle-latency
// instruction RAM).
//
// Memory index: the word address addr[ADDR_LSB +: log2(DEPTH)]. Address
// bits above that window are not stored, so the module protects a program
// space of DEPTH words; addresses outside it alias into it. (A linter
// therefore reports the address bits outside the window as unused; that is
// intended.)
//
// From the paper: chunking, per-chunk ECC computation and memory, address-
// indexed storage, the per-chunk inequality comparators, the combination of
// their results, and gating of the warning by the query mode. This design's
// own choices: the valid strobes and their timing, the memory depth and
// address window, the pending-lookup bookkeeping, the code layout (see
// hamming_sec_enc), and the zeroing of the memories after reset (ready).
module hsm
  import hsc_pkg::*;
#(
  parameter int unsigned N        = XLEN,   // bits of address and instruction
  parameter int unsigned K        = 4,      // fragmentation factor (chunks)
  parameter int unsigned DEPTH    = 8192,   // entries per ECC memory
  parameter int unsigned ADDR_LSB = 2,      // byte-address bits below a word
  localparam int unsigned CHUNK_W = N / K,
  localparam int unsigned P       = hamming_check_bits(CHUNK_W),
  localparam int unsigned AW      = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  hsc_mode_e    mode,
  input  logic         addr_valid,
  input  logic [N-1:0] addr,
  input  logic         instr_valid,
  input  logic [N-1:0] instr,
  output logic         ready,
  output logic         warning,
  output logic [K-1:0] chunk_mismatch
);

  logic [AW-1:0]  idx;
  logic           cfg_we;
  logic           qry_re;
  logic           pending;
  logic [K-1:0]   mem_ready;
  logic [P-1:0]   check_now [K];
  logic [P-1:0]   check_mem [K];

  assign idx    = addr[ADDR_LSB +: AW];
  assign ready  = &mem_ready;
  assign cfg_we = ready && (mode == MODE_CONFIGURE) && addr_valid && instr_valid;
  assign qry_re = ready && (mode == MODE_QUERY) && addr_valid;

  for (genvar g = 0; g < K; g++) begin : g_chunk
    hamming_sec_enc #(
      .DATA_W (CHUNK_W),
      .P      (P)
    ) u_enc (
      .data  (instr[g*CHUNK_W +: CHUNK_W]),
      .check (check_now[g])
    );

    ecc_memory #(
      .DEPTH (DEPTH),
      .WIDTH (P)
    ) u_mem (
      .clk   (clk),
      .rst_n (rst_n),
      .ready (mem_ready[g]),
      .we    (cfg_we),
      .waddr (idx),
      .wdata (check_now[g]),
      .re    (qry_re),
      .raddr (idx),
      .rdata (check_mem[g])
    );

    assign chunk_mismatch[g] = pending && (check_now[g] != check_mem[g]);
  end

  // A lookup is open from the cycle after its address until its instruction.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       pending <= 1'b0;
    else if (mode != MODE_QUERY)      pending <= 1'b0;
    else if (qry_re)                  pending <= 1'b1;
    else if (instr_valid)             pending <= 1'b0;
  end

  assign warning = (mode == MODE_QUERY) && instr_valid && (|chunk_mismatch);

  // In query mode every fetched instruction must answer an earlier address.
  a_instr_after_addr : assert property (
    @(posedge clk) disable iff (!rst_n)
    (ready && mode == MODE_QUERY && instr_valid) |-> pending
  ) else $error("hsm: instruction returned without an outstanding fetch address");

endmodule
