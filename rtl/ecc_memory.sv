// ecc_memory: one "ECC memory" of a Hardware Security Module.
//
// A DEPTH x WIDTH array holding the check bits of one instruction chunk for
// every instruction word of the protected program, indexed by the word
// address. It has one write port (used in configure mode, while the program
// is installed) and one read port (used in query mode, in parallel with the
// processor's instruction fetch).
//
// Timing: writes take effect at the rising edge where we is high. Reads are
// synchronous, like an FPGA block RAM: raddr is sampled when re is high and
// rdata holds the entry from the next cycle on, until the next read.
//
// Clearing: entries that were never configured must read as zero (the paper
// draws unwritten entries as 0000), so after reset the memory walks through
// all DEPTH entries writing zero, one per cycle, and raises ready when done.
// Writes and reads requested while ready is low are ignored. This sweep is
// this design's own way of reaching the all-zero state the paper shows.
module ecc_memory #(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned WIDTH = 4,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic             ready,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    clr_addr;
  logic             clearing;

  // Zero sweep after reset.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing <= 1'b1;
      clr_addr <= '0;
    end else if (clearing) begin
      if (clr_addr == AW'(DEPTH - 1)) clearing <= 1'b0;
      clr_addr <= clr_addr + 1'b1;
    end
  end

  assign ready = !clearing;

  // Write port (shared by the sweep and by configure-mode writes).
  always_ff @(posedge clk) begin
    if (clearing)  mem[clr_addr] <= '0;
    else if (we)   mem[waddr]    <= wdata;
  end

  // Synchronous read port.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              rdata <= '0;
    else if (re && !clearing) rdata <= mem[raddr];
  end

endmodule
