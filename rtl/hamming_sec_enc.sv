// hamming_sec_enc: Hamming single-error-correction check-bit generator.
//
// This is the "ECC computation" box of a Hardware Security Module. It takes
// one instruction chunk of DATA_W bits and returns the P check bits of the
// Hamming SEC code over it. Check bit j is the XOR of every data bit whose
// 1-based codeword position has bit j set; data bits occupy the positions
// that are not powers of two, data bit 0 at position 3 (see hsc_pkg).
//
// Interface: data in, check out. Timing: purely combinational, a tree of
// XOR gates (one reduction per check bit over a mask fixed at
// elaboration); the module has no clock.
//
// From the paper: a Hamming SEC code per chunk and its sizes (32 bits -> 6,
// 16 -> 5, 8 -> 4 check bits; P defaults to the computed value, which gives
// exactly those numbers). The paper does not give the parity-check matrix;
// the classic positional layout used here is this design's choice.
module hamming_sec_enc
  import hsc_pkg::*;
#(
  parameter int unsigned DATA_W = 32,
  parameter int unsigned P      = hamming_check_bits(DATA_W)
) (
  input  logic [DATA_W-1:0] data,
  output logic [P-1:0]      check
);

  for (genvar j = 0; j < P; j++) begin : g_check
    localparam logic [DATA_W-1:0] MASK = DATA_W'(hamming_mask(DATA_W, j));
    assign check[j] = ^(data & MASK);
  end

endmodule
