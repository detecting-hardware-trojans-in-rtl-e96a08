// hsc_pkg: types and constants shared by the Hardware Security Checker.
//
// The checker watches a 32-bit RISC-V instruction-fetch port. Every module
// of the checker imports this package for the word width, the operating mode
// and the rule that sizes a Hamming single-error-correcting (SEC) code.
//
// The mode and the code sizes come from the paper this design follows
// (configure/query modes; Table of ECC types: 32 data bits -> 6 check bits,
// 16 -> 5, 8 -> 4). The helper functions are this design's own: they
// compute those sizes instead of listing them, and they fix the bit layout
// of the code (check bits at the power-of-two positions of a 1-based
// codeword, data bits filling the other positions from the LSB upwards),
// which the paper leaves open.
package hsc_pkg;

  // Width of addresses and instructions of the monitored processor (n).
  localparam int unsigned XLEN = 32;

  // CONFIGURE: the program is being installed; check bits are written.
  // QUERY:     the program runs; check bits are read back and compared.
  typedef enum logic {
    MODE_CONFIGURE = 1'b0,
    MODE_QUERY     = 1'b1
  } hsc_mode_e;

  // Number of Hamming SEC check bits p for data_w data bits: the smallest p
  // with 2**p >= data_w + p + 1.
  function automatic int unsigned hamming_check_bits(input int unsigned data_w);
    int unsigned p;
    p = 1;
    for (int unsigned i = 0; i < 32; i++) begin
      if ((32'd1 << p) < data_w + p + 1) p = p + 1;
    end
    return p;
  endfunction

  // 1-based codeword position of data bit i: the (i+1)-th position that is
  // not a power of two (3, 5, 6, 7, 9, ...).
  function automatic int unsigned hamming_data_pos(input int unsigned i);
    int unsigned pos;
    int unsigned seen;
    pos  = 0;
    seen = 0;
    for (int unsigned c = 3; c < 256; c++) begin
      if (pos == 0 && (c & (c - 1)) != 0) begin
        if (seen == i) pos = c;
        seen = seen + 1;
      end
    end
    return pos;
  endfunction

  // Mask of the data bits (out of data_w) that check bit j covers: data bit
  // i is covered when bit j of its codeword position is set.
  function automatic logic [255:0] hamming_mask(input int unsigned data_w, input int unsigned j);
    logic [255:0] m;
    int unsigned  pos;
    m = '0;
    for (int unsigned i = 0; i < data_w; i++) begin
      pos  = hamming_data_pos(i);
      m[i] = ((pos >> j) & 1) != 0;
    end
    return m;
  endfunction

endpackage
