// tb_hamming_sec_enc: self-checking test of the Hamming SEC check-bit
// generator at the three chunk widths of the checker's codes (32, 16, 8).
//
// Checks, on random and corner data:
//  * the check-bit counts are 6, 5 and 4;
//  * the check bits equal the XOR of the codeword positions of all set data
//    bits (computed here by walking the positions, not by the design's
//    table), which is the defining property of a positional Hamming code;
//  * flipping any single data bit changes the check bits by exactly that
//    bit's codeword position, i.e. every single-bit error is located.
module tb_hamming_sec_enc;

  logic        clk = 1'b0;
  int unsigned checks = 0;
  int unsigned failures = 0;

  logic [31:0] d32, d32f;
  logic [15:0] d16, d16f;
  logic [7:0]  d8,  d8f;
  logic [5:0]  c32, c32f;
  logic [4:0]  c16, c16f;
  logic [3:0]  c8,  c8f;

  hamming_sec_enc #(.DATA_W(32)) u32  (.data(d32),  .check(c32));
  hamming_sec_enc #(.DATA_W(32)) u32f (.data(d32f), .check(c32f));
  hamming_sec_enc #(.DATA_W(16)) u16  (.data(d16),  .check(c16));
  hamming_sec_enc #(.DATA_W(16)) u16f (.data(d16f), .check(c16f));
  hamming_sec_enc #(.DATA_W(8))  u8   (.data(d8),   .check(c8));
  hamming_sec_enc #(.DATA_W(8))  u8f  (.data(d8f),  .check(c8f));

  always #5 clk = ~clk;

  // Reference: positions 1,2,3,... skipping powers of two hold data bits.
  // Reference codeword positions of data bits 0..31: the integers from 1
  // upwards that are not powers of two.
  localparam int unsigned REF_POS [32] = '{
     3,  5,  6,  7,  9, 10, 11, 12, 13, 14, 15, 17, 18, 19, 20, 21,
    22, 23, 24, 25, 26, 27, 28, 29, 30, 31, 33, 34, 35, 36, 37, 38};

  function automatic int unsigned ref_pos(input int unsigned i);
    return REF_POS[i];
  endfunction

  function automatic int unsigned ref_check(input logic [31:0] d, input int unsigned w);
    int unsigned s;
    s = 0;
    for (int unsigned i = 0; i < w; i++) if (d[i]) s = s ^ ref_pos(i);
    return s;
  endfunction

  task automatic expect_eq(input string what, input int unsigned got, input int unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  initial begin
    int unsigned b;
    expect_eq("P32", $bits(c32), 6);
    expect_eq("P16", $bits(c16), 5);
    expect_eq("P8",  $bits(c8),  4);
    for (int t = 0; t < 600; t++) begin
      case (t)
        0: d32 = '0;
        1: d32 = '1;
        2: d32 = 32'hAB3456F8;
        default: d32 = $urandom;
      endcase
      d16 = d32[15:0] ^ d32[31:16];
      d8  = d32[7:0]  ^ d32[31:24];
      b   = $urandom_range(31, 0);
      d32f = d32 ^ (32'd1 << b);
      d16f = d16 ^ (16'd1 << (b % 16));
      d8f  = d8  ^ (8'd1  << (b % 8));
      @(posedge clk);
      expect_eq("check32", c32, ref_check(d32, 32));
      expect_eq("check16", c16, ref_check({16'd0, d16}, 16));
      expect_eq("check8",  c8,  ref_check({24'd0, d8}, 8));
      expect_eq("syndrome32", c32 ^ c32f, ref_pos(b));
      expect_eq("syndrome16", c16 ^ c16f, ref_pos(b % 16));
      expect_eq("syndrome8",  c8  ^ c8f,  ref_pos(b % 8));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
