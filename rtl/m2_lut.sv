// m2_lut: multiply-by-2 ("M-2") and multiply-by-3 ("M-3") of one byte in
// GF(2^8), the two products MixColumns needs.
//
// The paper builds MixColumns from M-2 look-up tables and XOR, with an
// M-3 path beside the M-2 path. The M-2 table holds x*2 modulo
// x^8+x^4+x^3+x+1; its entries follow from the formula
// m2 = {x[6:0],0} ^ (x[7] ? 0x1b : 0), which is how this module computes
// them instead of storing 256 bytes. M-3 is taken as m2 ^ x, the XOR the
// paper uses to finish the product.
//
// Interface: in_byte (8) -> m2 (8), m3 (8); combinational, zero latency.
module m2_lut
  import aes_pkg::*;
(
  input  byte_t in_byte,
  output byte_t m2,
  output byte_t m3
);

  always_comb begin
    m2 = {in_byte[6:0], 1'b0} ^ (in_byte[7] ? 8'h1b : 8'h00);
    m3 = m2 ^ in_byte;
  end

endmodule
