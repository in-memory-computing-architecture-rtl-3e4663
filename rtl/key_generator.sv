// key_generator: one step of the AES-128 key expansion.
//
// From the previous round key, split into halves a1 = {w0,w1} and
// a2 = {w2,w3} (32-bit words), and the round index rcon, it forms the next
// round key b1 = {w4,w5}, b2 = {w6,w7}:
//   t  = SubWord(RotWord(w3)) ^ {Rcon(rcon), 24'h0}
//   w4 = w0 ^ t,  w5 = w1 ^ w4,  w6 = w2 ^ w5,  w7 = w3 ^ w6
// SubWord uses four S-box tables like those of subbytes. Each round of the
// pipeline has its own key generator, chained round to round, as in the
// paper's first-round RTL (block "KeyGenerator" with a1, a2, clk1, rcon,
// b1, b2). That figure prints two 4-bit round-constant ports, rcon1 and
// rcon2, with rcon2 tied to 0001 in the first round; the paper does not
// say what the second one carries, so this block has one 4-bit port, the
// round index 1..10, and maps it to the Rcon byte.
//
// Timing: the output is registered on every clk1 edge (the figure shows no
// start or reset on this block), so b1/b2 follow a1/a2 one cycle later.
// Round r's key is therefore valid r cycles after the cipher key settles,
// well before round r's AddRoundKey needs it; the cipher key must be held
// steady while blocks are in flight.
module key_generator
  import aes_pkg::*;
(
  input  logic   clk1,
  input  half_t  a1,
  input  half_t  a2,
  input  round_t rcon,
  output half_t  b1,
  output half_t  b2
);

  logic [31:0] w0, w1, w2, w3, rot, sub, t, w4, w5, w6, w7;

  assign {w0, w1} = a1;
  assign {w2, w3} = a2;
  assign rot      = {w3[23:0], w3[31:24]};

  for (genvar i = 0; i < 4; i++) begin : g_lut
    sbox u_sbox (.in_byte(rot[31-8*i -: 8]), .out_byte(sub[31-8*i -: 8]));
  end

  always_comb begin
    t  = sub ^ {rcon_byte(rcon), 24'h000000};
    w4 = w0 ^ t;
    w5 = w1 ^ w4;
    w6 = w2 ^ w5;
    w7 = w3 ^ w6;
  end

  always_ff @(posedge clk1) begin
    b1 <= {w4, w5};
    b2 <= {w6, w7};
  end

endmodule
