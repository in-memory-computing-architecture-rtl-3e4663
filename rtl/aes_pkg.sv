// aes_pkg: types and constants shared by the AES-128 two-half pipeline.
//
// The 128-bit AES block is carried as two 64-bit halves, the way the
// design splits its work over two 64-bit processing units. Half 1 holds
// block bytes 0..7 (state columns 0 and 1), half 2 holds bytes 8..15
// (columns 2 and 3). Within a half, byte i (i = 0..7) sits at bits
// [63-8*i -: 8]; it is state row i%4 of column i/4 of that half. This is
// the FIPS-197 byte order, so a block written as a 128-bit hex string
// splits into {half1, half2} directly.
//
// The round count and the two 64-bit halves follow the paper; the bit
// placement inside a half is this design's choice (standard AES order).
package aes_pkg;

  localparam int unsigned HALF_W  = 64;   // width of one processing unit
  localparam int unsigned BLOCK_W = 128;  // AES block and key width
  localparam int unsigned NR      = 10;   // AES-128 rounds

  // Every stage block (addroundkey, subbytes, shiftrows, mix3) registers
  // its result one clock after its start pulse. Latency from the start
  // pulse of the top to its done pulse: initial AddRoundKey, nine full
  // rounds of four stages, and a last round of three stages.
  localparam int unsigned STAGES_FULL = 4;
  localparam int unsigned STAGES_LAST = 3;
  localparam int unsigned LATENCY     = 1 + (NR - 1) * STAGES_FULL + STAGES_LAST;

  typedef logic [7:0]          byte_t;
  typedef logic [HALF_W-1:0]   half_t;
  typedef logic [3:0]          round_t;  // round index 1..10 as given to the key generator

  // Moore state of a stage block: IDLE, or DONE during the cycle its
  // registered result is valid.
  typedef enum logic {ST_IDLE = 1'b0, ST_DONE = 1'b1} stage_state_e;

  // Round constant byte for round r: x^(r-1) in GF(2^8) modulo
  // x^8+x^4+x^3+x+1 (01,02,04,...,80,1b,36).
  function automatic byte_t rcon_byte(round_t r);
    byte_t v;
    v = 8'h01;
    for (int i = 1; i < 16; i++) begin
      if (i < int'(r)) v = {v[6:0], 1'b0} ^ (v[7] ? 8'h1b : 8'h00);
    end
    return v;
  endfunction

endpackage
