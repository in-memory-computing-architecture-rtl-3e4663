// mix3: the AES MixColumns step on both 64-bit halves.
//
// Each state column (s0,s1,s2,s3) is multiplied by the fixed circulant
// matrix [2 3 1 1; 1 2 3 1; 1 1 2 3; 3 1 1 2] over GF(2^8). As in the
// paper, the products are taken from multiply-by-2 (M-2) and
// multiply-by-3 (M-3) look-up tables and combined by XOR. The paper runs
// several M-2 tables in parallel to avoid feeding one byte at a time; here
// every byte has its own table (16 in all), so both halves, two columns
// each, finish in one step. Port names (In_DI1/2, mixout1/2, startmix,
// rstmix, donemix) follow the paper's first-round RTL.
//
// Timing: startmix captures the result at the next clock edge; donemix is
// high for the one cycle after. The fully parallel table count, the
// one-cycle latency and the synchronous active-high reset are this
// design's choices.
module mix3
  import aes_pkg::*;
(
  input  logic  clk,
  input  logic  rstmix,
  input  logic  startmix,
  input  half_t In_DI1,
  input  half_t In_DI2,
  output half_t mixout1,
  output half_t mixout2,
  output logic  donemix
);

  logic [BLOCK_W-1:0] st_in, st_mix;
  byte_t              m2 [16];
  byte_t              m3 [16];
  stage_state_e       state;

  assign st_in = {In_DI1, In_DI2};

  for (genvar k = 0; k < 16; k++) begin : g_lut
    m2_lut u_m2 (.in_byte(st_in[127-8*k -: 8]), .m2(m2[k]), .m3(m3[k]));
  end

  // Output row r of a column: 2*s[r] ^ 3*s[r+1] ^ s[r+2] ^ s[r+3].
  always_comb begin
    for (int col = 0; col < 4; col++) begin
      for (int row = 0; row < 4; row++) begin
        st_mix[127-8*(row+4*col) -: 8] = m2[4*col + row]
                                       ^ m3[4*col + (row+1)%4]
                                       ^ st_in[127-8*(4*col + (row+2)%4) -: 8]
                                       ^ st_in[127-8*(4*col + (row+3)%4) -: 8];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rstmix) begin
      state   <= ST_IDLE;
      mixout1 <= '0;
      mixout2 <= '0;
    end else begin
      state <= startmix ? ST_DONE : ST_IDLE;
      if (startmix) begin
        mixout1 <= st_mix[127:64];
        mixout2 <= st_mix[63:0];
      end
    end
  end

  assign donemix = (state == ST_DONE);

endmodule
