// subbytes: the AES SubBytes step on both 64-bit halves of the state.
//
// Each half goes through its own bank of eight S-box look-up tables, so
// all 16 bytes are substituted in one step; the paper feeds both state
// matrices to S-boxes in the same step. Port names (p_in1/2, s_out_sub1/2,
// startsb, rstsb, donesub) are those of the subbytes block of the paper's
// first-round RTL.
//
// Timing: a pulse on startsb captures S(p_in) into the output register at
// the next clock edge; donesub is high for the one cycle after, while
// s_out_sub1/2 hold the result. A start in every cycle gives a result in
// every cycle. The one-cycle latency and the synchronous active-high
// reset are this design's choices; the paper gives neither.
module subbytes
  import aes_pkg::*;
(
  input  logic  clk,
  input  logic  rstsb,
  input  logic  startsb,
  input  half_t p_in1,
  input  half_t p_in2,
  output half_t s_out_sub1,
  output half_t s_out_sub2,
  output logic  donesub
);

  half_t        sub1, sub2;
  stage_state_e state;

  for (genvar i = 0; i < 8; i++) begin : g_lut
    sbox u_sbox1 (.in_byte(p_in1[63-8*i -: 8]), .out_byte(sub1[63-8*i -: 8]));
    sbox u_sbox2 (.in_byte(p_in2[63-8*i -: 8]), .out_byte(sub2[63-8*i -: 8]));
  end

  always_ff @(posedge clk) begin
    if (rstsb) begin
      state      <= ST_IDLE;
      s_out_sub1 <= '0;
      s_out_sub2 <= '0;
    end else begin
      state <= startsb ? ST_DONE : ST_IDLE;
      if (startsb) begin
        s_out_sub1 <= sub1;
        s_out_sub2 <= sub2;
      end
    end
  end

  assign donesub = (state == ST_DONE);

endmodule
