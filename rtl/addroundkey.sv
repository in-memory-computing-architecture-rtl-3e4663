// addroundkey: the AES AddRoundKey step on both 64-bit halves.
//
// Each state half is XORed with the matching half of the round key. In
// the memristive version a row of the data matrix and a row of the key
// matrix are read into a summing amplifier, which forms their XOR; here
// the XOR is a gate per bit feeding a register. Port names (m_in1/2 for
// the message/state, k_in1/2 for the key, add_out1/2, startadd, rstadd,
// doneadd) follow the paper's first-round RTL.
//
// Timing: startadd captures m_in ^ k_in at the next clock edge; doneadd
// is high for the one cycle after. The one-cycle latency and the
// synchronous active-high reset are this design's choices.
module addroundkey
  import aes_pkg::*;
(
  input  logic  clk,
  input  logic  rstadd,
  input  logic  startadd,
  input  half_t m_in1,
  input  half_t m_in2,
  input  half_t k_in1,
  input  half_t k_in2,
  output half_t add_out1,
  output half_t add_out2,
  output logic  doneadd
);

  stage_state_e state;

  always_ff @(posedge clk) begin
    if (rstadd) begin
      state    <= ST_IDLE;
      add_out1 <= '0;
      add_out2 <= '0;
    end else begin
      state <= startadd ? ST_DONE : ST_IDLE;
      if (startadd) begin
        add_out1 <= m_in1 ^ k_in1;
        add_out2 <= m_in2 ^ k_in2;
      end
    end
  end

  assign doneadd = (state == ST_DONE);

endmodule
