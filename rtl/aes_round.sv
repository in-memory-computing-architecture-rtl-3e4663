// aes_round: one AES round of the pipeline, with its own key generator.
//
// The round chains the paper's four stage blocks through their start/done
// handshakes: subbytes -> shiftrows -> mix3 -> addroundkey. Each stage's
// done pulse is the next stage's start, and each stage's output register
// is the next stage's input, so the round is a four-deep pipeline that can
// take a new state every cycle. In the last round (LAST = 1) mix3 is left
// out, as the paper says, and the round is three deep. The key generator
// turns the previous round key (key_in) into this round's key (key_out),
// which addroundkey uses and the next round's generator reads.
//
// Interface: start with st_in1/st_in2 (state after the previous round) and
// key_in1/key_in2 (previous round key, held steady); RCON is the round
// index 1..10. done pulses with st_out1/st_out2 valid 4 cycles after start
// (3 when LAST). The stage order and members follow the paper's figure of
// the first round; the one-cycle stages are this design's choice.
module aes_round
  import aes_pkg::*;
#(
  parameter round_t RCON = 4'd1,  // round index 1..10
  parameter bit     LAST = 1'b0   // 1 for round 10, which has no MixColumns
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  start,
  input  half_t st_in1,
  input  half_t st_in2,
  input  half_t key_in1,
  input  half_t key_in2,
  output half_t st_out1,
  output half_t st_out2,
  output half_t key_out1,
  output half_t key_out2,
  output logic  done
);

  half_t sb1, sb2, sr1, sr2, mc1, mc2;
  logic  sb_done, sr_done, mc_done;

  key_generator u_keygen (
    .clk1(clk), .a1(key_in1), .a2(key_in2), .rcon(RCON),
    .b1(key_out1), .b2(key_out2)
  );

  subbytes u_subbytes (
    .clk(clk), .rstsb(rst), .startsb(start),
    .p_in1(st_in1), .p_in2(st_in2),
    .s_out_sub1(sb1), .s_out_sub2(sb2), .donesub(sb_done)
  );

  shiftrows u_shiftrows (
    .clk(clk), .rstsh(rst), .startsh(sb_done),
    .a(sb1), .b(sb2), .c(sr1), .d(sr2), .doneshift(sr_done)
  );

  if (LAST) begin : g_no_mix
    assign mc1     = sr1;
    assign mc2     = sr2;
    assign mc_done = sr_done;
  end else begin : g_mix
    mix3 u_mix3 (
      .clk(clk), .rstmix(rst), .startmix(sr_done),
      .In_DI1(sr1), .In_DI2(sr2),
      .mixout1(mc1), .mixout2(mc2), .donemix(mc_done)
    );
  end

  addroundkey u_addroundkey (
    .clk(clk), .rstadd(rst), .startadd(mc_done),
    .m_in1(mc1), .m_in2(mc2), .k_in1(key_out1), .k_in2(key_out2),
    .add_out1(st_out1), .add_out2(st_out2), .doneadd(done)
  );

endmodule
