// aes_imc: AES-128 encryption pipeline built from two 64-bit halves.
//
// The 128-bit plaintext enters as two 64-bit halves (pt1 = bytes 0..7,
// pt2 = bytes 8..15) and is processed by two 64-bit units side by side,
// which only meet in ShiftRows. An initial AddRoundKey with the cipher
// key is followed by ten unrolled round instances; rounds 1-9 run
// SubBytes, ShiftRows, MixColumns and AddRoundKey, round 10 skips
// MixColumns. Each round carries its own key generator, chained so that
// round r derives its key from round r-1's.
//
// Timing: a start pulse with pt/key valid gives a done pulse with ct1/ct2
// exactly LATENCY = 40 cycles later (one cycle per stage: 1 + 9*4 + 3).
// Every stage can take a new block each cycle, so start may be pulsed in
// consecutive cycles and up to 40 blocks are in flight; results leave in
// order. The key (key1/key2) must stay unchanged from the start of a block
// until its done, since the round keys are recomputed continuously from
// it; busy is high while any block is in flight. rst (synchronous, active
// high) drops every block in flight.
//
// From the paper: the 128-bit block as two 64-bit halves, the ten rounds
// with MixColumns omitted in the last, the per-round blocks and their
// handshake ports. This design's choices: one cycle per stage, the key
// kept at the input instead of in memory, the busy counter. The paper
// reports 26 cycles per block but does not say how they are spent; this
// design takes 40.
module aes_imc
  import aes_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  start,
  input  half_t pt1,
  input  half_t pt2,
  input  half_t key1,
  input  half_t key2,
  output half_t ct1,
  output half_t ct2,
  output logic  done,
  output logic  busy
);

  half_t st1  [NR+1];
  half_t st2  [NR+1];
  half_t rk1  [NR+1];
  half_t rk2  [NR+1];
  logic  rdy  [NR+1];

  assign rk1[0] = key1;
  assign rk2[0] = key2;

  // Round 0: AddRoundKey with the cipher key.
  addroundkey u_ark0 (
    .clk(clk), .rstadd(rst), .startadd(start),
    .m_in1(pt1), .m_in2(pt2), .k_in1(key1), .k_in2(key2),
    .add_out1(st1[0]), .add_out2(st2[0]), .doneadd(rdy[0])
  );

  for (genvar r = 1; r <= NR; r++) begin : g_round
    aes_round #(
      .RCON(round_t'(r)),
      .LAST(r == NR)
    ) u_round (
      .clk(clk), .rst(rst), .start(rdy[r-1]),
      .st_in1(st1[r-1]), .st_in2(st2[r-1]),
      .key_in1(rk1[r-1]), .key_in2(rk2[r-1]),
      .st_out1(st1[r]), .st_out2(st2[r]),
      .key_out1(rk1[r]), .key_out2(rk2[r]),
      .done(rdy[r])
    );
  end

  assign ct1  = st1[NR];
  assign ct2  = st2[NR];
  assign done = rdy[NR];

  // Blocks in flight: +1 on start, -1 on done.
  localparam int unsigned CW = $clog2(LATENCY + 1);
  logic [CW-1:0] in_flight;

  always_ff @(posedge clk) begin
    if (rst) in_flight <= '0;
    else     in_flight <= in_flight + CW'(start) - CW'(done);
  end

  assign busy = (in_flight != '0);

  // The round keys are derived continuously from key1/key2, so the key
  // may only change while no block is in flight.
  key_stable_while_busy: assert property (
    @(posedge clk) disable iff (rst) busy |-> ($stable(key1) && $stable(key2))
  ) else $error("aes_imc: key changed while blocks are in flight");

endmodule
