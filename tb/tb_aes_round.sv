// tb_aes_round: checks a full round (round 3) and the last round (round 10).
//
// For each instance a round key is applied and held, then states are sent
// with start pulses, singly and back to back. The output must match
// SubBytes, ShiftRows, MixColumns (not in the last round) and XOR with the
// next round key from the reference model, and done must come exactly 4
// cycles (full round) or 3 cycles (last round) after start. key_out must
// be the next round key.
module tb_aes_round;
  import aes_ref_pkg::*;

  logic        clk = 1'b0;
  logic        rst, start;
  logic [63:0] s1, s2, k1, k2;
  logic [63:0] fo1, fo2, fk1, fk2, lo1, lo2, lk1, lk2;
  logic        fdone, ldone;
  int checks = 0, failures = 0;
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  aes_round #(.RCON(4'd3), .LAST(1'b0)) dut_full (
    .clk(clk), .rst(rst), .start(start), .st_in1(s1), .st_in2(s2),
    .key_in1(k1), .key_in2(k2), .st_out1(fo1), .st_out2(fo2),
    .key_out1(fk1), .key_out2(fk2), .done(fdone));

  aes_round #(.RCON(4'd10), .LAST(1'b1)) dut_last (
    .clk(clk), .rst(rst), .start(start), .st_in1(s1), .st_in2(s2),
    .key_in1(k1), .key_in2(k2), .st_out1(lo1), .st_out2(lo2),
    .key_out1(lk1), .key_out2(lk2), .done(ldone));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results, in start order, and their start cycles
  logic [127:0] fexp [$], lexp [$];
  int           fst [$], lst [$];

  always @(posedge clk) begin
    if (!rst && start) begin
      fexp.push_back(ref_round({s1, s2}, ref_next_key({k1, k2}, 3), 1'b0));
      lexp.push_back(ref_round({s1, s2}, ref_next_key({k1, k2}, 10), 1'b1));
      fst.push_back(cyc);
      lst.push_back(cyc);
    end
  end

  always @(negedge clk) begin
    if (!rst && fdone) begin
      check(fexp.size() > 0, "full round done with a block in flight");
      if (fexp.size() > 0) begin
        check({fo1, fo2} == fexp.pop_front(), "full round result");
        check(cyc - fst.pop_front() == 4, "full round latency 4");
      end
    end
    if (!rst && ldone) begin
      check(lexp.size() > 0, "last round done with a block in flight");
      if (lexp.size() > 0) begin
        check({lo1, lo2} == lexp.pop_front(), "last round result");
        check(cyc - lst.pop_front() == 3, "last round latency 3");
      end
    end
  end

  initial begin
    logic [127:0] k;
    rst = 1'b1; start = 1'b0; {s1, s2} = '0;
    k = 128'h2b7e151628aed2a6abf7158809cf4f3c;
    {k1, k2} = k;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    @(posedge clk); #1;
    check({fk1, fk2} == ref_next_key(k, 3), "key_out of round 3");
    check({lk1, lk2} == ref_next_key(k, 10), "key_out of round 10");
    for (int n = 0; n < 20; n++) begin
      {s1, s2} = rand128(); start = 1'b1;
      @(posedge clk); #1;
      start = 1'b0;
      repeat (5) @(posedge clk);
      #1;
    end
    for (int n = 0; n < 30; n++) begin
      {s1, s2} = rand128(); start = 1'b1;
      @(posedge clk); #1;
    end
    start = 1'b0;
    repeat (8) @(posedge clk);
    #1;
    check(fexp.size() == 0 && lexp.size() == 0, "every started state came out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
