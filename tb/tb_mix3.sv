// tb_mix3: self-checking test of the mix3 stage block.
//
// Reference: MixColumns with a general GF(2^8) multiply.
// Random 128-bit states are applied with a start pulse; the result must
// appear with the done pulse exactly one clock later and match the
// reference model. It also checks back-to-back starts (one result per
// cycle), that done stays low without start, and that reset clears done.
module tb_mix3;
  import aes_ref_pkg::*;

  logic        clk = 1'b0;
  logic        rst, start;
  logic [63:0] in1, in2, k1, k2, out1, out2;
  logic        done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mix3 dut (.clk(clk), .rstmix(rst), .startmix(start), .In_DI1(in1), .In_DI2(in2),
            .mixout1(out1), .mixout2(out2), .donemix(done));

  function automatic logic [127:0] expected(logic [127:0] s, logic [127:0] k);
    return ref_mixcolumns(s);
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [127:0] s_q [$];
  logic [127:0] k_q [$];

  initial begin
    logic [127:0] s, k, e;
    rst = 1'b1; start = 1'b0;
    {in1, in2} = '0; {k1, k2} = '0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    @(posedge clk); #1;
    check(done == 1'b0, "done low after reset");
    // single operations with a gap: latency one cycle
    for (int n = 0; n < 40; n++) begin
      s = (n == 0) ? 128'h00112233445566778899aabbccddeeff : rand128();
      k = rand128();
      {in1, in2} = s; {k1, k2} = k; start = 1'b1;
      @(posedge clk); #1;
      start = 1'b0; {in1, in2} = rand128(); {k1, k2} = rand128();
      check(done == 1'b1, "done one cycle after start");
      e = expected(s, k);
      check({out1, out2} == e, "result");
      if ({out1, out2} != e) $display("  got %032h exp %032h", {out1, out2}, e);
      @(posedge clk); #1;
      check(done == 1'b0, "done is a single pulse");
      check({out1, out2} == e, "result held while idle");
    end
    // back-to-back: a new operation every cycle
    for (int n = 0; n < 30; n++) begin
      s = rand128(); k = rand128();
      {in1, in2} = s; {k1, k2} = k; start = 1'b1;
      s_q.push_back(s); k_q.push_back(k);
      @(posedge clk); #1;
      check(done == 1'b1, "done every cycle when streaming");
      e = expected(s_q.pop_front(), k_q.pop_front());
      check({out1, out2} == e, "streamed result");
    end
    start = 1'b0;
    // reset in the cycle after a start clears done
    {in1, in2} = rand128(); start = 1'b1;
    @(posedge clk); #1;
    start = 1'b0; rst = 1'b1;
    @(posedge clk); #1;
    check(done == 1'b0, "reset clears done");
    check({out1, out2} == '0, "reset clears outputs");
    rst = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
