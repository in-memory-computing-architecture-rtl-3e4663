// tb_key_generator: checks one key-expansion step per clock.
//
// First the FIPS-197 Appendix A.1 key 2b7e1516... is expanded through all
// ten rounds by feeding each output back with round index 1..10; rounds 1
// and 10 are compared with the printed values a0fafe17... and d014f9a8...,
// every round with the reference model. Then random keys and round indexes
// are checked, with the output required exactly one clock after the input.
module tb_key_generator;
  import aes_ref_pkg::*;

  logic        clk = 1'b0;
  logic [63:0] a1, a2, b1, b2;
  logic [3:0]  rcon;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  key_generator dut (.clk1(clk), .a1(a1), .a2(a2), .rcon(rcon), .b1(b1), .b2(b2));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t: got %016h%016h", what, $time, b1, b2);
    end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [127:0] k, e;
    k = 128'h2b7e151628aed2a6abf7158809cf4f3c;
    for (int r = 1; r <= 10; r++) begin
      {a1, a2} = k; rcon = 4'(r);
      @(posedge clk); #1;
      e = ref_next_key(k, r);
      check({b1, b2} == e, $sformatf("FIPS-197 round %0d key", r));
      if (r == 1)  check({b1, b2} == 128'ha0fafe1788542cb123a339392a6c7605, "FIPS-197 round 1 printed value");
      if (r == 10) check({b1, b2} == 128'hd014f9a8c9ee2589e13f0cc8b6630ca6, "FIPS-197 round 10 printed value");
      k = {b1, b2};
    end
    for (int n = 0; n < 100; n++) begin
      k = rand128(); rcon = 4'(1 + $urandom_range(0, 9));
      {a1, a2} = k;
      e = ref_next_key(k, int'(rcon));
      @(posedge clk); #1;
      {a1, a2} = rand128();
      check({b1, b2} == e, "random key step");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
