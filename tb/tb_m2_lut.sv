// tb_m2_lut: checks M-2 and M-3 for all 256 inputs against a general
// GF(2^8) multiply, plus FIPS-197 examples 57*2 = ae, 57*3 = f9.
module tb_m2_lut;
  import aes_ref_pkg::*;

  logic [7:0] in_byte, m2, m3;
  int checks = 0, failures = 0;

  m2_lut dut (.in_byte(in_byte), .m2(m2), .m3(m3));

  task automatic check(logic [7:0] x, logic [7:0] e2, logic [7:0] e3);
    in_byte = x;
    #1;
    checks += 2;
    if (m2 !== e2) begin failures++; $display("FAIL m2(%02h)=%02h exp %02h", x, m2, e2); end
    if (m3 !== e3) begin failures++; $display("FAIL m3(%02h)=%02h exp %02h", x, m3, e3); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(8'h57, 8'hae, 8'hf9);
    for (int x = 0; x < 256; x++) check(8'(x), gmul(8'(x), 8'h02), gmul(8'(x), 8'h03));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
