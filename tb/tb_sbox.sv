// tb_sbox: checks all 256 S-box entries against the S-box computed from
// the GF(2^8) inverse and affine map, plus the FIPS-197 spot values
// S(00)=63, S(53)=ed, S(ff)=16.
module tb_sbox;
  import aes_ref_pkg::*;

  logic [7:0] in_byte, out_byte;
  int checks = 0, failures = 0;

  sbox dut (.in_byte(in_byte), .out_byte(out_byte));

  task automatic check(logic [7:0] x, logic [7:0] exp);
    in_byte = x;
    #1;
    checks++;
    if (out_byte !== exp) begin
      failures++;
      $display("FAIL sbox(%02h) = %02h, expected %02h", x, out_byte, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(8'h00, 8'h63);
    check(8'h53, 8'hed);
    check(8'hff, 8'h16);
    for (int x = 0; x < 256; x++) check(8'(x), ref_sbox(8'(x)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
