// tb_aes_imc: end-to-end test of the AES-128 pipeline at its default size.
//
// Checks the FIPS-197 Appendix B and C.1 vectors, then random blocks and
// keys against the reference model, in four phases:
//   1. single blocks with the pipeline empty (latency must be exactly 40),
//   2. a burst of 100 back-to-back blocks (the pipeline must fill to 40
//      blocks in flight and deliver one result per cycle, in order),
//   3. a key change between bursts, once the pipeline has drained,
//   4. a reset while blocks are in flight (no result may come out of it,
//      busy must drop) followed by fresh encryptions.
// Each of these mechanisms is counted; one that never happened counts as
// a failure.
module tb_aes_imc;
  import aes_ref_pkg::*;

  localparam int LAT = 40;

  logic        clk = 1'b0;
  logic        rst, start;
  logic [63:0] pt1, pt2, key1, key2, ct1, ct2;
  logic        done, busy;
  int checks = 0, failures = 0;
  int cyc = 0;

  // mechanism counters
  int n_single = 0, n_full_pipe = 0, n_streamed = 0, n_key_change = 0, n_reset_flush = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  aes_imc dut (
    .clk(clk), .rst(rst), .start(start), .pt1(pt1), .pt2(pt2),
    .key1(key1), .key2(key2), .ct1(ct1), .ct2(ct2), .done(done), .busy(busy));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [127:0] exp_q [$];
  int           st_q  [$];
  int           inflight = 0, max_inflight = 0;
  int           done_run = 0, max_done_run = 0;

  always @(posedge clk) begin
    if (rst) begin
      exp_q.delete(); st_q.delete(); inflight = 0;
    end else if (start) begin
      exp_q.push_back(ref_encrypt({pt1, pt2}, {key1, key2}));
      st_q.push_back(cyc);
      inflight++;
      if (inflight > max_inflight) max_inflight = inflight;
    end
  end

  always @(negedge clk) begin
    if (!rst && done) begin
      logic [127:0] e;
      check(exp_q.size() > 0, "done only for a started block");
      if (exp_q.size() > 0) begin
        e = exp_q.pop_front();
        check({ct1, ct2} == e, "ciphertext");
        if ({ct1, ct2} != e) $display("  got %032h exp %032h", {ct1, ct2}, e);
        check(cyc - st_q.pop_front() == LAT, "latency 40 cycles");
        inflight--;
      end
      done_run++;
      if (done_run > max_done_run) max_done_run = done_run;
    end else begin
      done_run = 0;
    end
  end

  task automatic one_block(logic [127:0] p, logic [127:0] k, logic [127:0] exp_ct);
    logic [127:0] c;
    {key1, key2} = k;
    @(posedge clk); #1;
    {pt1, pt2} = p; start = 1'b1;
    @(posedge clk); #1;
    start = 1'b0; {pt1, pt2} = rand128();
    check(busy, "busy while a block is in flight");
    wait (done);
    c = {ct1, ct2};
    @(posedge clk); #1;
    if (exp_ct != '0) check(c == exp_ct, "published FIPS-197 ciphertext");
    check(!busy, "busy drops after the last done");
    n_single++;
  endtask

  initial begin
    rst = 1'b1; start = 1'b0;
    {pt1, pt2} = '0; {key1, key2} = '0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    check(!done && !busy, "idle after reset");

    // 1. published vectors and single random blocks
    one_block(128'h3243f6a8885a308d313198a2e0370734, 128'h2b7e151628aed2a6abf7158809cf4f3c,
              128'h3925841d02dc09fbdc118597196a0b32);
    one_block(128'h00112233445566778899aabbccddeeff, 128'h000102030405060708090a0b0c0d0e0f,
              128'h69c4e0d86a7b0430d8cdb78070b4c55a);
    for (int n = 0; n < 4; n++) one_block(rand128(), rand128(), '0);

    // 2. burst of back-to-back blocks under one key
    {key1, key2} = rand128();
    @(posedge clk); #1;
    for (int n = 0; n < 100; n++) begin
      {pt1, pt2} = rand128(); start = 1'b1;
      @(posedge clk); #1;
      n_streamed++;
    end
    start = 1'b0;
    wait (!busy);
    @(posedge clk); #1;
    if (max_inflight >= LAT) n_full_pipe++;
    check(max_done_run >= 100, "one result per cycle during the burst");

    // 3. key change between bursts
    for (int b = 0; b < 2; b++) begin
      {key1, key2} = rand128();
      n_key_change++;
      @(posedge clk); #1;
      for (int n = 0; n < 20; n++) begin
        {pt1, pt2} = rand128(); start = 1'b1;
        @(posedge clk); #1;
      end
      start = 1'b0;
      wait (!busy);
      @(posedge clk); #1;
    end

    // 4. reset with blocks in flight
    for (int n = 0; n < 15; n++) begin
      {pt1, pt2} = rand128(); start = 1'b1;
      @(posedge clk); #1;
    end
    start = 1'b0;
    repeat (10) @(posedge clk);
    #1 rst = 1'b1;
    @(posedge clk); #1;
    rst = 1'b0;
    check(!busy, "reset empties the pipeline");
    for (int n = 0; n < LAT + 5; n++) begin
      @(posedge clk); #1;
      check(!done, "no result from a block dropped by reset");
    end
    n_reset_flush++;
    one_block(128'h3243f6a8885a308d313198a2e0370734, 128'h2b7e151628aed2a6abf7158809cf4f3c,
              128'h3925841d02dc09fbdc118597196a0b32);

    check(exp_q.size() == 0, "every started block came out");
    check(n_single > 0, "mechanism: single block with empty pipeline");
    check(n_full_pipe > 0, "mechanism: pipeline full (40 blocks in flight)");
    check(n_streamed > 0, "mechanism: back-to-back streaming");
    check(n_key_change > 0, "mechanism: key change between bursts");
    check(n_reset_flush > 0, "mechanism: reset with blocks in flight");
    $display("mechanisms: single=%0d full_pipeline=%0d (max in flight %0d) streamed=%0d key_change=%0d reset_flush=%0d",
             n_single, n_full_pipe, max_inflight, n_streamed, n_key_change, n_reset_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
