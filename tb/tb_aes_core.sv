// tb_aes_core: drives the iterative AES engine with round keys from the
// reference key schedule. Checks the two FIPS-197 examples, random blocks
// against the reference cipher, the 10-cycle latency from accept to
// out_valid, back-pressure on out_ready, and the 11-cycle block period.
module tb_aes_core;
  import aes_pkg::*;
  import aes_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  rkeys_t rk;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  state_t in_block = '0, out_block;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  aes_core dut (.clk, .rst_n, .rk, .in_valid, .in_ready, .in_block,
                .out_valid, .out_ready, .out_block);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic set_key(input blk_t k);
    blk_t r [11];
    expand(k, r);
    for (int i = 0; i < 11; i++) rk[i] = r[i];
  endtask

  // Encrypt one block; returns the cycles from the accept edge to out_valid.
  task automatic run(input blk_t pt, input blk_t expect_ct, input int hold);
    int cyc;
    @(negedge clk);
    in_block = pt; in_valid = 1'b1;
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 1'b0;
    cyc = 0;   // cycles counted after the accept edge
    while (!out_valid) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == 10, $sformatf("latency %0d, expected 10", cyc));
    repeat (hold) @(negedge clk);
    check(out_valid && out_block == expect_ct,
          $sformatf("ct %h, expected %h", out_block, expect_ct));
    out_ready = 1'b1;
    @(negedge clk);
    out_ready = 1'b0;
    check(!out_valid, "out_valid must drop after the handshake");
  endtask

  initial begin
    blk_t k, p;
    int t0, t1;
    rk = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    set_key(128'h000102030405060708090a0b0c0d0e0f);
    run(128'h00112233445566778899aabbccddeeff, 128'h69c4e0d86a7b0430d8cdb78070b4c55a, 0);
    set_key(128'h2b7e151628aed2a6abf7158809cf4f3c);
    run(128'h3243f6a8885a308d313198a2e0370734, 128'h3925841d02dc09fbdc118597196a0b32, 3);
    for (int i = 0; i < 20; i++) begin
      k = rand128();
      p = rand128();
      set_key(k);
      run(p, encrypt(k, p), i % 3);
    end
    // Streaming: out_ready held high, four blocks back to back.
    out_ready = 1'b1;
    in_valid  = 1'b1;
    in_block  = rand128();
    t0 = 0; t1 = 0;
    for (int n = 0, cyc = 0; n < 4; cyc++) begin
      @(posedge clk);
      if (out_valid) begin
        check(out_block == encrypt(k, in_block), "streaming result");
        if (n == 1) t0 = cyc;
        if (n == 3) t1 = cyc;
        n++;
      end
    end
    check(t1 - t0 == 22, $sformatf("period %0d cycles for 2 blocks, expected 22", t1 - t0));
    in_valid = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
