// tb_aes_key_expansion: checks the round keys against the FIPS-197 example
// (key 2b7e1516...) and against the reference model for random keys, and
// checks that keys_ready rises exactly 10 cycles after the load edge.
module tb_aes_key_expansion;
  import aes_pkg::*;
  import aes_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic load_valid = 1'b0;
  logic [127:0] key = '0;
  rkeys_t rk;
  logic keys_ready;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  aes_key_expansion dut (.clk, .rst_n, .load_valid, .key, .rk, .keys_ready);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic load_and_check(input logic [127:0] k);
    blk_t ref_rk [11];
    int cyc;
    expand(k, ref_rk);
    @(negedge clk);
    key = k; load_valid = 1'b1;
    @(negedge clk);
    load_valid = 1'b0;
    cyc = 0;   // cycles counted after the load edge
    while (!keys_ready) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == 10, $sformatf("keys_ready after %0d cycles, expected 10", cyc));
    for (int r = 0; r < 11; r++)
      check(rk[r] == ref_rk[r], $sformatf("rk[%0d] = %h, expected %h", r, rk[r], ref_rk[r]));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    load_and_check(128'h2b7e151628aed2a6abf7158809cf4f3c);
    check(rk[1]  == 128'ha0fafe1788542cb123a339392a6c7605, "FIPS-197 k1");
    check(rk[10] == 128'hd014f9a8c9ee2589e13f0cc8b6630ca6, "FIPS-197 k10");
    for (int i = 0; i < 8; i++) load_and_check(rand128());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
