// tb_crypt_engine: self-checking test of the bandwidth-aware Crypt Engine at
// the default NSEG = 4 and at NSEG = 12, where segments 10 and 11 use the
// extra key expansion of Ke ^ (PA||VN). See crypt_engine_tester.
module tb_crypt_engine;
  logic clk = 1'b0, rst_n = 1'b0;
  int c4, f4, c12, f12;
  logic d4, d12;

  always #5 clk = ~clk;

  crypt_engine_tester #(.NSEG(4))  t4  (.clk, .rst_n, .checks(c4),  .failures(f4),  .done(d4));
  crypt_engine_tester #(.NSEG(12)) t12 (.clk, .rst_n, .checks(c12), .failures(f12), .done(d12));

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (d4 && d12);
    $display("TB_RESULT checks=%0d failures=%0d", c4 + c12, f4 + f12);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c4 + c12, f4 + f12 + 1);
    $finish;
  end
endmodule
