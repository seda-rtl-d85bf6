// tb_mac_hash: checks the block MAC against a reference CBC-MAC computed with
// the independent AES model, for random ciphertext and location records; that
// moving a block to another blk_idx or layer changes its MAC; the latency of
// 12*(NSEG+1) cycles; and that the MAC holds under out_ready back-pressure.
module tb_mac_hash;
  import seda_pkg::*;
  import aes_ref_pkg::*;

  localparam int unsigned NSEG = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic key_valid = 1'b0, keys_ready;
  logic [127:0] key = '0;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  logic [NSEG*128-1:0] in_data = '0;
  aes_block_t in_meta = '0;
  mac_t out_mac;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mac_hash dut (.clk, .rst_n, .key_valid, .key, .keys_ready,
    .in_valid, .in_ready, .in_data, .in_meta, .out_valid, .out_ready, .out_mac);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic hash(input logic [NSEG*128-1:0] d, input blk_meta_t m,
                      input int hold, output mac_t mac);
    int cyc;
    @(negedge clk);
    in_data = d; in_meta = meta_block(m); in_valid = 1'b1;
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 1'b0;
    in_data = '0; in_meta = '0;
    cyc = 0;
    while (!out_valid) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == 12 * (NSEG + 1), $sformatf("latency %0d, expected %0d", cyc, 12 * (NSEG + 1)));
    repeat (hold) @(negedge clk);
    check(out_valid, "out_valid holds");
    mac = out_mac;
    out_ready = 1'b1;
    @(negedge clk);
    out_ready = 1'b0;
  endtask

  initial begin
    logic [NSEG*128-1:0] d;
    logic [20*128-1:0] dref;
    blk_meta_t m, m2;
    mac_t mac, mac2;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    key = rand128(); key_valid = 1'b1;
    @(negedge clk);
    key_valid = 1'b0;
    while (!keys_ready) @(negedge clk);
    for (int i = 0; i < 10; i++) begin
      for (int j = 0; j < int'(NSEG); j++) d[j*128 +: 128] = rand128();
      m = blk_meta_t'({$urandom, $urandom, $urandom, $urandom});
      dref = '0;
      dref[NSEG*128-1:0] = d;
      hash(d, m, i % 4, mac);
      check(mac == cbc_mac(key, dref, NSEG, meta_block(m)), $sformatf("MAC %0d = %h", i, mac));
      m2 = m;
      if (i % 2 == 0) m2.blk_idx = m.blk_idx + 1;
      else            m2.layer_id = m.layer_id ^ 8'h01;
      hash(d, m2, 0, mac2);
      check(mac2 != mac, "same ciphertext at another location must change the MAC");
    end
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
