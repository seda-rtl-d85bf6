// crypt_engine_tester: drives one crypt_engine of NSEG segments and compares
// it with the reference model. Used by tb_crypt_engine for NSEG = 4 (the
// default, one key expansion) and NSEG = 12 (second key expansion of
// Ke ^ (PA||VN)). Checks, per block: ciphertext = plaintext ^ pad_j per
// segment; decryption of the ciphertext returns the plaintext; a block of
// identical plaintext segments gives pairwise different ciphertext segments;
// din_ready comes 11 cycles after the counter handshake.
module crypt_engine_tester #(
  parameter int unsigned NSEG   = 4,
  parameter int unsigned BLOCKS = 12
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  import seda_pkg::*;
  import aes_ref_pkg::*;

  logic key_valid = 1'b0, keys_ready;
  logic [127:0] key = '0;
  logic ctr_valid = 1'b0, ctr_ready;
  aes_block_t ctr = '0;
  logic din_valid = 1'b0, din_ready, dout_valid, dout_ready = 1'b0;
  logic [NSEG*128-1:0] din = '0, dout;

  crypt_engine #(.NSEG(NSEG)) dut (.clk, .rst_n, .key_valid, .key, .keys_ready,
    .ctr_valid, .ctr_ready, .ctr, .din_valid, .din_ready, .din,
    .dout_valid, .dout_ready, .dout);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL (NSEG=%0d): %s", NSEG, what);
    end
  endtask

  // One pass through the engine; returns its output.
  task automatic xfer(input aes_block_t c, input logic [NSEG*128-1:0] d,
                      output logic [NSEG*128-1:0] q);
    int cyc;
    @(negedge clk);
    ctr = c; ctr_valid = 1'b1;
    while (!ctr_ready) @(negedge clk);
    @(negedge clk);
    ctr_valid = 1'b0;
    ctr = '0;                     // the engine must not need ctr any more
    din = d; din_valid = 1'b1;
    cyc = 0;   // cycles counted after the ctr accept edge
    while (!din_ready) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == 11, $sformatf("din_ready %0d cycles after ctr, expected 11", cyc));
    @(negedge clk);
    din_valid = 1'b0;
    check(dout_valid, "dout_valid one cycle after din");
    q = dout;
    dout_ready = 1'b1;
    @(negedge clk);
    dout_ready = 1'b0;
  endtask

  initial begin
    logic [NSEG*128-1:0] pt, ct, back, expct;
    aes_block_t c;
    checks = 0; failures = 0; done = 1'b0;
    @(posedge rst_n);
    @(negedge clk);
    key = rand128(); key_valid = 1'b1;
    @(negedge clk);
    key_valid = 1'b0;
    while (!keys_ready) @(negedge clk);
    for (int b = 0; b < int'(BLOCKS); b++) begin
      c = aes_block_t'({$urandom, $urandom, $urandom});
      if (b % 3 == 0) begin
        for (int j = 0; j < int'(NSEG); j++) pt[j*128 +: 128] = 128'h0;   // all-zero block
      end else begin
        for (int j = 0; j < int'(NSEG); j++) pt[j*128 +: 128] = rand128();
      end
      for (int j = 0; j < int'(NSEG); j++)
        expct[j*128 +: 128] = pt[j*128 +: 128] ^ seg_pad(key, c, j);
      xfer(c, pt, ct);
      check(ct == expct, $sformatf("block %0d ciphertext", b));
      if (b % 3 == 0)
        for (int i = 0; i < int'(NSEG); i++)
          for (int j = i + 1; j < int'(NSEG); j++)
            check(ct[i*128 +: 128] != ct[j*128 +: 128],
                  $sformatf("segments %0d and %0d share a pad", i, j));
      xfer(c, ct, back);
      check(back == pt, $sformatf("block %0d decrypts back", b));
    end
    done = 1'b1;
  end
endmodule
