// tb_mac_verifier: exercises the three verification levels directly.
//   layer: random MACs written to several layers, read back in shuffled order,
//     VERIFY_LAYER must pass; a changed, missing or misplaced MAC must fail and
//     raise integrity_error; a verified layer's entries are freed.
//   optBlk: per-block compare with the expected MAC, match and mismatch.
//   model: reference loaded by SET_MODEL or built from model-level writes,
//     read MACs XORed, VERIFY_MODEL pass and fail.
// Also checks the NUM_LAYERS-cycle clear sweep after reset and after CLEAR.
module tb_mac_verifier;
  import seda_pkg::*;

  localparam int unsigned NL = 256;

  logic clk = 1'b0, rst_n = 1'b0;
  logic mac_valid = 1'b0, mac_ready;
  op_e mac_op = OP_READ;
  mac_level_e mac_level = LVL_LAYER;
  logic [LAYER_W-1:0] mac_layer = '0;
  mac_t mac_value = '0, mac_expected = '0;
  logic blk_chk_valid, blk_chk_ok;
  logic cmd_valid = 1'b0, cmd_ready;
  vcmd_e cmd = VCMD_CLEAR;
  logic [LAYER_W-1:0] cmd_layer = '0;
  mac_t cmd_value = '0;
  logic res_valid, res_ok, integrity_error;
  mac_t model_mac;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mac_verifier dut (.clk, .rst_n, .mac_valid, .mac_ready, .mac_op,
    .mac_level, .mac_layer, .mac_value, .mac_expected, .blk_chk_valid, .blk_chk_ok,
    .cmd_valid, .cmd_ready, .cmd, .cmd_layer, .cmd_value, .res_valid, .res_ok,
    .integrity_error, .model_mac);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic send_mac(input op_e op, input mac_level_e lvl, input int layer,
                          input mac_t v, input mac_t e = '0);
    @(negedge clk);
    mac_op = op; mac_level = lvl; mac_layer = LAYER_W'(layer);
    mac_value = v; mac_expected = e; mac_valid = 1'b1;
    while (!mac_ready) @(negedge clk);
    @(negedge clk);
    mac_valid = 1'b0;
  endtask

  task automatic send_cmd(input vcmd_e c, input int layer, input mac_t v,
                          output logic ok);
    @(negedge clk);
    cmd = c; cmd_layer = LAYER_W'(layer); cmd_value = v; cmd_valid = 1'b1;
    while (!cmd_ready) @(negedge clk);
    @(posedge clk);
    #1 cmd_valid = 1'b0;
    ok = res_ok;
    if (c == VCMD_VERIFY_LAYER || c == VCMD_VERIFY_MODEL)
      check(res_valid, "result pulse one cycle after a verify command");
  endtask

  task automatic wait_clear_sweep();
    int cyc;
    cyc = 0;
    while (!cmd_ready) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc >= int'(NL) - 2 && cyc <= int'(NL) + 2,
          $sformatf("clear sweep took %0d cycles, expected about %0d", cyc, NL));
  endtask

  initial begin
    mac_t macs [3][12];
    int   perm [12];
    mac_t ref_acc;
    logic ok;
    int   tmp, k;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!cmd_ready && !mac_ready, "busy clearing after reset");
    wait_clear_sweep();

    // Layer level: three layers, write then read back shuffled.
    for (int l = 0; l < 3; l++)
      for (int i = 0; i < 12; i++) begin
        macs[l][i] = {$urandom, $urandom};
        send_mac(OP_WRITE, LVL_LAYER, 10 + l, macs[l][i]);
      end
    for (int l = 0; l < 3; l++) begin
      for (int i = 0; i < 12; i++) perm[i] = i;
      for (int i = 11; i > 0; i--) begin
        k = $urandom_range(i, 0);
        tmp = perm[i]; perm[i] = perm[k]; perm[k] = tmp;
      end
      for (int i = 0; i < 12; i++) begin
        mac_t v;
        v = macs[l][perm[i]];
        if (l == 1 && i == 5) v = v ^ 64'h1;        // tampered block in layer 11
        if (l == 2 && i == 7) continue;             // block of layer 12 dropped
        send_mac(OP_READ, LVL_LAYER, 10 + l, v);
      end
    end
    send_cmd(VCMD_VERIFY_LAYER, 10, '0, ok);
    check(ok, "layer 10 verifies");
    check(!integrity_error, "no error after a good layer");
    send_cmd(VCMD_VERIFY_LAYER, 11, '0, ok);
    check(!ok, "layer 11 with a tampered MAC fails");
    check(integrity_error, "error flag after a bad layer");
    send_cmd(VCMD_VERIFY_LAYER, 12, '0, ok);
    check(!ok, "layer 12 with a missing block fails");
    send_cmd(VCMD_VERIFY_LAYER, 10, '0, ok);
    check(ok, "verified layer entry was freed");

    // A block read back under the wrong layer id.
    send_mac(OP_WRITE, LVL_LAYER, 20, 64'h1234);
    send_mac(OP_READ,  LVL_LAYER, 21, 64'h1234);
    send_cmd(VCMD_VERIFY_LAYER, 20, '0, ok);
    check(!ok, "layer 20 misses its block");
    send_cmd(VCMD_VERIFY_LAYER, 21, '0, ok);
    check(!ok, "layer 21 has a foreign block");

    // CLEAR resets everything.
    send_cmd(VCMD_CLEAR, 0, '0, ok);
    @(negedge clk);
    wait_clear_sweep();
    check(!integrity_error, "CLEAR resets the error flag");

    // optBlk level.
    @(negedge clk);
    mac_op = OP_READ; mac_level = LVL_OPTBLK; mac_value = 64'hdead_beef_0000_0001;
    mac_expected = 64'hdead_beef_0000_0001; mac_valid = 1'b1;
    @(posedge clk);
    #1 mac_valid = 1'b0;
    check(blk_chk_valid && blk_chk_ok, "optBlk match");
    check(!integrity_error, "no error on optBlk match");
    @(negedge clk);
    mac_expected = 64'hdead_beef_0000_0002; mac_valid = 1'b1;
    @(posedge clk);
    #1 mac_valid = 1'b0;
    check(blk_chk_valid && !blk_chk_ok, "optBlk mismatch");
    check(integrity_error, "error on optBlk mismatch");
    send_cmd(VCMD_CLEAR, 0, '0, ok);
    @(negedge clk);
    wait_clear_sweep();

    // Model level with a host-provided reference.
    ref_acc = '0;
    for (int i = 0; i < 20; i++) begin
      macs[0][i % 12] = {$urandom, $urandom};
      ref_acc ^= macs[0][i % 12];
      send_mac(OP_READ, LVL_MODEL, i % 7, macs[0][i % 12]);
    end
    send_cmd(VCMD_SET_MODEL, 0, ref_acc, ok);
    check(model_mac == ref_acc, "model reference loaded");
    send_cmd(VCMD_VERIFY_MODEL, 0, '0, ok);
    check(ok, "model MAC verifies");
    send_mac(OP_READ, LVL_MODEL, 0, ref_acc ^ 64'h8000);
    send_cmd(VCMD_VERIFY_MODEL, 0, '0, ok);
    check(!ok, "model MAC with a wrong block fails");
    // Model reference built from model-level writes.
    send_cmd(VCMD_CLEAR, 0, '0, ok);
    @(negedge clk);
    wait_clear_sweep();
    send_mac(OP_WRITE, LVL_MODEL, 0, 64'h1111);
    send_mac(OP_WRITE, LVL_MODEL, 1, 64'h2222);
    check(model_mac == 64'h3333, "model reference built from writes");
    send_mac(OP_READ, LVL_MODEL, 1, 64'h2222);
    send_mac(OP_READ, LVL_MODEL, 0, 64'h1111);
    send_cmd(VCMD_VERIFY_MODEL, 0, '0, ok);
    check(ok, "model verifies in any read order");
    check(!integrity_error, "no error at the end");

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
