// tb_integ_engine: hashes whole ciphertext blocks through the Integ Engine.
// Checks the MAC offered for optBlk-level writes against the reference
// CBC-MAC, optBlk-level read checks (good and forged MAC), layer-level
// verification of blocks read back in another order (pass), with one
// ciphertext bit flipped (fail) and with two blocks' data swapped
// (re-permutation, fail), model-level verification, and that commands wait
// while a job is in flight.
module tb_integ_engine;
  import seda_pkg::*;
  import aes_ref_pkg::*;

  localparam int unsigned NSEG = 4;
  localparam int unsigned NB   = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  logic key_valid = 1'b0, keys_ready;
  logic [127:0] key = '0;
  logic job_valid = 1'b0, job_ready;
  op_e job_op = OP_READ;
  mac_level_e job_level = LVL_LAYER;
  blk_meta_t job_meta = '0;
  logic [NSEG*128-1:0] job_data = '0;
  mac_t job_expected = '0;
  logic mac_out_valid, mac_out_ready = 1'b1;
  logic [PA_W-1:0] mac_out_pa;
  mac_t mac_out;
  logic blk_chk_valid, blk_chk_ok;
  logic cmd_valid = 1'b0, cmd_ready;
  vcmd_e cmd = VCMD_CLEAR;
  logic [LAYER_W-1:0] cmd_layer = '0;
  mac_t cmd_value = '0;
  logic res_valid, res_ok, integrity_error;
  mac_t model_mac;
  int checks = 0, failures = 0;
  int n_blk_ok = 0, n_blk_bad = 0;

  always #5 clk = ~clk;

  integ_engine dut (.clk, .rst_n, .key_valid, .key, .keys_ready,
    .job_valid, .job_ready, .job_op, .job_level, .job_meta, .job_data, .job_expected,
    .mac_out_valid, .mac_out_ready, .mac_out_pa, .mac_out,
    .blk_chk_valid, .blk_chk_ok, .cmd_valid, .cmd_ready, .cmd, .cmd_layer, .cmd_value,
    .res_valid, .res_ok, .integrity_error, .model_mac);

  always @(posedge clk) if (rst_n && blk_chk_valid) begin
    if (blk_chk_ok) n_blk_ok++;
    else            n_blk_bad++;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic job(input op_e op, input mac_level_e lvl, input blk_meta_t m,
                     input logic [NSEG*128-1:0] d, input mac_t e = '0);
    @(negedge clk);
    job_op = op; job_level = lvl; job_meta = m; job_data = d; job_expected = e;
    job_valid = 1'b1;
    while (!job_ready) @(negedge clk);
    @(negedge clk);
    job_valid = 1'b0;
    job_data = '0;
  endtask

  task automatic command(input vcmd_e c, input int layer, output logic ok);
    @(negedge clk);
    cmd = c; cmd_layer = LAYER_W'(layer); cmd_valid = 1'b1;
    while (!cmd_ready) @(negedge clk);
    @(posedge clk);
    #1 cmd_valid = 1'b0;
    ok = res_ok;
  endtask

  function automatic mac_t ref_mac(logic [NSEG*128-1:0] d, blk_meta_t m);
    logic [20*128-1:0] dd;
    dd = '0;
    dd[NSEG*128-1:0] = d;
    return cbc_mac(key, dd, NSEG, meta_block(m));
  endfunction

  initial begin
    logic [NSEG*128-1:0] ct [NB];
    blk_meta_t meta [NB];
    logic ok;
    mac_t got;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    key = rand128(); key_valid = 1'b1;
    @(negedge clk);
    key_valid = 1'b0;
    while (!keys_ready || !cmd_ready) @(negedge clk);

    for (int i = 0; i < int'(NB); i++) begin
      for (int j = 0; j < int'(NSEG); j++) ct[i][j*128 +: 128] = rand128();
      meta[i] = '{pa: PA_W'(64 * (100 + i)), vn: 32'd7, layer_id: 8'd3,
                  fmap_idx: 16'(i / 2), blk_idx: 32'(i)};
    end

    // optBlk write: MAC offered for off-chip storage.
    fork
      job(OP_WRITE, LVL_OPTBLK, meta[0], ct[0]);
      begin
        while (!mac_out_valid) @(negedge clk);
        got = mac_out;
        check(mac_out == ref_mac(ct[0], meta[0]), "optBlk write MAC");
        check(mac_out_pa == meta[0].pa, "optBlk MAC address");
      end
    join
    // optBlk reads: good and forged stored MAC.
    job(OP_READ, LVL_OPTBLK, meta[0], ct[0], got);
    command(VCMD_VERIFY_MODEL, 0, ok);   // only to wait for the job to finish
    check(n_blk_ok == 1 && n_blk_bad == 0, "optBlk read with the right MAC passes");
    job(OP_READ, LVL_OPTBLK, meta[0], ct[0], got ^ 64'h10);
    command(VCMD_CLEAR, 0, ok);
    check(n_blk_bad == 1, "optBlk read with a forged MAC fails");
    while (!cmd_ready) @(negedge clk);
    check(!integrity_error, "CLEAR resets the flag");

    // Layer level: write NB blocks, read back in reverse order.
    for (int i = 0; i < int'(NB); i++) job(OP_WRITE, LVL_LAYER, meta[i], ct[i]);
    for (int i = int'(NB) - 1; i >= 0; i--) job(OP_READ, LVL_LAYER, meta[i], ct[i]);
    @(negedge clk);
    check(!cmd_ready, "command held off while a job is in flight");
    command(VCMD_VERIFY_LAYER, 3, ok);
    check(ok, "layer verifies after reordered reads");

    // Bit flip in one block.
    for (int i = 0; i < int'(NB); i++) job(OP_WRITE, LVL_LAYER, meta[i], ct[i]);
    for (int i = 0; i < int'(NB); i++)
      job(OP_READ, LVL_LAYER, meta[i], (i == 2) ? ct[i] ^ (1 << 77) : ct[i]);
    command(VCMD_VERIFY_LAYER, 3, ok);
    check(!ok, "layer with a flipped bit fails");
    check(integrity_error, "integrity_error set");
    command(VCMD_CLEAR, 0, ok);
    while (!cmd_ready) @(negedge clk);

    // Re-permutation: blocks 1 and 4 swap places in memory.
    for (int i = 0; i < int'(NB); i++) job(OP_WRITE, LVL_LAYER, meta[i], ct[i]);
    for (int i = 0; i < int'(NB); i++)
      job(OP_READ, LVL_LAYER, meta[i], (i == 1) ? ct[4] : (i == 4) ? ct[1] : ct[i]);
    command(VCMD_VERIFY_LAYER, 3, ok);
    check(!ok, "swapped blocks fail the layer MAC");
    command(VCMD_CLEAR, 0, ok);
    while (!cmd_ready) @(negedge clk);

    // Model level: reference built from writes, reads in another order.
    for (int i = 0; i < int'(NB); i++) job(OP_WRITE, LVL_MODEL, meta[i], ct[i]);
    for (int i = 0; i < int'(NB); i++) job(OP_READ, LVL_MODEL, meta[(i + 3) % NB], ct[(i + 3) % NB]);
    command(VCMD_VERIFY_MODEL, 0, ok);
    check(ok, "model MAC verifies");
    check(!integrity_error, "no error at the end");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
