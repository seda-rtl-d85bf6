// tb_seda_top: end-to-end test of the protection unit at its default sizes
// (NSEG = 4, 64-byte blocks; 256 layer entries), with a behavioural
// off-chip memory of 20-cycle read latency.
//
// Inference 1 (clean): the model's weights are written at model level, layer
// 0's ofmap at layer level, layer 1's ofmap at optBlk level; the next layers
// read them back (weights and fmaps in another order than written), and the
// layer and model MACs are verified. Every ciphertext in memory is compared
// with the reference AES-CTR with per-segment pads, every plaintext read back
// with what was written.
// Inference 2 (attacks by the memory owner): bit flip, block swap
// (re-permutation), replay of an old version, forged optBlk MAC and a changed
// weight, each of which must be caught.
// Each mechanism is counted and must occur at least once: encrypted writes,
// decrypted reads, pad made during the DRAM read, distinct pads for equal
// segments, optBlk MAC store and check, layer and model verification (pass and
// fail), detected attacks, and output stalls while the Integ Engine is busy.
module tb_seda_top;
  import seda_pkg::*;
  import aes_ref_pkg::*;

  localparam int unsigned NSEG  = 4;
  localparam int unsigned BLK_W = NSEG * 128;
  localparam int unsigned LAT   = 20;
  localparam int unsigned NW    = 6;    // weight blocks
  localparam int unsigned NF    = 8;    // fmap blocks per layer

  logic clk = 1'b0, rst_n = 1'b0;
  logic ke_valid = 1'b0, kh_valid = 1'b0, keys_ready;
  logic [127:0] ke = '0, kh = '0;
  logic req_valid = 1'b0, req_ready;
  op_e req_op = OP_READ;
  mac_level_e req_level = LVL_LAYER;
  blk_meta_t req_meta = '0;
  logic [BLK_W-1:0] req_wdata = '0;
  logic rsp_valid, rsp_ready = 1'b1;
  blk_meta_t rsp_meta;
  logic [BLK_W-1:0] rsp_rdata;
  logic mem_req_valid, mem_req_ready, mem_req_we;
  logic [PA_W-1:0] mem_req_addr;
  logic [BLK_W-1:0] mem_req_wdata;
  logic mem_rsp_valid, mem_rsp_ready;
  logic [BLK_W-1:0] mem_rsp_rdata;
  mac_t mem_rsp_rmac;
  logic mac_wr_valid, mac_wr_ready;
  logic [PA_W-1:0] mac_wr_addr;
  mac_t mac_wr_data;
  logic vcmd_valid = 1'b0, vcmd_ready;
  vcmd_e vcmd = VCMD_CLEAR;
  logic [LAYER_W-1:0] vcmd_layer = '0;
  mac_t vcmd_value = '0;
  logic vres_valid, vres_ok, blk_chk_valid, blk_chk_ok, integrity_error;
  mac_t model_mac;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_enc = 0, n_dec = 0, n_overlap = 0, n_seca = 0, n_mac_store = 0;
  int n_blk_pass = 0, n_blk_fail = 0, n_layer_pass = 0, n_layer_fail = 0;
  int n_model_pass = 0, n_model_fail = 0, n_repa = 0, n_replay = 0, n_flip = 0;
  int n_stall = 0;

  always #5 clk = ~clk;

  seda_top dut (.*);

  offchip_mem_model #(.BLK_W(BLK_W), .AW(PA_W), .LAT(LAT)) mem (
    .clk, .rst_n,
    .req_valid (mem_req_valid), .req_ready (mem_req_ready), .req_we (mem_req_we),
    .req_addr (mem_req_addr), .req_wdata (mem_req_wdata),
    .rsp_valid (mem_rsp_valid), .rsp_ready (mem_rsp_ready),
    .rsp_rdata (mem_rsp_rdata), .rsp_rmac (mem_rsp_rmac),
    .mac_wr_valid, .mac_wr_ready, .mac_wr_addr, .mac_wr_data);

  // Monitors.
  int since_rsp = -1;
  always @(posedge clk) begin
    if (rst_n && blk_chk_valid) begin
      if (blk_chk_ok) n_blk_pass++;
      else            n_blk_fail++;
    end
    if (mac_wr_valid && mac_wr_ready) n_mac_store++;
    if (mem_rsp_valid && mem_rsp_ready) since_rsp <= 0;
    else if (since_rsp >= 0) since_rsp <= since_rsp + 1;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [BLK_W-1:0] ref_ct(logic [BLK_W-1:0] pt, blk_meta_t m);
    logic [BLK_W-1:0] c;
    for (int j = 0; j < int'(NSEG); j++)
      c[j*128 +: 128] = pt[j*128 +: 128] ^ seg_pad(ke, ctr_block(m.pa, m.vn), j);
    return c;
  endfunction

  task automatic do_write(input mac_level_e lvl, input blk_meta_t m, input logic [BLK_W-1:0] pt);
    int cyc;
    @(negedge clk);
    req_op = OP_WRITE; req_level = lvl; req_meta = m; req_wdata = pt; req_valid = 1'b1;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 1'b0;
    cyc = 0;
    while (!(mem_req_valid && mem_req_ready && mem_req_we)) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == 14, $sformatf("ciphertext offered %0d edges after the request, expected 14", cyc));
    @(negedge clk);
    n_enc++;
    // The block is out; if the unit is still not ready, its MAC job waits for
    // the Integ Engine.
    while (!req_ready) begin
      n_stall++;
      @(negedge clk);
    end
  endtask

  task automatic do_read(input mac_level_e lvl, input blk_meta_t m, output logic [BLK_W-1:0] pt);
    @(negedge clk);
    req_op = OP_READ; req_level = lvl; req_meta = m; req_valid = 1'b1;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 1'b0;
    while (!rsp_valid) @(negedge clk);
    pt = rsp_rdata;
    check(rsp_meta.pa == m.pa, "response carries the request's address");
    // The pad was made while the memory was busy: the plaintext follows the
    // memory response after two cycles.
    if (since_rsp == 2) n_overlap++;
    else $display("note: read answered %0d cycles after the memory", since_rsp);
    @(negedge clk);
    n_dec++;
  endtask

  task automatic command(input vcmd_e c, input int layer, input mac_t v, output logic ok);
    @(negedge clk);
    vcmd = c; vcmd_layer = LAYER_W'(layer); vcmd_value = v; vcmd_valid = 1'b1;
    while (!vcmd_ready) @(negedge clk);
    @(posedge clk);
    #1 vcmd_valid = 1'b0;
    ok = vres_ok;
    while (!vcmd_ready) @(negedge clk);    // also waits out a clear sweep
  endtask

  function automatic blk_meta_t mk(int region, int idx, int layer, int vn);
    return '{pa: PA_W'(64'h1_0000_0000 + region * 64'h10_0000 + idx * 64),
             vn: 32'(vn), layer_id: LAYER_W'(layer), fmap_idx: 16'(idx / 4),
             blk_idx: 32'(idx)};
  endfunction

  logic [BLK_W-1:0] w_pt [NW];
  logic [BLK_W-1:0] f0_pt [NF];
  logic [BLK_W-1:0] f1_pt [NF];

  initial begin
    logic [BLK_W-1:0] got, ct;
    logic ok;
    int t0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    ke = rand128(); kh = rand128();
    ke_valid = 1'b1; kh_valid = 1'b1;
    @(negedge clk);
    ke_valid = 1'b0; kh_valid = 1'b0;
    while (!keys_ready || !vcmd_ready) @(negedge clk);

    for (int i = 0; i < int'(NW); i++)
      for (int j = 0; j < int'(NSEG); j++) w_pt[i][j*128 +: 128] = rand128();
    for (int i = 0; i < int'(NF); i++)
      for (int j = 0; j < int'(NSEG); j++) begin
        f0_pt[i][j*128 +: 128] = (i == 0) ? '0 : rand128();   // block 0: all zeros
        f1_pt[i][j*128 +: 128] = rand128();
      end

    // ---------------- inference 1: clean run ----------------
    // Weights, model level (reference built from the writes).
    for (int i = 0; i < int'(NW); i++) begin
      do_write(LVL_MODEL, mk(0, i, 0, 1), w_pt[i]);
      check(mem.peek(mk(0, i, 0, 1).pa) == ref_ct(w_pt[i], mk(0, i, 0, 1)), "weight ciphertext");
    end
    // Layer 0 ofmap, layer level. Time one write.
    for (int i = 0; i < int'(NF); i++) begin
      t0 = $time / 10;
      do_write(LVL_LAYER, mk(1, i, 0, 1), f0_pt[i]);
      ct = mem.peek(mk(1, i, 0, 1).pa);
      check(ct == ref_ct(f0_pt[i], mk(1, i, 0, 1)), $sformatf("layer 0 block %0d ciphertext", i));
      check(ct[BLK_W-1:0] != f0_pt[i], "ciphertext differs from plaintext");
      if (i == 0) begin
        for (int a = 0; a < int'(NSEG); a++)
          for (int b = a + 1; b < int'(NSEG); b++) begin
            check(ct[a*128 +: 128] != ct[b*128 +: 128], "equal segments get different pads");
            if (ct[a*128 +: 128] != ct[b*128 +: 128]) n_seca++;
          end
      end
    end
    // Layer 1: reads weights (reverse order) and layer 0's ofmap (odd then even).
    for (int i = int'(NW) - 1; i >= 0; i--) begin
      do_read(LVL_MODEL, mk(0, i, 0, 1), got);
      check(got == w_pt[i], $sformatf("weight %0d plaintext", i));
    end
    for (int k = 0; k < int'(NF); k++) begin
      int i;
      i = (k < int'(NF) / 2) ? 2 * k + 1 : 2 * (k - int'(NF) / 2);
      do_read(LVL_LAYER, mk(1, i, 0, 1), got);
      check(got == f0_pt[i], $sformatf("layer 0 block %0d plaintext", i));
    end
    command(VCMD_VERIFY_LAYER, 0, '0, ok);
    check(ok, "layer 0 verifies");
    if (ok) n_layer_pass++;
    // Layer 1 ofmap at optBlk level: MACs go off-chip.
    for (int i = 0; i < int'(NF); i++) do_write(LVL_OPTBLK, mk(2, i, 1, 1), f1_pt[i]);
    command(VCMD_VERIFY_LAYER, 1, '0, ok);   // waits until the last MAC is out
    check(n_mac_store == int'(NF), $sformatf("%0d optBlk MACs stored", n_mac_store));
    for (int i = 0; i < int'(NF); i++) begin
      do_read(LVL_OPTBLK, mk(2, i, 1, 1), got);
      check(got == f1_pt[i], $sformatf("layer 1 block %0d plaintext", i));
    end
    command(VCMD_VERIFY_MODEL, 0, '0, ok);
    check(ok, "model verifies");
    if (ok) n_model_pass++;
    check(n_blk_pass == int'(NF) && n_blk_fail == 0, $sformatf("optBlk checks pass (%0d passed, %0d failed)", n_blk_pass, n_blk_fail));
    check(!integrity_error, "clean inference raises no error");

    // ---------------- inference 2: attacks ----------------
    // Bit flip in a layer-level block.
    for (int i = 0; i < int'(NF); i++) do_write(LVL_LAYER, mk(1, i, 3, 2), f0_pt[i]);
    mem.flip_bit(mk(1, 5, 3, 2).pa, 300);
    for (int i = 0; i < int'(NF); i++) do_read(LVL_LAYER, mk(1, i, 3, 2), got);
    command(VCMD_VERIFY_LAYER, 3, '0, ok);
    check(!ok, "bit flip detected by the layer MAC");
    if (!ok) begin n_layer_fail++; n_flip++; end
    check(integrity_error, "integrity_error after the bit flip");
    command(VCMD_CLEAR, 0, '0, ok);
    check(!integrity_error, "CLEAR resets the error");

    // Re-permutation: two blocks of a layer swapped in memory.
    for (int i = 0; i < int'(NF); i++) do_write(LVL_LAYER, mk(1, i, 4, 3), f0_pt[i]);
    mem.swap_blocks(mk(1, 2, 4, 3).pa, mk(1, 6, 4, 3).pa);
    for (int i = 0; i < int'(NF); i++) do_read(LVL_LAYER, mk(1, i, 4, 3), got);
    command(VCMD_VERIFY_LAYER, 4, '0, ok);
    check(!ok, "block swap detected by the layer MAC");
    if (!ok) begin n_layer_fail++; n_repa++; end
    command(VCMD_CLEAR, 0, '0, ok);

    // Replay: an old version of a block is put back after it was rewritten.
    do_write(LVL_LAYER, mk(1, 0, 5, 4), f0_pt[1]);
    do_read(LVL_LAYER, mk(1, 0, 5, 4), got);
    command(VCMD_VERIFY_LAYER, 5, '0, ok);
    check(ok && got == f0_pt[1], "version 4 of the block verifies");
    mem.snapshot(mk(1, 0, 5, 4).pa);
    do_write(LVL_LAYER, mk(1, 0, 5, 5), f0_pt[2]);
    mem.replay(mk(1, 0, 5, 5).pa);
    do_read(LVL_LAYER, mk(1, 0, 5, 5), got);
    command(VCMD_VERIFY_LAYER, 5, '0, ok);
    check(!ok, "replayed old version detected");
    if (!ok) begin n_layer_fail++; n_replay++; end
    command(VCMD_CLEAR, 0, '0, ok);

    // Forged block at optBlk level.
    do_write(LVL_OPTBLK, mk(2, 3, 6, 6), f1_pt[3]);
    command(VCMD_VERIFY_LAYER, 6, '0, ok);
    mem.flip_bit(mk(2, 3, 6, 6).pa, 7);
    do_read(LVL_OPTBLK, mk(2, 3, 6, 6), got);
    command(VCMD_VERIFY_LAYER, 6, '0, ok);
    check(n_blk_fail == 1, "forged optBlk detected");
    command(VCMD_CLEAR, 0, '0, ok);

    // Changed weight, model level, reference loaded by the host.
    command(VCMD_SET_MODEL, 0, model_mac, ok);
    for (int i = 0; i < int'(NW); i++) do_write(LVL_MODEL, mk(0, i, 0, 7), w_pt[i]);
    mem.flip_bit(mk(0, 4, 0, 7).pa, 511);
    for (int i = 0; i < int'(NW); i++) do_read(LVL_MODEL, mk(0, i, 0, 7), got);
    command(VCMD_VERIFY_MODEL, 0, '0, ok);
    check(!ok, "changed weight detected by the model MAC");
    if (!ok) n_model_fail++;

    // Every mechanism must have happened.
    check(n_enc > 0,        "encrypted writes");
    check(n_dec > 0,        "decrypted reads");
    check(n_overlap > 0,    "pad made during the memory read");
    check(n_overlap == n_dec, "every read overlapped its pad with the memory access");
    check(n_seca > 0,       "distinct pads for equal segments");
    check(n_mac_store > 0,  "optBlk MACs stored off-chip");
    check(n_blk_pass > 0,   "optBlk check passed");
    check(n_blk_fail > 0,   "optBlk check failed");
    check(n_layer_pass > 0, "layer MAC passed");
    check(n_layer_fail > 0, "layer MAC failed");
    check(n_model_pass > 0, "model MAC passed");
    check(n_model_fail > 0, "model MAC failed");
    check(n_repa > 0,       "re-permutation detected");
    check(n_replay > 0,     "replay detected");
    check(n_flip > 0,       "bit flip detected");
    check(n_stall > 0,      "output stalled while the Integ Engine was busy");
    $display("mechanisms: enc=%0d dec=%0d overlap=%0d seca=%0d mac_store=%0d blk_pass=%0d blk_fail=%0d",
             n_enc, n_dec, n_overlap, n_seca, n_mac_store, n_blk_pass, n_blk_fail);
    $display("            layer_pass=%0d layer_fail=%0d model_pass=%0d model_fail=%0d repa=%0d replay=%0d flip=%0d stall_cycles=%0d",
             n_layer_pass, n_layer_fail, n_model_pass, n_model_fail, n_repa, n_replay, n_flip, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
