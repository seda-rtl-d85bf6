// tb_seda_workload: one complete LeNet-5 inference through the protection
// unit at its default sizes, with every byte the accelerator moves to or from
// off-chip memory encrypted, MACed and verified.
//
// Sizes are one byte per element, as in the paper's accelerator
// configurations. The layer shapes are the usual LeNet-5 ones (the paper names
// the network but gives no shapes); pooling is assumed to happen on chip, so
// each layer writes its pooled output.
//   conv1: in 32x32x1,  weights 5x5x1x6   =   150 B, out (pooled) 14x14x6 = 1176 B
//   conv2: in 14x14x6,  weights 5x5x6x16  =  2400 B, out (pooled) 5x5x16  =  400 B
//   fc1:   in 400,      weights 400x120   = 48000 B, out 120 B
//   fc2:   in 120,      weights 120x84    = 10080 B, out 84 B
//   fc3:   in 84,       weights 84x10     =   840 B, out 10 B
// Flow: all weights are written at model level (provisioning); the input
// image is written as feature map 0; layer L reads its weights (model level)
// and feature map L (layer level, then VERIFY_LAYER L) and writes feature map
// L+1. At the end the last feature map is read and verified and the model MAC
// is checked. Plaintext is a function of address and version, so every block
// read back is checked without storing it; the first block of every region is
// also compared with the reference AES-CTR ciphertext. The testbench prints
// the cycle count per block. Other networks differ only in these sizes.
module tb_seda_workload;
  import seda_pkg::*;
  import aes_ref_pkg::*;

  localparam int unsigned NSEG  = 4;
  localparam int unsigned BLK_W = NSEG * 128;
  localparam int unsigned BLK_B = BLK_W / 8;
  localparam int NL = 5;
  localparam int W_BYTES [NL]   = '{150, 2400, 48000, 10080, 840};
  localparam int F_BYTES [NL+1] = '{1024, 1176, 400, 120, 84, 10};

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
  int n_blocks = 0, n_bad_pt = 0;
  longint cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;

  seda_top dut (.*);

  offchip_mem_model #(.BLK_W(BLK_W), .AW(PA_W), .LAT(20)) mem (
    .clk, .rst_n,
    .req_valid (mem_req_valid), .req_ready (mem_req_ready), .req_we (mem_req_we),
    .req_addr (mem_req_addr), .req_wdata (mem_req_wdata),
    .rsp_valid (mem_rsp_valid), .rsp_ready (mem_rsp_ready),
    .rsp_rdata (mem_rsp_rdata), .rsp_rmac (mem_rsp_rmac),
    .mac_wr_valid, .mac_wr_ready, .mac_wr_addr, .mac_wr_data);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Plaintext of a block: a mix of its address, version and segment number.
  function automatic logic [BLK_W-1:0] gen_pt(logic [PA_W-1:0] pa, logic [31:0] vn);
    logic [BLK_W-1:0] d;
    logic [63:0] x;
    x = 64'(pa) * 64'h9e37_79b9_7f4a_7c15 ^ 64'(vn) * 64'hc2b2_ae3d_27d4_eb4f;
    for (int j = 0; j < int'(BLK_W / 64); j++) begin
      x = x ^ (x >> 29);
      x = x * 64'hbf58_476d_1ce4_e5b9;
      x = x ^ (x >> 32);
      d[j*64 +: 64] = x;
    end
    return d;
  endfunction

  function automatic blk_meta_t mk(int region, int idx, int layer, int vn);
    return '{pa: PA_W'(64'h2_0000_0000 + region * 64'h100_0000 + idx * BLK_B),
             vn: 32'(vn), layer_id: LAYER_W'(layer), fmap_idx: 16'(idx / 16),
             blk_idx: 32'(idx)};
  endfunction

  function automatic int nblk(int bytes);
    return (bytes + int'(BLK_B) - 1) / int'(BLK_B);
  endfunction

  task automatic do_write(input mac_level_e lvl, input blk_meta_t m);
    @(negedge clk);
    req_op = OP_WRITE; req_level = lvl; req_meta = m;
    req_wdata = gen_pt(m.pa, m.vn); req_valid = 1'b1;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 1'b0;
    while (!(mem_req_valid && mem_req_ready && mem_req_we)) @(negedge clk);
    @(negedge clk);
    n_blocks++;
  endtask

  task automatic do_read(input mac_level_e lvl, input blk_meta_t m);
    @(negedge clk);
    req_op = OP_READ; req_level = lvl; req_meta = m; req_valid = 1'b1;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 1'b0;
    while (!rsp_valid) @(negedge clk);
    if (rsp_rdata != gen_pt(m.pa, m.vn)) n_bad_pt++;
    n_blocks++;
  endtask

  task automatic command(input vcmd_e c, input int layer, output logic ok);
    @(negedge clk);
    vcmd = c; vcmd_layer = LAYER_W'(layer); vcmd_valid = 1'b1;
    while (!vcmd_ready) @(negedge clk);
    @(posedge clk);
    #1 vcmd_valid = 1'b0;
    ok = vres_ok;
  endtask

  function automatic logic [BLK_W-1:0] ref_ct(blk_meta_t m);
    logic [BLK_W-1:0] p, c;
    p = gen_pt(m.pa, m.vn);
    for (int j = 0; j < int'(NSEG); j++)
      c[j*128 +: 128] = p[j*128 +: 128] ^ seg_pad(ke, ctr_block(m.pa, m.vn), j);
    return c;
  endfunction

  initial begin
    logic ok;
    longint t_start;
    int vn;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    ke = rand128(); kh = rand128();
    ke_valid = 1'b1; kh_valid = 1'b1;
    @(negedge clk);
    ke_valid = 1'b0; kh_valid = 1'b0;
    while (!keys_ready || !vcmd_ready) @(negedge clk);
    t_start = cycles;
    vn = 1;

    // Provisioning: weights of all layers, model level.
    for (int l = 0; l < NL; l++) begin
      for (int i = 0; i < nblk(W_BYTES[l]); i++) do_write(LVL_MODEL, mk(l, i, l, vn));
      check(mem.peek(mk(l, 0, l, vn).pa) == ref_ct(mk(l, 0, l, vn)),
            $sformatf("weights of layer %0d: reference ciphertext", l));
    end
    // Input image = feature map 0.
    for (int i = 0; i < nblk(F_BYTES[0]); i++) do_write(LVL_LAYER, mk(16, i, 0, vn));

    for (int l = 0; l < NL; l++) begin
      for (int i = 0; i < nblk(W_BYTES[l]); i++) do_read(LVL_MODEL, mk(l, i, l, vn));
      for (int i = 0; i < nblk(F_BYTES[l]); i++) do_read(LVL_LAYER, mk(16 + l, i, l, vn));
      command(VCMD_VERIFY_LAYER, l, ok);
      check(ok, $sformatf("feature map %0d verifies", l));
      for (int i = 0; i < nblk(F_BYTES[l+1]); i++) do_write(LVL_LAYER, mk(17 + l, i, l + 1, vn));
      check(mem.peek(mk(17 + l, 0, l + 1, vn).pa) == ref_ct(mk(17 + l, 0, l + 1, vn)),
            $sformatf("feature map %0d: reference ciphertext", l + 1));
    end
    for (int i = 0; i < nblk(F_BYTES[NL]); i++) do_read(LVL_LAYER, mk(16 + NL, i, NL, vn));
    command(VCMD_VERIFY_LAYER, NL, ok);
    check(ok, "output feature map verifies");
    command(VCMD_VERIFY_MODEL, 0, ok);
    check(ok, "model MAC verifies");
    check(n_bad_pt == 0, $sformatf("%0d blocks decrypted wrongly", n_bad_pt));
    check(!integrity_error, "no integrity error in a clean inference");
    $display("LeNet-5: %0d blocks of %0d B moved in %0d cycles (%0d cycles per block)",
             n_blocks, BLK_B, cycles - t_start, (cycles - t_start) / n_blocks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
