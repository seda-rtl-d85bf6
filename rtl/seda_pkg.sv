// seda_pkg: types and constants shared by the SeDA memory-protection unit.
//
// A protected data block ("optBlk") of NSEG 128-bit segments travels between
// the accelerator's on-chip SRAM and untrusted off-chip memory. Every block is
// described by blk_meta_t: its physical address (PA), its version number (VN)
// and its location in the network (layer, feature map, block index). PA||VN
// forms the AES-CTR counter; the whole record is bound into the block's MAC so
// that blocks cannot be swapped around inside a layer (re-permutation attack).
//
// The field widths are this design's choice; the paper names the fields but
// gives no widths. PA_W = 34 covers the 16 GB protected memory of the paper's
// evaluation; MAC_W = 64 follows its 8-byte MAC.
package seda_pkg;

  localparam int unsigned SEG_W    = 128;  // one AES block
  localparam int unsigned PA_W     = 34;   // byte address, 16 GB
  localparam int unsigned VN_W     = 32;   // version number
  localparam int unsigned LAYER_W  = 8;    // layer_id
  localparam int unsigned FMAP_W   = 16;   // fmap_idx
  localparam int unsigned BLKIDX_W = 32;   // blk_idx
  localparam int unsigned MAC_W    = 64;   // 8-byte MAC

  typedef logic [SEG_W-1:0] aes_block_t;
  typedef logic [MAC_W-1:0] mac_t;

  typedef struct packed {
    logic [PA_W-1:0]     pa;
    logic [VN_W-1:0]     vn;
    logic [LAYER_W-1:0]  layer_id;
    logic [FMAP_W-1:0]   fmap_idx;
    logic [BLKIDX_W-1:0] blk_idx;
  } blk_meta_t;

  // Direction of a block transfer as seen from the accelerator.
  typedef enum logic {
    OP_READ  = 1'b0,   // off-chip -> SRAM: decrypt and verify
    OP_WRITE = 1'b1    // SRAM -> off-chip: encrypt and tag
  } op_e;

  // Granularity at which a block's MAC is checked (Table 1 of the paper).
  typedef enum logic [1:0] {
    LVL_OPTBLK = 2'd0, // MAC stored off-chip next to the block, checked per block
    LVL_LAYER  = 2'd1, // XOR of all optBlk MACs of a layer, kept on-chip
    LVL_MODEL  = 2'd2  // XOR over the whole model, one on-chip register
  } mac_level_e;

  // Commands to the multi-level verifier.
  typedef enum logic [1:0] {
    VCMD_VERIFY_LAYER = 2'd0, // compare read-side and write-side layer MAC, then free the entry
    VCMD_VERIFY_MODEL = 2'd1, // compare read-side model MAC with the reference
    VCMD_SET_MODEL    = 2'd2, // load the trusted model MAC reference
    VCMD_CLEAR        = 2'd3  // clear all MAC state and the error flag
  } vcmd_e;

  // AES-CTR counter: PA || VN, right-aligned in a 128-bit block.
  function automatic aes_block_t ctr_block(logic [PA_W-1:0] pa, logic [VN_W-1:0] vn);
    return aes_block_t'({pa, vn});
  endfunction

  // Location record hashed after the ciphertext segments:
  // PA || VN || layer_id || fmap_idx || blk_idx, right-aligned.
  function automatic aes_block_t meta_block(blk_meta_t m);
    return aes_block_t'(m);
  endfunction

endpackage
