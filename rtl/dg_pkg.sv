// dg_pkg: types and constants shared by the DataGuard blocks.
//
// DataGuard adds privacy enforcement to a systolic-array accelerator: a
// noising module (add-noise / audit instructions), a per-block tag that marks
// data as sensitive (0) or noised (the epoch in which it was noised), a tag
// buffer next to the on-chip buffers, and a memory tagging unit (MTU) that
// moves tags to and from device memory. This package holds the opcodes the
// VPU decoder hands to the DataGuard blocks, the MTU command codes and the
// register map seen by the privileged host software (PMA).
//
// Sizes that follow the paper: 128 vector lanes of FP32, 512-byte blocks
// (128 x 4 bytes), 1-byte tags, 8-bit epoch. The opcode encodings and the
// register map are this design's own choice.
package dg_pkg;

  localparam int unsigned FP_W      = 32;   // single precision
  localparam int unsigned TAG_W     = 8;    // one tag byte per 512-byte block
  localparam int unsigned EPOCH_W   = 8;    // 8-bit epoch counter
  localparam int unsigned BLK_SHIFT = 9;    // log2(512 bytes per block)

  typedef logic [TAG_W-1:0]   tag_t;
  typedef logic [EPOCH_W-1:0] epoch_t;
  typedef logic [FP_W-1:0]    fp32_t;

  // VPU instruction classes as seen by DataGuard.
  typedef enum logic [2:0] {
    VOP_OTHER     = 3'd0,  // any other VPU result-producing op: tag <- 0
    VOP_VADD      = 3'd1,  // vector add: tag <- max(a,b) if both non-zero
    VOP_ADD_NOISE = 3'd2,  // add-noise: tag <- epoch
    VOP_AUDIT     = 3'd3,  // audit: clipping check, epoch++
    VOP_BRANCH    = 3'd4   // control flow: operand tag must be non-zero
  } vop_e;

  // MTU commands issued alongside the accelerator's block transfers.
  typedef enum logic [1:0] {
    MTU_LOAD        = 2'd0,  // plain load: on-chip tag <- 0
    MTU_LOAD_TAGGED = 2'd1,  // load-tagged: on-chip tag <- tag in memory
    MTU_STORE       = 2'd2   // write-back: memory tag <- on-chip tag
  } mtu_op_e;

  // PMA register map.
  typedef enum logic [2:0] {
    CFG_CTH      = 3'd0,  // clipping threshold, FP32
    CFG_EPOCH    = 3'd1,  // epoch counter (the PMA writes 1)
    CFG_CSTATUS  = 3'd2,  // any write clears CStatus
    CFG_NOISE_BR = 3'd3,  // base of the protected noise region
    CFG_TAG_BR   = 3'd4   // base of the protected tag region
  } cfg_addr_e;

  localparam fp32_t FP_ONE  = 32'h3F80_0000;
  localparam fp32_t FP_QNAN = 32'h7FC0_0000;

endpackage
