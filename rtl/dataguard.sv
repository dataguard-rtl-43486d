// dataguard: the DataGuard additions to a systolic-array ML accelerator.
//
// DataGuard lets an untrusted training application run any computation on
// the accelerator while guaranteeing that only differentially private
// results can leave the device. Every 512-byte block of on-chip data
// carries a one-byte tag: 0 means sensitive, a non-zero value is the epoch
// (audit count) in which the data was noised. The only way to obtain a
// non-zero tag is the add-noise instruction, which adds noise drawn by the
// trusted host software and also accumulates the squared l2-norm of what it
// noised. The audit instruction checks that norm against the clipping
// threshold, records the first failing epoch in CStatus and advances the
// epoch. The host privacy software lets a block leave the device only if
// its tag is non-zero, below the current epoch, below CStatus (when
// CStatus is non-zero) and within the privacy budget for that epoch count.
//
// Contents: noising module (noise addition, l2-norm with C_th/CStatus,
// epoch counter, noise supply), tagging module, tag buffer and memory
// tagging unit, plus the host-visible register file. The accelerator's own
// parts stay outside and meet this module at its ports: the VPU decoder
// (vpu_*), the noise quarter of the on-chip buffers (noise_rd_*), the
// result write port (res_*), the systolic array's result writes (sa_*),
// the DMA (noise transfer nxfer_*, tag commands mtu_*) and device memory
// (mem_*).
//
// Timing: a VPU instruction is taken on vpu_valid && vpu_ready; vpu_ready
// drops only for add-noise/audit while the noising module is busy (audit
// running or noise being fetched). add-noise results appear two clocks
// after issue; tags are written one clock after issue. Host registers
// (cfg_*) are written in one clock.
//
// Block structure follows the paper's overview and vector-processor
// figures; the register map, opcodes and the port-level handshakes are
// this design's own.
module dataguard
  import dg_pkg::*;
#(
  parameter int unsigned LANES        = 128,
  parameter int unsigned TAGBUF_DEPTH = 32768,
  parameter int unsigned CHUNK_VECS   = 12288,
  parameter int unsigned ADDR_W       = 35,
  localparam int unsigned BLK_W       = (TAGBUF_DEPTH > 1) ? $clog2(TAGBUF_DEPTH) : 1,
  localparam int unsigned NIDX_W      = (CHUNK_VECS > 1) ? $clog2(CHUNK_VECS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // host (PMA) register interface
  input  logic                cfg_we,
  input  cfg_addr_e           cfg_addr,
  input  logic [63:0]         cfg_wdata,
  output epoch_t              epoch,
  output epoch_t              cstatus,
  output fp32_t               cth,
  output logic [ADDR_W-1:0]   noise_br,
  output logic [ADDR_W-1:0]   tag_br,
  // VPU instruction issue
  input  logic                vpu_valid,
  output logic                vpu_ready,
  input  vop_e                vpu_op,
  input  logic [BLK_W-1:0]    vpu_src_a,
  input  logic [BLK_W-1:0]    vpu_src_b,
  input  logic [BLK_W-1:0]    vpu_dst,
  input  logic [LANES*32-1:0] vpu_operand,
  // noised result
  output logic                res_valid,
  output logic [LANES*32-1:0] res_data,
  // audit outcome and control-flow check
  output logic                audit_done,
  output logic                audit_pass,
  output fp32_t               p_agg,
  output logic                cf_fail,
  // noise partition of the on-chip buffers
  output logic                noise_rd_en,
  output logic [NIDX_W-1:0]   noise_rd_idx,
  input  logic [LANES*32-1:0] noise_rd_data,
  // batched noise transfer request
  output logic                nxfer_valid,
  input  logic                nxfer_ready,
  output logic [ADDR_W-1:0]   nxfer_src,
  output logic [31:0]         nxfer_bytes,
  input  logic                nxfer_done,
  // systolic-array result writes
  input  logic                sa_wr_valid,
  input  logic [BLK_W-1:0]    sa_wr_blk,
  output logic                sa_wr_ready,
  // tag commands alongside DMA transfers
  input  logic                mtu_cmd_valid,
  output logic                mtu_cmd_ready,
  input  mtu_op_e             mtu_cmd_op,
  input  logic [ADDR_W-1:0]   mtu_cmd_dev_addr,
  input  logic [BLK_W-1:0]    mtu_cmd_blk,
  input  logic [15:0]         mtu_cmd_nblk,
  output logic                mtu_cmd_done,
  // device-memory port for tag bytes
  output logic                mem_req_valid,
  input  logic                mem_req_ready,
  output logic                mem_req_we,
  output logic [ADDR_W-1:0]   mem_req_addr,
  output tag_t                mem_req_wdata,
  input  logic                mem_rsp_valid,
  input  tag_t                mem_rsp_rdata
);

  // ---- instruction dispatch -------------------------------------------
  logic nm_op, nm_ready, issue;

  assign nm_op     = (vpu_op == VOP_ADD_NOISE) || (vpu_op == VOP_AUDIT);
  assign vpu_ready = nm_op ? nm_ready : 1'b1;
  assign issue     = vpu_valid && vpu_ready;

  // ---- noising module -------------------------------------------------
  dg_noising_module #(.LANES(LANES), .CHUNK_VECS(CHUNK_VECS), .ADDR_W(ADDR_W)) u_noising (
    .clk, .rst_n,
    .op_valid(vpu_valid && nm_op), .op_ready(nm_ready),
    .op_is_audit(vpu_op == VOP_AUDIT), .operand(vpu_operand),
    .noise_rd_idx, .noise_rd_en, .noise_rd_data,
    .res_valid, .res_data,
    .audit_done, .audit_pass, .p_agg,
    .ext_fail(cf_fail),
    .cth_we(cfg_we && cfg_addr == CFG_CTH), .cth_wdata(cfg_wdata[31:0]),
    .epoch_we(cfg_we && cfg_addr == CFG_EPOCH), .epoch_wdata(cfg_wdata[EPOCH_W-1:0]),
    .cstatus_clr(cfg_we && cfg_addr == CFG_CSTATUS),
    .noise_br_we(cfg_we && cfg_addr == CFG_NOISE_BR), .noise_br_wdata(cfg_wdata[ADDR_W-1:0]),
    .cth, .epoch, .cstatus, .noise_br,
    .xfer_valid(nxfer_valid), .xfer_ready(nxfer_ready), .xfer_src(nxfer_src),
    .xfer_bytes(nxfer_bytes), .xfer_done(nxfer_done)
  );

  // ---- tagging module and tag buffer ------------------------------------
  logic             tg_re, tg_we, mt_re, mt_we;
  logic [BLK_W-1:0] tg_ra_a, tg_ra_b, tg_wa, mt_ra, mt_wa;
  tag_t             tg_rd_a, tg_rd_b, tg_wd, mt_rd, mt_wd;

  dg_tagging_module #(.BLK_W(BLK_W)) u_tagging (
    .clk, .rst_n,
    .in_valid(issue), .op(vpu_op), .src_a(vpu_src_a), .src_b(vpu_src_b), .dst(vpu_dst),
    .epoch,
    .sa_wr_valid, .sa_wr_blk, .sa_wr_ready,
    .tb_re(tg_re), .tb_ra_a(tg_ra_a), .tb_ra_b(tg_ra_b), .tb_rd_a(tg_rd_a), .tb_rd_b(tg_rd_b),
    .tb_we(tg_we), .tb_wa(tg_wa), .tb_wd(tg_wd),
    .cf_fail
  );

  dg_tag_buffer #(.DEPTH(TAGBUF_DEPTH)) u_tagbuf (
    .clk,
    .re0(tg_re), .ra0a(tg_ra_a), .ra0b(tg_ra_b), .rd0a(tg_rd_a), .rd0b(tg_rd_b),
    .we0(tg_we), .wa0(tg_wa), .wd0(tg_wd),
    .re1(mt_re), .ra1(mt_ra), .rd1(mt_rd),
    .we1(mt_we), .wa1(mt_wa), .wd1(mt_wd)
  );

  // ---- memory tagging unit ----------------------------------------------
  dg_mtu #(.ADDR_W(ADDR_W), .BLK_W(BLK_W)) u_mtu (
    .clk, .rst_n,
    .tag_br_we(cfg_we && cfg_addr == CFG_TAG_BR), .tag_br_wdata(cfg_wdata[ADDR_W-1:0]), .tag_br,
    .cmd_valid(mtu_cmd_valid), .cmd_ready(mtu_cmd_ready), .cmd_op(mtu_cmd_op),
    .cmd_dev_addr(mtu_cmd_dev_addr), .cmd_blk(mtu_cmd_blk), .cmd_nblk(mtu_cmd_nblk),
    .cmd_done(mtu_cmd_done),
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata,
    .tb_re(mt_re), .tb_ra(mt_ra), .tb_rd(mt_rd),
    .tb_we(mt_we), .tb_wa(mt_wa), .tb_wd(mt_wd)
  );

endmodule
