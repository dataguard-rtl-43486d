// tb_dataguard: end-to-end test of the DataGuard top at its default sizes
// (128 lanes, 32768-entry tag buffer, 6 MB noise partition).
//
// Behavioural models stand in for the accelerator around DataGuard: the
// noise quarter of the on-chip buffers and the DMA that fills it, device
// memory holding the tag region, and the host privacy software's release
// rule (a block may leave only if its tag t satisfies t != 0, t < epoch and,
// when CStatus != 0, t < CStatus). The test walks through a federated
// training round as the design is meant to be used and through the attacks
// it must stop:
//   - loads of raw data (tags 0) and systolic-array results (tags 0)
//   - ten iterations of add-noise on clipped gradients, each followed by
//     audit, store of the noised gradients and tagged reload; vadd
//     aggregation of the noised gradients; all must be releasable
//   - sharing raw data or a vadd that mixes in raw data: not releasable
//   - unclipped gradients: audit fails, CStatus = that epoch, the noised
//     result is not releasable
//   - skipping the audit: tag equals epoch, not releasable
//   - a branch on sensitive data sets CStatus
//   - more add-noise than one noise chunk holds: refill and stall
// Every noised vector, audit sum and verdict is checked against a
// reference model, and every tag that reaches device memory against a tag
// model. Each mechanism is counted and must occur at least once.
module tb_dataguard;
  import dg_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned LANES = 128;
  localparam int unsigned CHUNK_VECS = 12288;
  localparam int unsigned ADDR_W = 35;
  localparam int unsigned BLK_W = 15;
  localparam int unsigned NIDX_W = 14;
  localparam logic [ADDR_W-1:0] NOISE_BR = 35'h6_0000_0000;
  localparam logic [ADDR_W-1:0] TAG_BR   = 35'h7_C000_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we = 0;
  cfg_addr_e cfg_addr = CFG_CTH;
  logic [63:0] cfg_wdata = 0;
  epoch_t epoch, cstatus;
  fp32_t cth, p_agg;
  logic [ADDR_W-1:0] noise_br, tag_br;
  logic vpu_valid = 0, vpu_ready;
  vop_e vpu_op = VOP_OTHER;
  logic [BLK_W-1:0] vpu_src_a = 0, vpu_src_b = 0, vpu_dst = 0;
  logic [LANES*32-1:0] vpu_operand = 0, res_data, noise_rd_data = 0;
  logic res_valid, audit_done, audit_pass, cf_fail, noise_rd_en;
  logic [NIDX_W-1:0] noise_rd_idx;
  logic nxfer_valid, nxfer_ready = 0, nxfer_done = 0;
  logic [ADDR_W-1:0] nxfer_src;
  logic [31:0] nxfer_bytes;
  logic sa_wr_valid = 0, sa_wr_ready;
  logic [BLK_W-1:0] sa_wr_blk = 0;
  logic mtu_cmd_valid = 0, mtu_cmd_ready, mtu_cmd_done;
  mtu_op_e mtu_cmd_op = MTU_LOAD;
  logic [ADDR_W-1:0] mtu_cmd_dev_addr = 0, mem_req_addr;
  logic [BLK_W-1:0] mtu_cmd_blk = 0;
  logic [15:0] mtu_cmd_nblk = 0;
  logic mem_req_valid, mem_req_ready = 0, mem_req_we, mem_rsp_valid = 0;
  tag_t mem_req_wdata, mem_rsp_rdata = 0;

  dataguard dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 15) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- mechanism counters ----
  int n_addnoise = 0, n_audit_pass = 0, n_audit_fail = 0, n_refill = 0, n_stall = 0;
  int n_vadd_noised = 0, n_vadd_mixed = 0, n_cf_fail = 0, n_sa = 0, n_sa_wait = 0;
  int n_load = 0, n_load_tagged = 0, n_store = 0, n_bypass = 0, n_reject = 0, n_release = 0;

  // ---- noise partition and DMA model ----
  function automatic logic [31:0] noise_val(input int chunk, input int v, input int lane);
    int h;
    h = (chunk * 7919 + v * 104729 + lane * 1299709) ^ 32'h5bd1e995;
    return {1'(h >> 3), 8'(110 + (h % 7 + 7) % 7), 23'(h * 2654435761)};
  endfunction
  int cur_chunk = -1;
  initial forever begin
    @(negedge clk);
    if (nxfer_valid) begin
      nxfer_ready = 1; @(negedge clk); nxfer_ready = 0;
      chk(nxfer_src == NOISE_BR + ADDR_W'(n_refill) * ADDR_W'(CHUNK_VECS * 512), "noise chunk address");
      chk(nxfer_bytes == 32'd6291456, "noise chunk is 6 MB");
      repeat (40) @(negedge clk);
      cur_chunk = n_refill; n_refill++;
      nxfer_done = 1; @(negedge clk); nxfer_done = 0;
    end
  end
  always @(posedge clk)
    if (noise_rd_en)
      for (int i = 0; i < LANES; i++) noise_rd_data[32*i +: 32] <= noise_val(cur_chunk, int'(noise_rd_idx), i);

  // ---- device memory (tag region) model ----
  tag_t devtag [logic [ADDR_W-1:0]];
  initial forever begin
    @(negedge clk);
    if (mem_req_valid) begin
      logic [ADDR_W-1:0] a; logic w; tag_t d;
      mem_req_ready = 1; a = mem_req_addr; w = mem_req_we; d = mem_req_wdata;
      @(negedge clk); mem_req_ready = 0;
      if (w) devtag[a] = d;
      else begin
        repeat (2) @(negedge clk);
        mem_rsp_rdata = devtag.exists(a) ? devtag[a] : 8'h00;
        mem_rsp_valid = 1; @(negedge clk); mem_rsp_valid = 0;
      end
    end
  end

  // ---- reference state ----
  tag_t tmodel [logic [BLK_W-1:0]];        // expected on-chip tags
  logic [31:0] pref [LANES];
  int consumed = 0;
  logic [LANES*32-1:0] expq [$];
  always @(posedge clk) if (rst_n && res_valid) begin
    logic [LANES*32-1:0] e;
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL spurious result"); end
    else begin
      e = expq.pop_front();
      if (e !== res_data) begin failures++; if (failures < 15) $display("FAIL noised vector lane0 %h exp %h", res_data[31:0], e[31:0]); end
    end
  end

  task automatic cfg(input cfg_addr_e a, input logic [63:0] d);
    @(negedge clk); cfg_addr = a; cfg_wdata = d; cfg_we = 1; @(negedge clk); cfg_we = 0;
  endtask

  function automatic tag_t tg(input int b);
    return tmodel.exists(BLK_W'(b)) ? tmodel[BLK_W'(b)] : 8'h00;
  endfunction

  // issue one VPU instruction; returns after it is taken
  task automatic vpu(input vop_e op, input int a, input int b, input int d,
                     input logic [LANES*32-1:0] opnd = '0);
    @(negedge clk);
    vpu_op = op; vpu_src_a = BLK_W'(a); vpu_src_b = BLK_W'(b); vpu_dst = BLK_W'(d);
    vpu_operand = opnd; vpu_valid = 1;
    @(posedge clk);
    while (!vpu_ready) begin n_stall++; @(posedge clk); end
    // model the architectural effect
    unique case (op)
      VOP_ADD_NOISE: begin
        logic [LANES*32-1:0] e;
        for (int i = 0; i < LANES; i++) begin
          e[32*i +: 32] = fadd(opnd[32*i +: 32], noise_val(consumed / CHUNK_VECS, consumed % CHUNK_VECS, i));
          pref[i] = ffma(opnd[32*i +: 32], opnd[32*i +: 32], pref[i]);
        end
        expq.push_back(e);
        consumed++; n_addnoise++;
        tmodel[BLK_W'(d)] = epoch;
      end
      VOP_VADD: begin
        if (tg(a) != 0 && tg(b) != 0) begin
          tmodel[BLK_W'(d)] = (tg(a) > tg(b)) ? tg(a) : tg(b); n_vadd_noised++;
        end else begin
          tmodel[BLK_W'(d)] = 0; n_vadd_mixed++;
        end
      end
      VOP_OTHER: tmodel[BLK_W'(d)] = 0;
      default: ;
    endcase
    #1 vpu_valid = 0;
  endtask

  task automatic audit(output logic pass);
    logic [31:0] s;
    epoch_t e0;
    s = 0;
    for (int i = 0; i < LANES; i++) s = fadd(s, pref[i]);
    e0 = epoch;
    vpu(VOP_AUDIT, 0, 0, 0);
    while (!audit_done) @(negedge clk);
    chk(p_agg == s, "audit sum of squares");
    chk(audit_pass == ($sqrt(f2r(s)) <= f2r(cth)), "audit verdict");
    pass = audit_pass;
    if (pass) n_audit_pass++; else n_audit_fail++;
    @(negedge clk);
    chk(epoch == e0 + 1, "epoch advanced");
    for (int i = 0; i < LANES; i++) pref[i] = 0;
  endtask

  task automatic mtu(input mtu_op_e op, input logic [ADDR_W-1:0] addr, input int blk, input int n);
    @(negedge clk);
    mtu_cmd_op = op; mtu_cmd_dev_addr = addr; mtu_cmd_blk = BLK_W'(blk); mtu_cmd_nblk = 16'(n);
    mtu_cmd_valid = 1;
    while (!mtu_cmd_ready) @(negedge clk);
    @(negedge clk); mtu_cmd_valid = 0;
    while (!mtu_cmd_done) @(negedge clk);
    unique case (op)
      MTU_LOAD: begin for (int i = 0; i < n; i++) tmodel[BLK_W'(blk + i)] = 0; n_load++; end
      MTU_LOAD_TAGGED: begin
        for (int i = 0; i < n; i++)
          tmodel[BLK_W'(blk + i)] = devtag.exists(TAG_BR + (addr >> 9) + i) ? devtag[TAG_BR + (addr >> 9) + i] : 0;
        n_load_tagged++;
      end
      default: begin
        for (int i = 0; i < n; i++)
          chk(devtag[TAG_BR + (addr >> 9) + i] == tg(blk + i), $sformatf("stored tag of block %0d", blk + i));
        n_store++;
      end
    endcase
  endtask

  // host release rule applied to the tag that reached device memory
  function automatic logic releasable(input logic [ADDR_W-1:0] addr);
    tag_t t;
    t = devtag.exists(TAG_BR + (addr >> 9)) ? devtag[TAG_BR + (addr >> 9)] : 0;
    return (t != 0) && (t < epoch) && (cstatus == 0 || t < cstatus);
  endfunction

  task automatic expect_release(input logic [ADDR_W-1:0] addr, input logic ok, input string what);
    chk(releasable(addr) == ok, what);
    if (releasable(addr)) n_release++; else n_reject++;
  endtask

  function automatic logic [LANES*32-1:0] grad(input int emin, input int emax);
    logic [LANES*32-1:0] v;
    for (int i = 0; i < LANES; i++) v[32*i +: 32] = frand(emin, emax);
    return v;
  endfunction

  localparam logic [ADDR_W-1:0] GRAD_ADDR = 35'h0_4000_0000;  // noised gradients
  localparam logic [ADDR_W-1:0] RAW_ADDR  = 35'h0_0000_0000;  // raw records

  initial begin
    logic p;
    for (int i = 0; i < LANES; i++) pref[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // host configuration
    cfg(CFG_CTH, 64'h4100_0000);          // C_th = 8.0
    cfg(CFG_EPOCH, 1);
    cfg(CFG_CSTATUS, 0);
    cfg(CFG_NOISE_BR, NOISE_BR);
    cfg(CFG_TAG_BR, TAG_BR);
    chk(epoch == 1 && cstatus == 0 && cth == 32'h4100_0000 && tag_br == TAG_BR && noise_br == NOISE_BR,
        "host registers");

    // raw data in blocks 0..15; systolic-array results into 16..23
    mtu(MTU_LOAD, RAW_ADDR, 0, 16);
    for (int i = 16; i < 24; i++) begin
      @(negedge clk); sa_wr_valid = 1; sa_wr_blk = BLK_W'(i);
      @(posedge clk); while (!sa_wr_ready) @(posedge clk);
      tmodel[BLK_W'(i)] = 0; n_sa++;
      #1 sa_wr_valid = 0;
    end
    // a systolic-array write competing with a stream of VPU results
    fork
      begin
        for (int k = 0; k < 6; k++) vpu(VOP_OTHER, 0, 1, 40 + k);
      end
      begin
        @(negedge clk); @(negedge clk);
        sa_wr_valid = 1; sa_wr_blk = BLK_W'(30);
        @(posedge clk); while (!sa_wr_ready) begin n_sa_wait++; @(posedge clk); end
        tmodel[BLK_W'(30)] = 0; n_sa++;
        #1 sa_wr_valid = 0;
      end
    join

    // one training round of ten iterations: noise, audit, store, reload
    for (int it = 0; it < 10; it++) begin
      for (int v = 0; v < 4; v++) vpu(VOP_ADD_NOISE, 16 + v, 0, 100 + v, grad(116, 120));
      // tag bypass: branch on the block just tagged (back-to-back)
      vpu(VOP_BRANCH, 103, 0, 0); n_bypass++;
      audit(p);
      chk(p, "clipped iteration passes audit");
      mtu(MTU_STORE, GRAD_ADDR + ADDR_W'(it * 4 * 512), 100, 4);
    end
    chk(!cf_fail && cstatus == 0, "branch on noised data allowed");
    for (int it = 0; it < 10; it++)
      expect_release(GRAD_ADDR + ADDR_W'(it * 4 * 512), 1'b1, "noised gradients releasable");
    // aggregate the ten iterations with vadd on tagged reloads
    mtu(MTU_LOAD_TAGGED, GRAD_ADDR, 200, 40);
    for (int v = 0; v < 4; v++) begin
      vpu(VOP_VADD, 200 + v, 204 + v, 300 + v);
      for (int it = 2; it < 10; it++) vpu(VOP_VADD, 300 + v, 200 + it * 4 + v, 300 + v);
    end
    mtu(MTU_STORE, 35'h0_5000_0000, 300, 4);
    for (int v = 0; v < 4; v++)
      expect_release(35'h0_5000_0000 + ADDR_W'(v * 512), 1'b1, "aggregated gradients releasable");
    // attack 1: raw data or a sum with raw data is never releasable
    vpu(VOP_VADD, 300, 0, 400);
    mtu(MTU_STORE, 35'h0_6000_0000, 400, 1);
    mtu(MTU_STORE, 35'h0_6000_0200, 0, 1);
    mtu(MTU_STORE, 35'h0_6000_0400, 16, 1);
    expect_release(35'h0_6000_0000, 1'b0, "vadd with raw operand rejected");
    expect_release(35'h0_6000_0200, 1'b0, "raw data rejected");
    expect_release(35'h0_6000_0400, 1'b0, "systolic-array result rejected");
    // attack: noised but never audited
    vpu(VOP_ADD_NOISE, 16, 0, 500, grad(116, 119));
    mtu(MTU_STORE, 35'h0_7000_0000, 500, 1);
    expect_release(35'h0_7000_0000, 1'b0, "unaudited noised data rejected");
    audit(p);
    // attack 2: unclipped gradients
    begin
      epoch_t efail;
      efail = epoch;
      for (int v = 0; v < 4; v++) vpu(VOP_ADD_NOISE, 16 + v, 0, 600 + v, grad(126, 129));
      audit(p);
      chk(!p, "unclipped gradients fail audit");
      chk(cstatus == efail, "CStatus holds the failing epoch");
      mtu(MTU_STORE, 35'h0_7100_0000, 600, 1);
      expect_release(35'h0_7100_0000, 1'b0, "unclipped noised data rejected");
      expect_release(GRAD_ADDR, 1'b1, "earlier epochs stay releasable");
    end
    // branch on sensitive data after the host clears CStatus
    cfg(CFG_CSTATUS, 0);
    begin
      epoch_t ecf;
      ecf = epoch;
      vpu(VOP_BRANCH, 0, 0, 0);
      repeat (2) @(negedge clk);
      chk(cstatus == ecf, "branch on sensitive data sets CStatus");
      if (cstatus == ecf) n_cf_fail++;
    end
    // exhaust the first noise chunk: refill and stall
    for (int k = consumed; k < CHUNK_VECS + 8; k++) vpu(VOP_ADD_NOISE, 16, 0, 700, grad(100, 104));
    audit(p);
    repeat (5) @(negedge clk);
    chk(expq.size() == 0, "every noised vector delivered");

    $display("addnoise=%0d audit_pass=%0d audit_fail=%0d refill=%0d stall=%0d vadd_noised=%0d vadd_mixed=%0d",
             n_addnoise, n_audit_pass, n_audit_fail, n_refill, n_stall, n_vadd_noised, n_vadd_mixed);
    $display("cf_fail=%0d sa=%0d sa_wait=%0d load=%0d load_tagged=%0d store=%0d bypass=%0d release=%0d reject=%0d",
             n_cf_fail, n_sa, n_sa_wait, n_load, n_load_tagged, n_store, n_bypass, n_release, n_reject);
    chk(n_addnoise > 0, "add-noise happened");   chk(n_audit_pass > 0, "audit pass happened");
    chk(n_audit_fail > 0, "audit fail happened"); chk(n_refill > 1, "noise refill happened");
    chk(n_stall > 0, "stall happened");          chk(n_vadd_noised > 0, "noised vadd happened");
    chk(n_vadd_mixed > 0, "mixed vadd happened"); chk(n_cf_fail > 0, "control-flow failure happened");
    chk(n_sa > 0, "systolic-array write happened"); chk(n_sa_wait > 0, "systolic-array wait happened");
    chk(n_load > 0 && n_load_tagged > 0 && n_store > 0, "MTU operations happened");
    chk(n_bypass > 0, "tag bypass happened");
    chk(n_release > 0 && n_reject > 0, "release and rejection happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
