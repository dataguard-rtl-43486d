// tb_dg_noising_module: self-checking test of the noising module with a
// small noise partition (CHUNK_VECS = 8) so that refills happen often.
// Models the DMA and the noise quarter of the on-chip buffers (noise
// values are a fixed function of chunk, vector and lane). Issues random
// streams of add-noise and audit and checks each noised vector (value,
// order, two-clock latency), each audit verdict and sum against a
// reference, the epoch increment per audit, CStatus and the refill stall.
module tb_dg_noising_module;
  import dg_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned LANES = 128;
  localparam int unsigned CHUNK_VECS = 8;
  localparam int unsigned ADDR_W = 35;
  localparam int unsigned IDX_W = $clog2(CHUNK_VECS);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic op_valid = 0, op_is_audit = 0, op_ready;
  logic [LANES*32-1:0] operand = '0, noise_rd_data = '0, res_data;
  logic [IDX_W-1:0] noise_rd_idx;
  logic noise_rd_en, res_valid, audit_done, audit_pass;
  fp32_t p_agg, cth, cth_wdata = '0;
  logic ext_fail = 0, cth_we = 0, epoch_we = 0, cstatus_clr = 0, noise_br_we = 0;
  epoch_t epoch_wdata = '0, epoch, cstatus;
  logic [ADDR_W-1:0] noise_br_wdata = '0, noise_br, xfer_src;
  logic xfer_valid, xfer_ready = 0, xfer_done = 0;
  logic [31:0] xfer_bytes;

  dg_noising_module #(.LANES(LANES), .CHUNK_VECS(CHUNK_VECS)) dut (.*);

  int checks = 0, failures = 0, stalls = 0, refills = 0;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] noise_val(input int chunk, input int v, input int lane);
    int h;
    h = (chunk * 7919 + v * 104729 + lane * 1299709) ^ 32'h5bd1e995;
    return {1'(h >> 3), 8'(112 + (h % 7 + 7) % 7), 23'(h * 2654435761)};
  endfunction

  // DMA and noise partition model
  int cur_chunk = -1;
  initial forever begin
    @(negedge clk);
    if (xfer_valid) begin
      xfer_ready = 1; @(negedge clk); xfer_ready = 0;
      chk(xfer_src == noise_br + ADDR_W'((refills) * CHUNK_VECS * 512), "chunk address");
      repeat (6) @(negedge clk);
      cur_chunk = refills; refills++;
      xfer_done = 1; @(negedge clk); xfer_done = 0;
    end
  end
  always @(posedge clk)
    if (noise_rd_en)
      for (int i = 0; i < LANES; i++) noise_rd_data[32*i +: 32] <= noise_val(cur_chunk, int'(noise_rd_idx), i);

  // expected results
  logic [LANES*32-1:0] expq [$];
  int issue_t [$];
  int cyc = 0;
  always @(negedge clk) cyc++;
  always @(posedge clk) if (rst_n && res_valid) begin
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL spurious result"); end
    else begin
      logic [LANES*32-1:0] e; int t;
      e = expq.pop_front(); t = issue_t.pop_front();
      if (e !== res_data) begin failures++; if (failures < 10) $display("FAIL noised value lane0 %h exp %h", res_data[31:0], e[31:0]); end
      chk(cyc - t == 2, $sformatf("result latency %0d", cyc - t));
    end
  end

  logic [31:0] pref [LANES];
  int consumed = 0;

  task automatic add_noise(input int emin, input int emax);
    logic [LANES*32-1:0] e;
    @(negedge clk);
    for (int i = 0; i < LANES; i++) operand[32*i +: 32] = frand(emin, emax);
    op_valid = 1; op_is_audit = 0;
    @(posedge clk);
    while (!op_ready) begin stalls++; @(posedge clk); end
    for (int i = 0; i < LANES; i++) begin
      e[32*i +: 32] = fadd(operand[32*i +: 32], noise_val(consumed / CHUNK_VECS, consumed % CHUNK_VECS, i));
      pref[i] = ffma(operand[32*i +: 32], operand[32*i +: 32], pref[i]);
    end
    expq.push_back(e); issue_t.push_back(cyc);
    consumed++;
    #1 op_valid = 0;
  endtask

  task automatic audit(output logic pass);
    logic [31:0] s;
    epoch_t e0;
    s = 0;
    for (int i = 0; i < LANES; i++) s = fadd(s, pref[i]);
    @(negedge clk);
    op_valid = 1; op_is_audit = 1;
    @(posedge clk);
    while (!op_ready) @(posedge clk);
    #1 op_valid = 0; op_is_audit = 0;
    e0 = epoch;
    while (!audit_done) @(negedge clk);
    chk(p_agg == s, "audit sum");
    chk(audit_pass == ($sqrt(f2r(s)) <= f2r(cth)), "audit verdict");
    pass = audit_pass;
    @(negedge clk);
    chk(epoch == e0 + 8'd1, "epoch incremented by audit");
    for (int i = 0; i < LANES; i++) pref[i] = 0;
  endtask

  initial begin
    logic p;
    for (int i = 0; i < LANES; i++) pref[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    cth_wdata = 32'h4100_0000; cth_we = 1;               // C_th = 8
    epoch_wdata = 8'd1; epoch_we = 1;
    noise_br_wdata = 35'h4_0000_0000; noise_br_we = 1;
    @(negedge clk); cth_we = 0; epoch_we = 0; noise_br_we = 0;
    // three rounds of clipped (small) gradients
    for (int r = 0; r < 3; r++) begin
      for (int k = 0; k < 10; k++) add_noise(118, 122);
      audit(p);
      chk(p, "clipped round passes");
    end
    chk(cstatus == 0, "no failure recorded");
    // an unclipped round: epoch 4 fails
    for (int k = 0; k < 6; k++) add_noise(126, 129);
    audit(p);
    chk(!p, "unclipped round fails");
    chk(cstatus == 8'd4, "cstatus holds failing epoch 4");
    // mixed random rounds
    for (int r = 0; r < 4; r++) begin
      for (int k = 0; k < 1 + $urandom_range(12); k++) add_noise(116, 125);
      audit(p);
    end
    repeat (5) @(negedge clk);
    chk(expq.size() == 0, "all results delivered");
    chk(refills > 3 && stalls > 0, "refills and stalls happened");
    $display("refills=%0d stalls=%0d", refills, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
