// tb_dg_l2_norm: self-checking test of the l2-norm calculation unit.
// Accumulates random add-noise operand vectors, runs audits and compares the
// aggregated sum of squares (reference: per-lane rounded FMA, then a lane-order
// rounded sum), the clipping verdict (reference: sqrt in double), the audit
// latency (LANES+1 clocks busy), the CStatus first-failure rule, the
// control-flow failure input and the clearing of the partial sums.
module tb_dg_l2_norm;
  import dg_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned LANES = 128;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic acc_valid = 0, audit_start = 0, ext_fail = 0, cth_we = 0, cstatus_clr = 0;
  logic [LANES*32-1:0] operand = '0;
  logic audit_busy, audit_done, audit_pass;
  fp32_t p_agg, cth, cth_wdata = '0;
  epoch_t epoch = 8'd1, cstatus;

  dg_l2_norm #(.LANES(LANES)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] pref [LANES];

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic accumulate(input logic [LANES*32-1:0] v);
    @(negedge clk);
    operand = v; acc_valid = 1;
    for (int i = 0; i < LANES; i++) pref[i] = ffma(v[32*i +: 32], v[32*i +: 32], pref[i]);
    @(negedge clk);
    acc_valid = 0;
  endtask

  task automatic write_cth(input fp32_t v);
    @(negedge clk); cth_wdata = v; cth_we = 1; @(negedge clk); cth_we = 0;
  endtask

  // run an audit and check sum, verdict and latency
  task automatic audit(output logic pass);
    logic [31:0] sref;
    int cyc;
    logic exp_pass;
    sref = 32'd0;
    for (int i = 0; i < LANES; i++) sref = fadd(sref, pref[i]);
    exp_pass = ($sqrt(f2r(sref)) <= f2r(cth));
    @(negedge clk); audit_start = 1; @(negedge clk); audit_start = 0;
    cyc = 1;
    while (!audit_done) begin @(negedge clk); cyc++; end
    chk(cyc == LANES + 2, $sformatf("audit latency %0d", cyc));
    chk(p_agg == sref, $sformatf("p_agg %h expected %h", p_agg, sref));
    chk(audit_pass == exp_pass, "audit verdict");
    pass = audit_pass;
    for (int i = 0; i < LANES; i++) pref[i] = 32'd0;
  endtask

  initial begin
    logic p;
    logic [LANES*32-1:0] v;
    for (int i = 0; i < LANES; i++) pref[i] = 32'd0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    write_cth(32'h4120_0000);        // 10.0
    // round 1: small gradients, passes
    for (int k = 0; k < 5; k++) begin
      for (int i = 0; i < LANES; i++) v[32*i +: 32] = frand(115, 120);
      accumulate(v);
    end
    audit(p);
    chk(p == 1'b1, "small gradients pass");
    chk(cstatus == 8'd0, "cstatus untouched on pass");
    // partial sums cleared: an empty audit gives 0
    audit(p);
    chk(p_agg == 32'd0, "partial sums cleared after audit");
    // exact boundary: 3^2 + 4^2 = 25, C_th = 5 passes, just below 5 fails
    write_cth(32'h40A0_0000);        // 5.0
    v = '0; v[31:0] = 32'h4040_0000; v[32*77 +: 32] = 32'hC080_0000;
    accumulate(v);
    audit(p);
    chk(p == 1'b1, "boundary sqrt(25) <= 5");
    write_cth(32'h409F_FFFF);
    accumulate(v);
    epoch = 8'd3;
    audit(p);
    chk(p == 1'b0, "boundary sqrt(25) > 4.9999995");
    chk(cstatus == 8'd3, "cstatus = first failing epoch");
    // a second failure keeps the first epoch
    epoch = 8'd4;
    for (int k = 0; k < 3; k++) begin
      for (int i = 0; i < LANES; i++) v[32*i +: 32] = frand(126, 130);
      accumulate(v);
    end
    audit(p);
    chk(p == 1'b0, "large gradients fail");
    chk(cstatus == 8'd3, "cstatus keeps first failure");
    // PMA clears, control-flow failure sets it
    @(negedge clk); cstatus_clr = 1; @(negedge clk); cstatus_clr = 0;
    chk(cstatus == 8'd0, "cstatus cleared by PMA");
    epoch = 8'd9;
    @(negedge clk); ext_fail = 1; @(negedge clk); ext_fail = 0;
    chk(cstatus == 8'd9, "control-flow failure sets cstatus");
    // random rounds against random thresholds
    for (int r = 0; r < 6; r++) begin
      write_cth(frand(125, 132) & 32'h7FFF_FFFF);
      for (int k = 0; k < 4; k++) begin
        for (int i = 0; i < LANES; i++) v[32*i +: 32] = frand(118, 127);
        accumulate(v);
      end
      audit(p);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
