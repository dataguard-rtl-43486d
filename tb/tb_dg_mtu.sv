// tb_dg_mtu: self-checking test of the memory tagging unit. Behavioural
// models of the tag region of device memory (random request-ready and
// response delays) and of the tag buffer's port 1. Runs plain loads,
// tagged loads and stores over random block ranges and checks that plain
// loads zero the on-chip tags without memory traffic, that tagged loads
// copy the memory tags, that stores copy the on-chip tags to
// tag-br + (address >> 9), and that a plain load moves one tag per clock.
module tb_dg_mtu;
  import dg_pkg::*;

  localparam int unsigned ADDR_W = 35, BLK_W = 15, NB = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic tag_br_we = 0, cmd_valid = 0, mem_req_ready = 0, mem_rsp_valid = 0;
  logic [ADDR_W-1:0] tag_br_wdata = 0, tag_br, cmd_dev_addr = 0, mem_req_addr;
  mtu_op_e cmd_op = MTU_LOAD;
  logic [BLK_W-1:0] cmd_blk = 0, tb_ra, tb_wa;
  logic [15:0] cmd_nblk = 0;
  logic cmd_ready, cmd_done, mem_req_valid, mem_req_we, tb_re, tb_we;
  tag_t mem_req_wdata, mem_rsp_rdata = 0, tb_rd, tb_wd;

  dg_mtu #(.ADDR_W(ADDR_W), .BLK_W(BLK_W)) dut (.*);

  localparam logic [ADDR_W-1:0] TAG_BR = 35'h7_F000_0000;

  int checks = 0, failures = 0, mem_reqs = 0;
  tag_t devmem [logic [ADDR_W-1:0]];
  tag_t onchip [NB];

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

  // tag buffer port-1 model
  always @(posedge clk) begin
    if (tb_re) tb_rd <= onchip[tb_ra[5:0]];
    if (tb_we) onchip[tb_wa[5:0]] <= tb_wd;
  end

  // device memory model
  initial forever begin
    @(negedge clk);
    if (mem_req_valid) begin
      logic [ADDR_W-1:0] a; logic w; tag_t d;
      repeat ($urandom_range(2)) @(negedge clk);
      mem_req_ready = 1; a = mem_req_addr; w = mem_req_we; d = mem_req_wdata; mem_reqs++;
      @(negedge clk); mem_req_ready = 0;
      chk(a >= TAG_BR, "request inside the tag region");
      if (w) devmem[a] = d;
      else begin
        repeat ($urandom_range(3)) @(negedge clk);
        mem_rsp_rdata = devmem.exists(a) ? devmem[a] : 8'h00;
        mem_rsp_valid = 1; @(negedge clk); mem_rsp_valid = 0;
      end
    end
  end

  task automatic run(input mtu_op_e op, input logic [ADDR_W-1:0] addr, input int blk,
                     input int n, output int cycles);
    @(negedge clk);
    cmd_op = op; cmd_dev_addr = addr; cmd_blk = BLK_W'(blk); cmd_nblk = 16'(n); cmd_valid = 1;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk); cmd_valid = 0;
    cycles = 1;
    while (!cmd_done) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int cyc, r0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); tag_br_wdata = TAG_BR; tag_br_we = 1; @(negedge clk); tag_br_we = 0;
    for (int i = 0; i < NB; i++) onchip[i] = 8'(i + 1);
    // plain load: zero tags, no memory traffic, one block per clock
    r0 = mem_reqs;
    run(MTU_LOAD, 35'h0_0010_0000, 8, 20, cyc);
    chk(mem_reqs == r0, "plain load does not touch memory");
    chk(cyc == 21, $sformatf("plain load time %0d", cyc));
    for (int i = 0; i < NB; i++)
      chk(onchip[i] == ((i >= 8 && i < 28) ? 8'd0 : 8'(i + 1)), $sformatf("plain load block %0d", i));
    // store then tagged load of random ranges
    for (int t = 0; t < 20; t++) begin
      int b, n;
      logic [ADDR_W-1:0] a;
      tag_t snap [NB];
      b = $urandom_range(NB - 1); n = 1 + $urandom_range(NB - 1 - b);
      a = {ADDR_W'($urandom_range(1 << 20)), 9'd0};
      for (int i = 0; i < NB; i++) begin onchip[i] = 8'($urandom); snap[i] = onchip[i]; end
      run(MTU_STORE, a, b, n, cyc);
      for (int i = 0; i < n; i++)
        chk(devmem.exists(TAG_BR + (a >> 9) + i) && devmem[TAG_BR + (a >> 9) + i] == snap[b + i],
            $sformatf("store block %0d", i));
      for (int i = 0; i < NB; i++) onchip[i] = 8'hEE;
      run(MTU_LOAD_TAGGED, a, b, n, cyc);
      for (int i = 0; i < NB; i++)
        chk(onchip[i] == ((i >= b && i < b + n) ? snap[i] : 8'hEE), $sformatf("tagged load block %0d", i));
    end
    // zero-length command completes
    run(MTU_STORE, 0, 0, 0, cyc);
    chk(cyc <= 2, "empty command");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
