// tb_dg_tagging_module: self-checking test of the tagging module. A
// behavioural tag store (synchronous read with write bypass) stands in for
// the tag buffer. Random instruction streams of every class and random
// systolic-array writes are checked against the tag rules: add-noise gets
// the epoch of its issue cycle, vadd the larger source tag when both are
// non-zero else 0, other results 0, systolic-array results 0, control
// flow on a zero tag raises cf_fail; audit writes nothing. Back-to-back
// dependent instructions exercise the bypass path.
module tb_dg_tagging_module;
  import dg_pkg::*;

  localparam int unsigned BLK_W = 15;
  localparam int unsigned NB = 16;       // blocks used

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, sa_wr_valid = 0;
  vop_e op = VOP_OTHER;
  logic [BLK_W-1:0] src_a = 0, src_b = 0, dst = 0, sa_wr_blk = 0;
  epoch_t epoch = 1;
  logic sa_wr_ready, tb_re, tb_we, cf_fail;
  logic [BLK_W-1:0] tb_ra_a, tb_ra_b, tb_wa;
  tag_t tb_rd_a, tb_rd_b, tb_wd;

  dg_tagging_module #(.BLK_W(BLK_W)) dut (.*);

  // behavioural tag store
  tag_t store [NB];
  always @(posedge clk) begin
    if (tb_re) begin
      tb_rd_a <= (tb_we && tb_wa == tb_ra_a) ? tb_wd : store[tb_ra_a[3:0]];
      tb_rd_b <= (tb_we && tb_wa == tb_ra_b) ? tb_wd : store[tb_ra_b[3:0]];
    end
    if (tb_we) store[tb_wa[3:0]] <= tb_wd;
  end

  int checks = 0, failures = 0, n_cf = 0, n_noised_vadd = 0, n_sa = 0, n_sa_wait = 0;
  tag_t model [NB];

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pending expectation from the previous instruction
  logic   pend_v = 0, pend_cf = 0;
  logic   pend_w = 0;
  int     pend_dst;
  tag_t   pend_tag;

  initial begin
    for (int i = 0; i < NB; i++) begin store[i] = 0; model[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 4000; k++) begin
      int a, b, d;
      logic sa_take;
      @(negedge clk);
      // new stimulus; the tag write checked below is the one committed at
      // the next clock edge: stage 1 holds last cycle's instruction
      if ($urandom_range(9) == 0) epoch = epoch + 1;
      a = $urandom_range(NB - 1); b = $urandom_range(NB - 1); d = $urandom_range(NB - 1);
      in_valid = ($urandom_range(7) != 0);
      op = vop_e'($urandom_range(4));
      src_a = BLK_W'(a); src_b = BLK_W'(b); dst = BLK_W'(d);
      sa_wr_valid = ($urandom_range(3) == 0);
      sa_wr_blk = BLK_W'($urandom_range(NB - 1));
      #1;
      if (pend_v) begin
        chk(cf_fail == pend_cf, "cf_fail");
        chk(tb_we == (pend_w || sa_wr_valid), "tag write enable");
        if (pend_w) chk(tb_wa == BLK_W'(pend_dst) && tb_wd == pend_tag,
                        $sformatf("result tag %0d exp %0d", tb_wd, pend_tag));
        chk(sa_wr_ready == !pend_w, "sa arbitration");
      end
      if (!pend_w && sa_wr_valid) chk(tb_we && tb_wa == sa_wr_blk && tb_wd == 0, "sa result tag 0");
      // commit the model for this cycle's write
      sa_take = sa_wr_valid && !pend_w;
      if (sa_wr_valid && pend_w) n_sa_wait++;
      if (sa_take) begin model[sa_wr_blk[3:0]] = 0; n_sa++; end
      if (pend_w) model[pend_dst] = pend_tag;
      // expectation for next cycle; sources see this cycle's committed model
      pend_v = 1; pend_w = 0; pend_cf = 0; pend_dst = d; pend_tag = 0;
      if (in_valid) begin
        unique case (op)
          VOP_ADD_NOISE: begin pend_w = 1; pend_tag = epoch; end
          VOP_VADD: begin
            pend_w = 1;
            if (model[a] != 0 && model[b] != 0) begin
              pend_tag = (model[a] > model[b]) ? model[a] : model[b];
              n_noised_vadd++;
            end
          end
          VOP_OTHER: pend_w = 1;
          VOP_BRANCH: begin pend_cf = (model[a] == 0); if (pend_cf) n_cf++; end
          default: ;
        endcase
      end
    end
    chk(n_cf > 0 && n_noised_vadd > 0 && n_sa > 0 && n_sa_wait > 0, "all cases exercised");
    $display("cf=%0d noised_vadd=%0d sa=%0d sa_wait=%0d", n_cf, n_noised_vadd, n_sa, n_sa_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
