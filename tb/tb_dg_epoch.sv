// tb_dg_epoch: self-checking test of the budgeting unit (epoch counter):
// reset value, PMA load, one increment per audit, PMA write priority and
// saturation at 255.
module tb_dg_epoch;
  import dg_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pma_we = 0, audit_done = 0;
  epoch_t pma_wdata = '0, epoch;
  int checks = 0, failures = 0;

  dg_epoch dut (.*);

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (epoch=%0d)", what, epoch); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int model;
    repeat (2) @(negedge clk);
    rst_n = 1;
    chk(epoch == 8'd1, "reset value 1");
    @(negedge clk); pma_we = 1; pma_wdata = 8'd1; @(negedge clk); pma_we = 0;
    model = 1;
    for (int i = 0; i < 500; i++) begin
      audit_done = ($urandom_range(2) != 0);
      @(negedge clk);
      if (audit_done && model < 255) model++;
      chk(epoch == 8'(model), $sformatf("count step %0d model %0d", i, model));
    end
    audit_done = 0;
    chk(epoch == 8'd255, "saturated at 255");
    @(negedge clk); pma_we = 1; pma_wdata = 8'd1; audit_done = 1; @(negedge clk);
    pma_we = 0; audit_done = 0;
    chk(epoch == 8'd1, "PMA write wins over increment");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
