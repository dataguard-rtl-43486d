// tb_dg_tag_buffer: self-checking test of the tag buffer at full depth.
// Random writes and reads on both ports against an array model, with the
// one-clock read latency, the port-0 write-to-read bypass and port-0
// priority on a same-block double write.
module tb_dg_tag_buffer;
  import dg_pkg::*;

  localparam int unsigned DEPTH = 32768;
  localparam int unsigned AW = 15;

  logic clk = 0;
  always #5 clk = ~clk;

  logic re0 = 0, we0 = 0, re1 = 0, we1 = 0;
  logic [AW-1:0] ra0a = 0, ra0b = 0, wa0 = 0, ra1 = 0, wa1 = 0;
  tag_t rd0a, rd0b, rd1, wd0 = 0, wd1 = 0;

  dg_tag_buffer #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, bypasses = 0;
  tag_t model [DEPTH];

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

  initial begin
    tag_t e0a, e0b, e1;
    // fill a window of blocks through port 1, then read back through port 0
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); we1 = 1; wa1 = AW'(i * 509); wd1 = 8'(i + 3); model[i * 509] = 8'(i + 3);
    end
    @(negedge clk); we1 = 0;
    for (int i = 0; i < 63; i++) begin
      @(negedge clk); re0 = 1; ra0a = AW'(i * 509); ra0b = AW'((i + 1) * 509);
      @(negedge clk); re0 = 0;
      chk(rd0a == 8'(i + 3) && rd0b == 8'(i + 4), "port-0 read of port-1 writes");
    end
    // random mixed traffic on a small address window
    for (int i = 0; i < 256; i++) model[DEPTH - 256 + i] = 0;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); we0 = 1; wa0 = AW'(DEPTH - 256 + i); wd0 = 0;
    end
    @(negedge clk); we0 = 0;
    for (int k = 0; k < 5000; k++) begin
      @(negedge clk);
      re0 = $urandom_range(1); re1 = $urandom_range(1);
      we0 = $urandom_range(1); we1 = $urandom_range(1);
      ra0a = AW'(DEPTH - 256 + $urandom_range(15)); ra0b = AW'(DEPTH - 256 + $urandom_range(15));
      ra1 = AW'(DEPTH - 256 + $urandom_range(15));
      wa0 = AW'(DEPTH - 256 + $urandom_range(15)); wa1 = AW'(DEPTH - 256 + $urandom_range(15));
      wd0 = 8'($urandom); wd1 = 8'($urandom);
      // expected read values: port-0 reads see a same-cycle port-0 write
      e0a = (we0 && wa0 == ra0a) ? wd0 : model[ra0a];
      e0b = (we0 && wa0 == ra0b) ? wd0 : model[ra0b];
      e1  = model[ra1];
      if (re0 && we0 && (wa0 == ra0a || wa0 == ra0b)) bypasses++;
      if (we1) model[wa1] = wd1;
      if (we0) model[wa0] = wd0;       // port 0 wins a collision
      @(posedge clk); #1;
      if (re0) begin
        chk(rd0a == e0a, "port-0 read a");
        chk(rd0b == e0b, "port-0 read b");
      end
      if (re1) chk(rd1 == e1, "port-1 read");
    end
    @(negedge clk); re0 = 0; re1 = 0; we0 = 0; we1 = 0;
    // final sweep of the window through port 1
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); re1 = 1; ra1 = AW'(DEPTH - 256 + i);
      @(negedge clk); re1 = 0;
      chk(rd1 == model[DEPTH - 256 + i], "final contents");
    end
    chk(bypasses > 0, "bypass exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
