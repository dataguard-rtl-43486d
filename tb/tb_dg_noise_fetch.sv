// tb_dg_noise_fetch: self-checking test of the noise supply controller at
// its full 6 MB chunk size. A small DMA model answers transfer requests
// after a random delay. Checks that nothing is fetched before the first
// add-noise, the source address and byte count of each chunk, that vector
// indices are handed out in order without reuse, that the partition runs
// dry after exactly CHUNK_VECS vectors and the next chunk is fetched, and
// that a noise-br write restarts at the new base.
module tb_dg_noise_fetch;
  import dg_pkg::*;

  localparam int unsigned CHUNK_VECS = 12288;
  localparam int unsigned ADDR_W = 35;
  localparam int unsigned IDX_W = $clog2(CHUNK_VECS);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic noise_br_we = 0, want = 0, take = 0, xfer_ready = 0, xfer_done = 0;
  logic [ADDR_W-1:0] noise_br_wdata = '0, noise_br, xfer_src;
  logic avail, xfer_valid;
  logic [IDX_W-1:0] rd_idx;
  logic [31:0] xfer_bytes;

  dg_noise_fetch #(.CHUNK_VECS(CHUNK_VECS)) dut (.*);

  int checks = 0, failures = 0, nreq = 0;
  logic [ADDR_W-1:0] last_src;

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

  // DMA model
  initial begin
    forever begin
      @(negedge clk);
      if (xfer_valid) begin
        repeat ($urandom_range(3)) @(negedge clk);
        xfer_ready = 1; last_src = xfer_src; nreq++;
        chk(xfer_bytes == 32'd6291456, "6 MB transfer");
        @(negedge clk); xfer_ready = 0;
        repeat (5 + $urandom_range(20)) @(negedge clk);
        xfer_done = 1; @(negedge clk); xfer_done = 0;
      end
    end
  end

  // consume n vectors, checking order
  task automatic consume(input int n);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      want = 1;
      while (!avail) @(negedge clk);
      chk(rd_idx == IDX_W'(k), $sformatf("index %0d got %0d", k, rd_idx));
      take = 1;
      @(negedge clk);
      take = 0; want = 0;
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); noise_br_wdata = 35'h1_0000_0000; noise_br_we = 1; @(negedge clk); noise_br_we = 0;
    repeat (20) @(negedge clk);
    chk(nreq == 0 && !xfer_valid, "no transfer before first add-noise");
    consume(CHUNK_VECS);
    chk(nreq == 1 && last_src == 35'h1_0000_0000, "first chunk from noise-br");
    @(negedge clk);
    chk(!avail, "partition empty after CHUNK_VECS vectors");
    consume(5);
    chk(nreq == 2 && last_src == 35'h1_0060_0000, "second chunk follows the first");
    @(negedge clk); noise_br_wdata = 35'h2_0000_0000; noise_br_we = 1; @(negedge clk); noise_br_we = 0;
    chk(!avail, "noise-br write empties the partition");
    consume(3);
    chk(nreq == 3 && last_src == 35'h2_0000_0000, "restart at new noise-br");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
