// tb_dg_noise_add: self-checking test of the noise addition unit. Streams
// random operand and noise vectors one per clock and checks every lane of
// every result against a double-precision reference rounded to FP32, and
// that each result appears exactly one clock after its inputs.
module tb_dg_noise_add;
  import dg_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned LANES = 128;
  localparam int unsigned NVEC  = 200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, out_valid;
  logic [LANES*32-1:0] operand = '0, noise = '0, result;

  dg_noise_add #(.LANES(LANES)) dut (.*);

  int checks = 0, failures = 0;
  logic [LANES*32-1:0] expq [$];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker: result must be present exactly one clock after the inputs
  int sent = 0, got = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      logic [LANES*32-1:0] e;
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("FAIL unexpected result");
      end else begin
        e = expq.pop_front();
        if (result !== e) begin
          failures++;
          if (failures < 5) $display("FAIL vector %0d lane0 %h exp %h", got, result[31:0], e[31:0]);
        end
      end
      got++;
    end
  end

  initial begin
    logic [LANES*32-1:0] e;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < NVEC; k++) begin
      @(negedge clk);
      // every 7th cycle idle to check valid timing
      in_valid = (k % 7 != 3);
      for (int i = 0; i < LANES; i++) begin
        operand[32*i +: 32] = frand(110, 130);
        noise[32*i +: 32]   = frand(105, 128);
        e[32*i +: 32] = fadd(operand[32*i +: 32], noise[32*i +: 32]);
      end
      if (in_valid) begin expq.push_back(e); sent++; end
      @(posedge clk); #1;
      checks++;
      if (out_valid !== in_valid) begin failures++; $display("FAIL latency at vector %0d", k); end
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (got != sent) begin failures++; $display("FAIL sent %0d got %0d", sent, got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
