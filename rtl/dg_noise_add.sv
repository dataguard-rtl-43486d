// dg_noise_add: noise addition unit of the DataGuard noising module.
//
// One FP32 adder per vector lane adds a noise sample to the operand of an
// add-noise instruction: result[i] = operand[i] + noise[i]. The noise vector
// comes from the quarter of the on-chip buffers that holds noise samples
// drawn by the trusted host software; this unit never generates noise
// itself. The adders are the FMA datapath with the multiplier input tied
// to 1.0.
//
// Interface: in_valid qualifies operand and noise; out_valid/result follow
// one clock later (one register stage), one vector per clock. Lane i uses
// bits [32*i +: 32]. Lane count (128) follows the paper; the single
// pipeline stage and the rounding (nearest-even, flush-to-zero) are this
// design's choice.
module dg_noise_add
  import dg_pkg::*;
#(
  parameter int unsigned LANES = 128
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [LANES*32-1:0]   operand,
  input  logic [LANES*32-1:0]   noise,
  output logic                  out_valid,
  output logic [LANES*32-1:0]   result
);

  logic [LANES*32-1:0] sum;

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    fp32_fma u_add (
      .a(operand[32*i +: 32]),
      .b(FP_ONE),
      .c(noise[32*i +: 32]),
      .r(sum[32*i +: 32])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      result    <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) result <= sum;
    end
  end

endmodule
