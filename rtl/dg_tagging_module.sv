// dg_tagging_module: DataGuard tagging module in the vector processor.
//
// Sets the tag of every result written to the on-chip buffers. A tag of 0
// means sensitive; a non-zero tag is the epoch in which the data was
// noised. Rules per instruction class:
//   add-noise : result tag = current epoch (the only way to create a
//               non-zero tag)
//   vadd      : if both source tags are non-zero, the larger of the two;
//               otherwise 0 (aggregating noised data stays noised)
//   other VPU : 0
//   systolic-array results : 0
//   control flow : no result; if the operand's tag is 0 the instruction
//               depends on sensitive data and cf_fail is raised, which
//               sets CStatus in the noising module
//   audit     : no result, no tag
//
// Timing: two stages. In the issue cycle the source tags are read from the
// tag buffer (port 0); the next cycle the result tag is computed and
// written. A systolic-array result tag write (sa_wr_valid) is done in any
// cycle in which no VPU result tag is written; sa_wr_ready tells the
// systolic-array side when its write is taken. in_valid may be high every
// cycle. The epoch used is the one present at issue.
//
// From the paper: the rules above. This design's choice: the pipeline, the
// systolic-array write arbitration and checking only operand A of a
// control-flow instruction.
module dg_tagging_module
  import dg_pkg::*;
#(
  parameter int unsigned BLK_W = 15
) (
  input  logic             clk,
  input  logic             rst_n,
  // VPU instruction (from the decoder)
  input  logic             in_valid,
  input  vop_e             op,
  input  logic [BLK_W-1:0] src_a,
  input  logic [BLK_W-1:0] src_b,
  input  logic [BLK_W-1:0] dst,
  input  epoch_t           epoch,
  // systolic-array result writes
  input  logic             sa_wr_valid,
  input  logic [BLK_W-1:0] sa_wr_blk,
  output logic             sa_wr_ready,
  // tag buffer port 0
  output logic             tb_re,
  output logic [BLK_W-1:0] tb_ra_a,
  output logic [BLK_W-1:0] tb_ra_b,
  input  tag_t             tb_rd_a,
  input  tag_t             tb_rd_b,
  output logic             tb_we,
  output logic [BLK_W-1:0] tb_wa,
  output tag_t             tb_wd,
  // control flow on sensitive data
  output logic             cf_fail
);

  logic             v1;
  vop_e             op1;
  logic [BLK_W-1:0] dst1;
  epoch_t           epoch1;
  logic             vpu_we;
  tag_t             vpu_tag;

  assign tb_re   = in_valid;
  assign tb_ra_a = src_a;
  assign tb_ra_b = src_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1     <= 1'b0;
      op1    <= VOP_OTHER;
      dst1   <= '0;
      epoch1 <= '0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        op1    <= op;
        dst1   <= dst;
        epoch1 <= epoch;
      end
    end
  end

  always_comb begin
    vpu_we  = 1'b0;
    vpu_tag = '0;
    cf_fail = 1'b0;
    if (v1) begin
      unique case (op1)
        VOP_ADD_NOISE: begin
          vpu_we  = 1'b1;
          vpu_tag = epoch1;
        end
        VOP_VADD: begin
          vpu_we = 1'b1;
          if (tb_rd_a != '0 && tb_rd_b != '0)
            vpu_tag = (tb_rd_a > tb_rd_b) ? tb_rd_a : tb_rd_b;
        end
        VOP_OTHER: vpu_we = 1'b1;
        VOP_BRANCH: cf_fail = (tb_rd_a == '0);
        default: ;   // audit: no result
      endcase
    end
  end

  assign sa_wr_ready = !vpu_we;
  assign tb_we       = vpu_we || sa_wr_valid;
  assign tb_wa       = vpu_we ? dst1 : sa_wr_blk;
  assign tb_wd       = vpu_we ? vpu_tag : '0;

endmodule
