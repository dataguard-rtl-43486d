// dg_noising_module: the DataGuard noising module in the vector processor.
//
// Executes the two instructions that every shared result must pass
// through. add-noise adds one fresh noise vector to the operand (noise
// addition unit) and, in the same step, accumulates the squares of the
// operand lanes into the per-lane partial sums (l2-norm unit). audit sums
// the partial sums, checks the clipping condition against C_th, records the
// first failing epoch in CStatus, clears the partial sums and advances the
// epoch (budgeting unit). The noise supply controller keeps the noise
// quarter of the on-chip buffers filled from the protected noise region.
//
// Timing: an instruction is taken on op_valid && op_ready. For add-noise
// the noise index (noise_rd_idx) is valid in the issue cycle and the
// on-chip buffer returns noise_rd_data one clock later; the noised vector
// appears on res_valid/res_data two clocks after issue, one per clock. The
// audit occupies the module for LANES+1 clocks after issue; audit_done
// pulses at the end with audit_pass. op_ready is low during an audit and,
// for add-noise, while the noise partition is being refilled.
//
// Structure and register set follow the paper (its Fig. 4: noise addition
// unit, epoch, l2-norm unit with P_i, C_th, CStatus). Issue rules and
// pipeline depths are this design's choice.
module dg_noising_module
  import dg_pkg::*;
#(
  parameter int unsigned LANES      = 128,
  parameter int unsigned CHUNK_VECS = 12288,
  parameter int unsigned ADDR_W     = 35,
  localparam int unsigned IDX_W     = (CHUNK_VECS > 1) ? $clog2(CHUNK_VECS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // instruction from the VPU decoder
  input  logic                op_valid,
  output logic                op_ready,
  input  logic                op_is_audit,
  input  logic [LANES*32-1:0] operand,
  // noise partition of the on-chip buffers
  output logic [IDX_W-1:0]    noise_rd_idx,
  output logic                noise_rd_en,
  input  logic [LANES*32-1:0] noise_rd_data,
  // noised result to the scratchpad write port
  output logic                res_valid,
  output logic [LANES*32-1:0] res_data,
  // audit outcome
  output logic                audit_done,
  output logic                audit_pass,
  output fp32_t               p_agg,
  // failure reported by the tagging module
  input  logic                ext_fail,
  // PMA registers
  input  logic                cth_we,
  input  fp32_t               cth_wdata,
  input  logic                epoch_we,
  input  epoch_t              epoch_wdata,
  input  logic                cstatus_clr,
  input  logic                noise_br_we,
  input  logic [ADDR_W-1:0]   noise_br_wdata,
  output fp32_t               cth,
  output epoch_t              epoch,
  output epoch_t              cstatus,
  output logic [ADDR_W-1:0]   noise_br,
  // batched noise transfer request to the DMA
  output logic                xfer_valid,
  input  logic                xfer_ready,
  output logic [ADDR_W-1:0]   xfer_src,
  output logic [31:0]         xfer_bytes,
  input  logic                xfer_done
);

  logic                audit_busy, avail, take, audit_start;
  logic                an_q;        // add-noise in the noise-read stage
  logic [LANES*32-1:0] op_q;

  always_comb begin
    if (op_is_audit) op_ready = !audit_busy;
    else             op_ready = !audit_busy && avail;
  end

  assign take        = op_valid && op_ready && !op_is_audit;
  assign audit_start = op_valid && op_ready && op_is_audit;
  assign noise_rd_en = take;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      an_q <= 1'b0;
      op_q <= '0;
    end else begin
      an_q <= take;
      if (take) op_q <= operand;
    end
  end

  dg_noise_fetch #(.CHUNK_VECS(CHUNK_VECS), .ADDR_W(ADDR_W)) u_fetch (
    .clk, .rst_n,
    .noise_br_we, .noise_br_wdata, .noise_br,
    .want(op_valid && !op_is_audit), .take, .avail, .rd_idx(noise_rd_idx),
    .xfer_valid, .xfer_ready, .xfer_src, .xfer_bytes, .xfer_done
  );

  dg_noise_add #(.LANES(LANES)) u_add (
    .clk, .rst_n,
    .in_valid(an_q), .operand(op_q), .noise(noise_rd_data),
    .out_valid(res_valid), .result(res_data)
  );

  dg_l2_norm #(.LANES(LANES)) u_l2 (
    .clk, .rst_n,
    .acc_valid(an_q), .operand(op_q),
    .audit_start, .audit_busy, .audit_done, .audit_pass, .p_agg,
    .epoch, .ext_fail,
    .cth_we, .cth_wdata, .cstatus_clr, .cth, .cstatus
  );

  dg_epoch u_epoch (
    .clk, .rst_n,
    .pma_we(epoch_we), .pma_wdata(epoch_wdata),
    .audit_done, .epoch
  );

endmodule
