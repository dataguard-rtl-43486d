// dg_l2_norm: l2-norm calculation unit of the DataGuard noising module.
//
// Every add-noise operand lane i is squared and accumulated into partial-sum
// register P_i by a per-lane FMA (P_i <= x_i*x_i + P_i, one rounding). An
// audit then adds the LANES partial sums, one per clock through a single
// FP32 adder in lane order, giving P_agg, the squared l2-norm of everything
// noised since the previous audit. The clipping check sqrt(P_agg) <= C_th is
// evaluated exactly as P_agg <= C_th^2, comparing P_agg against the exact
// 48-bit square of C_th's significand, so no square-root or rounding enters
// the decision. If the check fails and CStatus is 0, CStatus is loaded with
// the current epoch (the first failing epoch). The partial sums are then
// cleared. ext_fail (a control-flow instruction on sensitive data, reported
// by the tagging module) sets CStatus under the same rule. Only the host
// privacy software writes C_th and clears CStatus.
//
// Timing: acc_valid updates P on the next edge (the accumulate FMA sits in
// the feedback path, so back-to-back add-noise need no forwarding). After
// audit_start is taken, audit_busy is high for LANES+1 clocks; audit_done
// pulses for one clock with audit_pass and p_agg valid, and the epoch to be
// recorded is the one present during the check (before the budgeting unit
// increments it on audit_done). acc_valid must stay low while audit_busy.
//
// From the paper: 128 lane FMAs and P registers, the C_th and CStatus
// registers, the audit sequence and the CStatus rule. This design's choice:
// sequential summation order and timing, the exact-square comparison, and
// failing the check for a NaN/infinite P_agg or a negative/NaN C_th.
module dg_l2_norm
  import dg_pkg::*;
#(
  parameter int unsigned LANES = 128
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                acc_valid,
  input  logic [LANES*32-1:0] operand,
  input  logic                audit_start,
  output logic                audit_busy,
  output logic                audit_done,
  output logic                audit_pass,
  output fp32_t               p_agg,
  input  epoch_t              epoch,
  input  logic                ext_fail,
  input  logic                cth_we,
  input  fp32_t               cth_wdata,
  input  logic                cstatus_clr,
  output fp32_t               cth,
  output epoch_t              cstatus
);

  localparam int unsigned IDX_W = (LANES > 1) ? $clog2(LANES) : 1;

  typedef enum logic [1:0] {S_IDLE, S_SUM, S_CHECK} state_e;

  fp32_t               p_q [LANES];
  logic [LANES*32-1:0] p_next;
  state_e              state;
  logic [IDX_W-1:0]    idx;
  fp32_t               acc, acc_next;

  // lane FMAs: P_i + x_i * x_i
  for (genvar i = 0; i < LANES; i++) begin : g_lane
    fp32_fma u_fma (
      .a(operand[32*i +: 32]),
      .b(operand[32*i +: 32]),
      .c(p_q[i]),
      .r(p_next[32*i +: 32])
    );
  end

  // audit summation adder
  fp32_fma u_sum (.a(p_q[idx]), .b(FP_ONE), .c(acc), .r(acc_next));

  // exact test of sqrt(p) <= t, i.e. p <= t*t
  function automatic logic sq_le(input fp32_t p, input fp32_t t);
    logic [47:0]        p48, t48, tsq;
    logic signed [11:0] xp, xt;
    if (p[30:23] == 8'hFF) return 1'b0;              // NaN or inf sum
    if (p[30:23] == 8'h00) return 1'b1;              // zero sum
    if (t[31] || (t[30:23] == 8'hFF && t[22:0] != 0)) return 1'b0;
    if (t[30:23] == 8'hFF) return 1'b1;              // infinite threshold
    if (t[30:23] == 8'h00) return 1'b0;              // zero threshold
    p48 = {1'b1, p[22:0], 24'd0};
    xp  = 12'(signed'({4'd0, p[30:23]})) - 12'sd174;
    tsq = {24'd0, 1'b1, t[22:0]} * {24'd0, 1'b1, t[22:0]};
    if (tsq[47]) begin
      t48 = tsq;
      xt  = 12'(signed'({3'd0, t[30:23], 1'b0})) - 12'sd300;
    end else begin
      t48 = tsq << 1;
      xt  = 12'(signed'({3'd0, t[30:23], 1'b0})) - 12'sd301;
    end
    return (xp < xt) || ((xp == xt) && (p48 <= t48));
  endfunction

  logic check_pass;
  assign check_pass = sq_le(acc, cth);
  assign audit_busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      idx        <= '0;
      acc        <= '0;
      audit_done <= 1'b0;
      audit_pass <= 1'b0;
      p_agg      <= '0;
      for (int i = 0; i < LANES; i++) p_q[i] <= '0;
    end else begin
      audit_done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (acc_valid)
            for (int i = 0; i < LANES; i++) p_q[i] <= p_next[32*i +: 32];
          if (audit_start) begin
            state <= S_SUM;
            idx   <= '0;
            acc   <= '0;
          end
        end
        S_SUM: begin
          acc <= acc_next;
          idx <= idx + 1'b1;
          if (idx == IDX_W'(LANES - 1)) state <= S_CHECK;
        end
        S_CHECK: begin
          audit_done <= 1'b1;
          audit_pass <= check_pass;
          p_agg      <= acc;
          for (int i = 0; i < LANES; i++) p_q[i] <= '0;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // C_th and CStatus registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cth     <= '0;
      cstatus <= '0;
    end else begin
      if (cth_we) cth <= cth_wdata;
      if (cstatus_clr)
        cstatus <= '0;
      else if (cstatus == '0 &&
               (ext_fail || (state == S_CHECK && !check_pass)))
        cstatus <= epoch;
    end
  end

  // add-noise and audit are never in flight together
  assert property (@(posedge clk) disable iff (!rst_n) !(acc_valid && audit_busy))
    else $error("add-noise operand accepted during audit");

endmodule
