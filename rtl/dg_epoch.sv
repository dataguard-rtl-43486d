// dg_epoch: budgeting unit, the 8-bit epoch counter.
//
// The epoch counts audit instructions: the host privacy software sets it to
// 1 before the application runs, and each completed audit adds one. Noised
// data is tagged with the epoch it was noised in, and the host converts the
// epoch into privacy cost, so the counter is the hardware's record of how
// many training rounds have been checked.
//
// Interface: pma_we loads pma_wdata (takes priority over an increment in
// the same cycle); audit_done adds one. Output epoch is the register.
// Width 8 and the PMA reset value 1 follow the paper. Saturating at 255
// instead of wrapping to 0, and a hardware reset value of 1, are this
// design's choice.
module dg_epoch
  import dg_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   pma_we,
  input  epoch_t pma_wdata,
  input  logic   audit_done,
  output epoch_t epoch
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      epoch <= epoch_t'(1);
    else if (pma_we)
      epoch <= pma_wdata;
    else if (audit_done && (epoch != '1))
      epoch <= epoch + epoch_t'(1);
  end

endmodule
