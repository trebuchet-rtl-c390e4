// busy_board: the frontend's light-weight scoreboard.
//
// One bit per vector register, set while any in-flight instruction (queued
// or executing) uses that register as a source or a destination. The
// frontend compares a decoded instruction's register mask with `busy` and
// stalls the whole frontend on any overlap; there is no renaming. set_mask
// marks the registers of the instruction dispatched this cycle; each of the
// three backend pipelines returns the mask of an instruction it finished on
// its clr port. Set and clear in the same cycle: clear applies to the old
// board, set wins (an instruction can only be dispatched on free registers,
// so the two never overlap in a correct frontend).
// Timing: busy reflects a set or clear one cycle after it is presented.
module busy_board #(
  parameter int unsigned NUM_VREG = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [NUM_VREG-1:0] set_mask,
  input  logic [NUM_VREG-1:0] clr_ls,
  input  logic [NUM_VREG-1:0] clr_alu,
  input  logic [NUM_VREG-1:0] clr_sh,
  output logic [NUM_VREG-1:0] busy
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) busy <= '0;
    else        busy <= (busy & ~(clr_ls | clr_alu | clr_sh)) | set_mask;
  end

  // A pipeline may release only registers that are marked busy.
  a_clr_busy: assert property (@(posedge clk) disable iff (!rst_n)
    ((clr_ls | clr_alu | clr_sh) & ~busy) == '0);
endmodule
