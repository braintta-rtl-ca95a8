// regfile: register file of the TTA core (RF, vRF and Boolean RF).
//
// REGS entries of W bits, reset to zero, one write port. All entries are
// visible on regs; the interconnect selects the entry a move reads, so the
// read index is part of the move's source identifier. Used with W = 32 for
// the three scalar RFs, W = 1024 for the two vector RFs (which buffer
// weights for reuse) and W = 1 for the Boolean RF.
//
// Timing: a write at a clock edge is visible from the next cycle.
// The RF kinds and widths are the paper's; the entry counts are this
// design's choice.
module regfile #(
  parameter int unsigned W    = 32,
  parameter int unsigned REGS = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       we,
  input  logic [$clog2(REGS)-1:0]    waddr,
  input  logic [W-1:0]               wdata,
  output logic [REGS-1:0][W-1:0]     regs
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  regs <= '0;
    else if (we) regs[waddr] <= wdata;

endmodule
