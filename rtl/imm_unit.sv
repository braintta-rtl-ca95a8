// imm_unit: long-immediate unit (IMM) of the TTA core.
//
// An instruction may carry a 32-bit constant; when its limm_we bit is set
// the constant is stored here and can be moved onto any bus by later
// instructions, as often as needed. This keeps wide constants out of the
// move slots. The register holds its value until the next immediate load.
//
// Timing: loaded at the end of the carrying instruction, readable from the
// next instruction on. The paper only names the unit; this behaviour is
// this design's choice, modelled on usual TTA long-immediate units.
module imm_unit #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         we,
  input  logic [W-1:0] limm,
  output logic [W-1:0] out
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  out <= '0;
    else if (we) out <= limm;

endmodule
