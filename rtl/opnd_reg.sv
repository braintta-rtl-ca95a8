// opnd_reg: operand port register of a TTA function unit.
//
// A move into a non-trigger port stores the value here; the FU reads it
// whenever it is triggered later. A value moved in the same cycle as the
// trigger is passed straight through (q shows it at once), so operand and
// trigger may share one instruction.
module opnd_reg #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         we,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  logic [W-1:0] r;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  r <= '0;
    else if (we) r <= d;

  assign q = we ? d : r;

endmodule
