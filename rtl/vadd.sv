// vadd: vector adder (vADD), used for residual additions.
//
// Adds the vectors in2 and t lane by lane. VADD_32 treats them as 32 lanes
// of 32 bits (1024-bit vectors, the 8-bit layers' accumulators); VADD_16
// as 32 lanes of 16 bits packed in the low 512 bits (the binary/ternary
// layers' accumulators), with the upper half of the result zero.
// t is the trigger port.
//
// Timing: one operation per cycle; out is valid the cycle after trig.
// The two vector widths follow the paper; wrap-around on overflow is this
// design's choice.
module vadd
  import tta_pkg::*;
#(
  parameter int unsigned NLANE = 32,
  parameter int unsigned VEC_W    = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              trig,
  input  logic [OPC_W-1:0]  opc,
  input  logic [VEC_W-1:0]     in2,
  input  logic [VEC_W-1:0]     t,
  output logic [VEC_W-1:0]     out
);
  localparam int unsigned LW = VEC_W / NLANE;
  localparam int unsigned HW = LW / 2;

  logic [VEC_W-1:0] res;

  always_comb begin
    res = '0;
    for (int i = 0; i < int'(NLANE); i++)
      if (opc == VADD_16) res[i*HW +: HW] = t[i*HW +: HW] + in2[i*HW +: HW];
      else                res[i*LW +: LW] = t[i*LW +: LW] + in2[i*LW +: LW];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)    out <= '0;
    else if (trig) out <= res;

endmodule
