// alu: scalar arithmetic-logic unit, used mainly for address arithmetic.
//
// Two operand ports as in a TTA: in2 is a plain operand register that keeps
// its value until overwritten, in1t is the trigger operand. Writing in1t
// with opcode op computes out = in1t op in2 (add, sub, and, or, xor, shl,
// shr, shra, mul, eq, gt, gtu, min, max, pass). in2 written in the same
// cycle as the trigger is used by that operation (operand bypass).
//
// Timing: out is valid the cycle after the trigger. Three instances sit in
// the core, as in the paper's core diagram; the operation set is this
// design's choice.
module alu
  import tta_pkg::*;
#(
  parameter int unsigned W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in2_we,
  input  logic [W-1:0]      in2,
  input  logic              trig,
  input  logic [OPC_W-1:0]  opc,
  input  logic [W-1:0]      in1t,
  output logic [W-1:0]      out
);
  logic [W-1:0] b_q, b, res;

  assign b = in2_we ? in2 : b_q;

  always_comb begin
    unique case (opc)
      ALU_ADD:  res = in1t + b;
      ALU_SUB:  res = in1t - b;
      ALU_AND:  res = in1t & b;
      ALU_OR:   res = in1t | b;
      ALU_XOR:  res = in1t ^ b;
      ALU_SHL:  res = in1t << b[4:0];
      ALU_SHR:  res = in1t >> b[4:0];
      ALU_SHRA: res = $signed(in1t) >>> b[4:0];
      ALU_MUL:  res = in1t * b;
      ALU_EQ:   res = W'(in1t == b);
      ALU_GT:   res = W'($signed(in1t) > $signed(b));
      ALU_GTU:  res = W'(in1t > b);
      ALU_MIN:  res = ($signed(in1t) < $signed(b)) ? in1t : b;
      ALU_MAX:  res = ($signed(in1t) > $signed(b)) ? in1t : b;
      default:  res = in1t;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      b_q <= '0;
      out <= '0;
    end else begin
      if (in2_we) b_q <= in2;
      if (trig)   out <= res;
    end

endmodule
