// vtmac: ternary vector multiply-accumulate unit (vTMAC).
//
// Weights and activations are trits in {-1, 0, +1}, two bits each
// (00 = 0, 01 = +1, 11 = -1; 10 is read as 0). A product is a gated XNOR:
// zero when either trit is zero, otherwise +1 when the signs agree and -1
// when they differ. Each of the 32 reduction trees sums 16 such products as
// popcount(agree) - popcount(disagree) and adds it to its 16-bit accumulator
// lane (low 512 bits of t_acc, lane i at bits 16i+15:16i). Tree i takes the
// 16 weight trits of lane i of in2 and lane 0 of in1 (MAC_BCAST) or lane i
// of in1 (MAC_VEC). The upper 512 bits of out are always zero: the port is
// a full vector so that the result moves on the same 1024-bit buses.
//
// Timing: one operation per cycle; out is valid the cycle after trig.
// The gated-XNOR/popcount scheme, 32 trees of 16 inputs and the 16-bit
// output follow the paper; the trit encoding is this design's choice.
module vtmac
  import tta_pkg::*;
#(
  parameter int unsigned NTREE = 32,
  parameter int unsigned TRITS = 16,
  parameter int unsigned ACC_W = 16,
  parameter int unsigned VEC_W    = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              trig,
  input  logic [OPC_W-1:0]  opc,
  input  logic [VEC_W-1:0]     in1,
  input  logic [VEC_W-1:0]     in2,
  input  logic [VEC_W-1:0]     t_acc,
  output logic [VEC_W-1:0]     out
);
  localparam int unsigned LW = VEC_W / NTREE;

  logic [VEC_W-1:0] res;

  always_comb begin
    res = '0;
    for (int i = 0; i < int'(NTREE); i++) begin
      logic [2*TRITS-1:0] act, wgt;
      logic [ACC_W-1:0] pos, neg;
      act = (opc == MAC_VEC) ? in1[i*LW +: 2*TRITS] : in1[0 +: 2*TRITS];
      wgt = in2[i*LW +: 2*TRITS];
      pos = '0;
      neg = '0;
      for (int k = 0; k < int'(TRITS); k++) begin
        logic gate, differ, agree_b, differ_b;
        gate     = act[2*k] & wgt[2*k];        // 01 and 11 are non-zero
        differ   = act[2*k+1] ^ wgt[2*k+1];    // sign bits differ
        agree_b  = gate & !differ;
        differ_b = gate & differ;
        pos  = pos + ACC_W'(agree_b);
        neg  = neg + ACC_W'(differ_b);
      end
      res[i*ACC_W +: ACC_W] = t_acc[i*ACC_W +: ACC_W] + pos - neg;
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)    out <= '0;
    else if (trig) out <= res;

endmodule
