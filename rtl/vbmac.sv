// vbmac: binary vector multiply-accumulate unit (vBMAC).
//
// Weights and activations are +1/-1, stored as one bit each (1 = +1,
// 0 = -1). A product is the XNOR of two bits, and the sum of BITS products is
// 2*popcount(XNOR) - BITS. The unit has 32 reduction trees; tree i takes the
// 32 weight bits of lane i of in2 and either lane 0 of in1 (MAC_BCAST,
// convolution with input broadcast) or lane i of in1 (MAC_VEC, depth-wise).
// The result is added to the 16-bit accumulator lane i of t_acc (packed in
// the low 512 bits, lane i at bits 16i+15:16i) and registered. The upper
// 512 bits of out are always zero; the port is a full vector so that the
// result moves on the same 1024-bit buses.
//
// Timing: one operation per cycle; out is valid the cycle after trig.
// XNOR/popcount, 32 trees of 32 inputs and the 16-bit output follow the
// paper; the bit encoding and packing are this design's choices.
module vbmac
  import tta_pkg::*;
#(
  parameter int unsigned NTREE = 32,
  parameter int unsigned BITS  = 32,
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
      logic [BITS-1:0] act, xn;
      logic [ACC_W-1:0] pop, acc;
      act = (opc == MAC_VEC) ? in1[i*LW +: BITS] : in1[0 +: BITS];
      xn  = ~(act ^ in2[i*LW +: BITS]);
      pop = '0;
      for (int b = 0; b < int'(BITS); b++) pop = pop + ACC_W'(xn[b]);
      acc = t_acc[i*ACC_W +: ACC_W] + (pop << 1) - ACC_W'(BITS);
      res[i*ACC_W +: ACC_W] = acc;
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)    out <= '0;
    else if (trig) out <= res;

endmodule
