// vops: auxiliary vector operations unit (vOPS).
//
// Operates on the trigger vector t, with a second vector or scalar element
// in1 and a scalar parameter in2:
//   VOP_RELU32 / VOP_RELU16  max(0, x) on 32 x 32-bit / 32 x 16-bit lanes
//   VOP_MAX32  / VOP_MAX16   lane-wise max(t, in1) (a MaxPool step)
//   VOP_REQ8   requantize 32-bit lanes to int8: saturate(x >>> in2), the
//              32 bytes packed in the low 256 bits (lane i at byte i)
//   VOP_REQT   requantize 16-bit lanes to trits: +1 if x > in2, -1 if
//              x < -in2, else 0; 32 trits packed in the low 64 bits
//   VOP_REQB   requantize 16-bit lanes to bits: 1 (+1) if x >= in2, else 0
//              (-1); 32 bits packed in the low 32 bits
//   VOP_EXTRACT  out lane 0 = 32-bit lane in2[4:0] of t, other lanes zero
//   VOP_INSERT   out = t with 32-bit lane in2[4:0] replaced by in1[31:0]
// The packed requantized outputs are exactly the activation word that the
// next layer's vMAC/vTMAC/vBMAC broadcasts, so a layer's outputs feed the
// next layer without repacking.
//
// Timing: one operation per cycle; out is valid the cycle after trig.
// The operation classes (requantization to 8/2/1 bit, ReLU, MaxPool,
// element insert/extract) are the paper's; formulas and packing are this
// design's own.
module vops
  import tta_pkg::*;
#(
  parameter int unsigned NLANE = 32,
  parameter int unsigned VEC_W    = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              trig,
  input  logic [OPC_W-1:0]  opc,
  input  logic [VEC_W-1:0]     in1,
  input  logic [SW-1:0]     in2,
  input  logic [VEC_W-1:0]     t,
  output logic [VEC_W-1:0]     out
);
  localparam int unsigned LW = VEC_W / NLANE;   // 32
  localparam int unsigned HW = LW / 2;       // 16

  logic [VEC_W-1:0] res;
  logic [4:0]    idx;
  assign idx = in2[4:0];

  always_comb begin
    logic signed [LW-1:0] s;
    logic signed [HW:0]   x, th;
    res = '0;
    s   = '0;
    x   = '0;
    th  = '0;
    unique case (opc)
      VOP_RELU32: for (int i = 0; i < int'(NLANE); i++)
                    res[i*LW +: LW] = t[i*LW+LW-1] ? '0 : t[i*LW +: LW];
      VOP_RELU16: for (int i = 0; i < int'(NLANE); i++)
                    res[i*HW +: HW] = t[i*HW+HW-1] ? '0 : t[i*HW +: HW];
      VOP_MAX32:  for (int i = 0; i < int'(NLANE); i++)
                    res[i*LW +: LW] = ($signed(t[i*LW +: LW]) > $signed(in1[i*LW +: LW]))
                                      ? t[i*LW +: LW] : in1[i*LW +: LW];
      VOP_MAX16:  for (int i = 0; i < int'(NLANE); i++)
                    res[i*HW +: HW] = ($signed(t[i*HW +: HW]) > $signed(in1[i*HW +: HW]))
                                      ? t[i*HW +: HW] : in1[i*HW +: HW];
      VOP_REQ8:   for (int i = 0; i < int'(NLANE); i++) begin
                    s = $signed(t[i*LW +: LW]) >>> in2[4:0];
                    if (s > 127)       res[i*8 +: 8] = 8'sd127;
                    else if (s < -128) res[i*8 +: 8] = -8'sd128;
                    else               res[i*8 +: 8] = s[7:0];
                  end
      VOP_REQT:   for (int i = 0; i < int'(NLANE); i++) begin
                    x  = (HW+1)'($signed(t[i*HW +: HW]));
                    th = (HW+1)'($signed(in2[HW-1:0]));
                    if (x > th)       res[2*i +: 2] = TRIT_POS;
                    else if (x < -th) res[2*i +: 2] = TRIT_NEG;
                    else              res[2*i +: 2] = TRIT_ZERO;
                  end
      VOP_REQB:   for (int i = 0; i < int'(NLANE); i++)
                    res[i] = $signed(t[i*HW +: HW]) >= $signed(in2[HW-1:0]);
      VOP_EXTRACT: res[0 +: LW] = t[idx*LW +: LW];
      VOP_INSERT: begin
                    res = t;
                    res[idx*LW +: LW] = in1[LW-1:0];
                  end
      default:    res = t;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)    out <= '0;
    else if (trig) out <= res;

endmodule
