// vmac8: 8-bit vector multiply-accumulate unit (vMAC).
//
// The unit holds 32 reduction trees, one per output channel (v_M = 32).
// Each 32-bit lane of the weight vector in2 holds 4 signed 8-bit weights
// (input channels c = 0..3 at bits 8c+7:8c). In broadcast mode (MAC_BCAST)
// lane 0 of the activation vector in1 (4 int8 activations) is shared by all
// trees, which is the convolution schedule with input reuse; in MAC_VEC mode
// tree i uses lane i of in1 (depth-wise convolution). Each tree adds its
// 4 products to lane i of the accumulator vector t_acc (32 x int32), which is
// also the trigger port, and the sum is written to the result register.
//
// Timing: one operation per cycle; out is valid the cycle after trig.
// The tree organisation, widths and the two modes follow the paper; the
// lane byte order, wrap-around arithmetic and single-cycle latency are this
// design's choices.
module vmac8
  import tta_pkg::*;
#(
  parameter int unsigned NTREE = 32,
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
  localparam int unsigned LW = VEC_W / NTREE;   // 32-bit lanes
  localparam int unsigned NE = LW / 8;       // 4 int8 per lane

  logic [VEC_W-1:0] res;

  always_comb begin
    res = '0;
    for (int i = 0; i < int'(NTREE); i++) begin
      logic [LW-1:0] act, wgt;
      logic signed [LW-1:0] sum;
      act = (opc == MAC_VEC) ? in1[i*LW +: LW] : in1[0 +: LW];
      wgt = in2[i*LW +: LW];
      sum = $signed(t_acc[i*LW +: LW]);
      for (int c = 0; c < int'(NE); c++)
        sum = sum + LW'($signed(act[c*8 +: 8]) * $signed(wgt[c*8 +: 8]));
      res[i*LW +: LW] = sum;
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)    out <= '0;
    else if (trig) out <= res;

endmodule
