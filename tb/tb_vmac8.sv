// tb_vmac8: self-checking test of the 8-bit vector MAC.
// Drives random activations, weights and accumulators in both modes
// (broadcast and per-lane), one trigger per cycle, and compares every lane
// with a reference dot product computed here with integer arithmetic. The
// back-to-back triggers check the one-result-per-cycle rate.
module tb_vmac8;
  import tta_pkg::*;
  logic clk = 0, rst_n = 0, trig = 0;
  logic [OPC_W-1:0] opc = MAC_BCAST;
  logic [VW-1:0] in1, in2, acc, out;
  int checks = 0, failures = 0;

  vmac8 dut (.clk, .rst_n, .trig, .opc, .in1, .in2, .t_acc (acc), .out);

  always #5 clk = ~clk;

  function automatic logic [VW-1:0] rnd_vec();
    logic [VW-1:0] v;
    for (int i = 0; i < VW/32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic logic [VW-1:0] model(input logic [VW-1:0] a, w, c, input bit vec);
    logic [VW-1:0] r;
    for (int i = 0; i < 32; i++) begin
      int s;
      s = int'($signed(c[i*32 +: 32]));
      for (int k = 0; k < 4; k++) begin
        int x, y;
        x = vec ? int'($signed(a[i*32 + k*8 +: 8])) : int'($signed(a[k*8 +: 8]));
        y = int'($signed(w[i*32 + k*8 +: 8]));
        s += x * y;
      end
      r[i*32 +: 32] = s;
    end
    return r;
  endfunction

  logic [VW-1:0] exp_q [$];

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      @(negedge clk);
      in1 = rnd_vec(); in2 = rnd_vec(); acc = rnd_vec();
      if (n == 0) begin in1[31:0] = 32'h8080_7F7F; in2 = {32{32'h807F_807F}}; end
      opc = (n % 3 == 0) ? MAC_VEC : MAC_BCAST;
      trig = 1;
      exp_q.push_back(model(in1, in2, acc, opc == MAC_VEC));
      @(posedge clk); #1;
      checks++;
      if (out !== exp_q.pop_front()) begin
        failures++;
        $display("mismatch at op %0d lane0 got %h", n, out[31:0]);
      end
    end
    begin : hold
      logic [VW-1:0] last;
      last = out;
      @(negedge clk); trig = 0; in1 = rnd_vec(); acc = rnd_vec();
      @(posedge clk); #1;
      checks++;   // result register holds without a trigger
      if (out !== last) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
