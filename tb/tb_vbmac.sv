// tb_vbmac: self-checking test of the binary vector MAC.
// Random +1/-1 vectors (bit 1 = +1) in both modes; the reference sums the
// signed products bit by bit, without XNOR or popcount, and adds them to
// the 16-bit accumulators. One trigger per cycle.
module tb_vbmac;
  import tta_pkg::*;
  logic clk = 0, rst_n = 0, trig = 0;
  logic [OPC_W-1:0] opc = MAC_BCAST;
  logic [VW-1:0] in1, in2, acc, out;
  int checks = 0, failures = 0;

  vbmac dut (.clk, .rst_n, .trig, .opc, .in1, .in2, .t_acc (acc), .out);

  always #5 clk = ~clk;

  function automatic logic [VW-1:0] rnd_vec();
    logic [VW-1:0] v;
    for (int i = 0; i < VW/32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic logic [VW-1:0] model(input logic [VW-1:0] a, w, c, input bit vec);
    logic [VW-1:0] r = '0;
    for (int i = 0; i < 32; i++) begin
      int s;
      s = int'($signed(c[i*16 +: 16]));
      for (int k = 0; k < 32; k++) begin
        int x, y;
        x = (vec ? a[i*32 + k] : a[k]) ? 1 : -1;
        y = w[i*32 + k] ? 1 : -1;
        s += x * y;
      end
      r[i*16 +: 16] = 16'(s);
    end
    return r;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      logic [VW-1:0] e;
      @(negedge clk);
      in1 = rnd_vec(); in2 = rnd_vec(); acc = rnd_vec();
      if (n == 0) begin in1 = '1; in2 = '1; end       // all agree: +32
      if (n == 1) begin in1 = '0; in2 = '1; end       // all differ: -32
      opc = (n % 2 == 0) ? MAC_BCAST : MAC_VEC;
      trig = 1;
      e = model(in1, in2, acc, opc == MAC_VEC);
      @(posedge clk); #1;
      checks++;
      if (out !== e) begin
        failures++;
        $display("mismatch at op %0d: got %h exp %h", n, out[15:0], e[15:0]);
      end
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
