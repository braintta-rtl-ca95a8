// tb_vops: self-checking test of the auxiliary vector unit.
// Every operation is run on random and edge-case vectors; the reference
// values are computed here lane by lane with integer arithmetic
// (saturation, thresholds, max, ReLU, insert and extract).
module tb_vops;
  import tta_pkg::*;
  logic clk = 0, rst_n = 0, trig = 0;
  logic [OPC_W-1:0] opc;
  logic [VW-1:0] in1, t, out;
  logic [SW-1:0] in2;
  int checks = 0, failures = 0;

  vops dut (.clk, .rst_n, .trig, .opc, .in1, .in2, .t, .out);

  always #5 clk = ~clk;

  function automatic logic [VW-1:0] rnd_vec();
    logic [VW-1:0] v;
    for (int i = 0; i < VW/32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic logic [VW-1:0] model(input logic [3:0] op, input logic [VW-1:0] a, v, input logic [31:0] p);
    logic [VW-1:0] r = '0;
    for (int i = 0; i < 32; i++) begin
      int x32, y32, x16, y16, th;
      x32 = int'($signed(v[i*32 +: 32]));  y32 = int'($signed(a[i*32 +: 32]));
      x16 = int'($signed(v[i*16 +: 16]));  y16 = int'($signed(a[i*16 +: 16]));
      th  = int'($signed(p[15:0]));
      case (op)
        VOP_RELU32: r[i*32 +: 32] = (x32 < 0) ? 0 : x32;
        VOP_RELU16: r[i*16 +: 16] = 16'((x16 < 0) ? 0 : x16);
        VOP_MAX32:  r[i*32 +: 32] = (x32 > y32) ? x32 : y32;
        VOP_MAX16:  r[i*16 +: 16] = 16'((x16 > y16) ? x16 : y16);
        VOP_REQ8: begin
          int q;
          q = x32 >>> p[4:0];
          r[i*8 +: 8] = 8'((q > 127) ? 127 : (q < -128) ? -128 : q);
        end
        VOP_REQT: r[2*i +: 2] = (x16 > th) ? 2'b01 : (x16 < -th) ? 2'b11 : 2'b00;
        VOP_REQB: r[i] = (x16 >= th);
        default: ;
      endcase
    end
    if (op == VOP_EXTRACT) r[31:0] = v[p[4:0]*32 +: 32];
    if (op == VOP_INSERT) begin r = v; r[p[4:0]*32 +: 32] = a[31:0]; end
    return r;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 90; n++) begin
      logic [VW-1:0] e;
      @(negedge clk);
      opc = 4'(n % 9);
      in1 = rnd_vec(); t = rnd_vec();
      in2 = (opc == VOP_REQ8) ? 32'($urandom_range(0, 31)) :
            (opc == VOP_REQT || opc == VOP_REQB) ? 32'($urandom_range(0, 20000)) : $urandom;
      if (n >= 45) begin   // small values so that thresholds and saturation bite both ways
        for (int i = 0; i < 32; i++) begin
          t[i*32 +: 32] = 32'($urandom_range(0, 600) - 300);
          if (opc == VOP_REQT || opc == VOP_REQB || opc == VOP_RELU16 || opc == VOP_MAX16)
            t[i*16 +: 16] = 16'($urandom_range(0, 600) - 300);
        end
        if (opc == VOP_REQ8) in2 = 32'($urandom_range(0, 2));
        if (opc == VOP_REQT || opc == VOP_REQB) in2 = 32'($urandom_range(0, 150));
      end
      trig = 1;
      e = model(opc, in1, t, in2);
      @(posedge clk); #1;
      checks++;
      if (out !== e) begin failures++; $display("mismatch op %0d opc %0d", n, opc); end
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
