// tb_vadd: self-checking test of the vector adder in both lane widths.
// Reference: integer addition lane by lane, truncated to the lane width.
module tb_vadd;
  import tta_pkg::*;
  logic clk = 0, rst_n = 0, trig = 0;
  logic [OPC_W-1:0] opc = VADD_32;
  logic [VW-1:0] a, b, out;
  int checks = 0, failures = 0;

  vadd dut (.clk, .rst_n, .trig, .opc, .in2 (a), .t (b), .out);

  always #5 clk = ~clk;

  function automatic logic [VW-1:0] rnd_vec();
    logic [VW-1:0] v;
    for (int i = 0; i < VW/32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 30; n++) begin
      logic [VW-1:0] e;
      @(negedge clk);
      a = rnd_vec(); b = rnd_vec();
      opc = n[0] ? VADD_16 : VADD_32;
      trig = 1;
      e = '0;
      for (int i = 0; i < 32; i++)
        if (n[0]) e[i*16 +: 16] = 16'(int'(a[i*16 +: 16]) + int'(b[i*16 +: 16]));
        else      e[i*32 +: 32] = a[i*32 +: 32] + b[i*32 +: 32];
      @(posedge clk); #1;
      checks++;
      if (out !== e) begin failures++; $display("mismatch op %0d", n); end
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
