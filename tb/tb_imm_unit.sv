// tb_imm_unit: self-checking test of the long-immediate unit: a constant is
// taken only when we is set and is then held across cycles without we.
module tb_imm_unit;
  logic clk = 0, rst_n = 0, we = 0;
  logic [31:0] limm = '0, out, model;
  int checks = 0, failures = 0;

  imm_unit dut (.clk, .rst_n, .we, .limm, .out);

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    model = '0;
    for (int n = 0; n < 100; n++) begin
      @(negedge clk);
      we = $urandom_range(0, 2) == 0;
      limm = $urandom;
      if (we) model = limm;
      @(posedge clk); #1;
      checks++;
      if (out !== model) begin failures++; $display("mismatch at %0d", n); end
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
