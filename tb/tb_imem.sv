// tb_imem: self-checking test of the instruction memory: instructions are
// written one 32-bit slice at a time (as the host does) into all four
// banks and read back whole.
module tb_imem;
  logic clk = 0, en = 0, we = 0;
  logic [11:0] addr = '0;
  logic [7:0] wmask = '0;
  logic [255:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic [255:0] shadow [64];
  logic [11:0]  where  [64];

  imem dut (.clk, .en, .we, .addr, .wmask, .wdata, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    for (int i = 0; i < 64; i++) begin
      where[i] = 12'((i % 4) * 1024 + i * 7);   // spread over the banks
      for (int s = 0; s < 8; s++) begin
        logic [31:0] w;
        w = $urandom;
        shadow[i][s*32 +: 32] = w;
        @(negedge clk);
        en = 1; we = 1; addr = where[i]; wmask = 8'(1 << s); wdata = {8{w}};
      end
    end
    @(negedge clk); en = 0; we = 0;
    for (int k = 0; k < 128; k++) begin
      int i;
      i = $urandom_range(0, 63);
      @(negedge clk); en = 1; we = 0; addr = where[i];
      @(negedge clk); en = 0;
      checks++;
      if (rdata !== shadow[i]) begin failures++; $display("instr %0d at %0d", i, where[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
