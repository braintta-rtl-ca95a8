// tb_banked_sram: self-checking test of the banked data memory at its full
// size (32 banks x 4096 words). Random single-bank and multi-bank writes and
// reads are compared with a shadow array; a bank that is not enabled must
// keep both its contents and its read data.
module tb_banked_sram;
  logic clk = 0;
  logic [31:0] en = '0;
  logic we = 0;
  logic [11:0] row = '0;
  logic [31:0][31:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic [31:0] shadow [32][4096];
  logic [31:0] last [32];
  bit          known [32][4096];

  banked_sram dut (.clk, .en, .we, .row, .wdata, .rdata);

  always #5 clk = ~clk;

  initial begin
    for (int b = 0; b < 32; b++) for (int r = 0; r < 4096; r++) known[b][r] = 0;
    repeat (2) @(posedge clk);
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      en = $urandom; we = (n < 200) ? 1 : $urandom_range(0, 1);
      row = 12'($urandom_range(0, 63));
      for (int b = 0; b < 32; b++) wdata[b] = $urandom;
      @(posedge clk); #1;
      for (int b = 0; b < 32; b++) begin
        if (en[b] && we) begin shadow[b][row] = wdata[b]; known[b][row] = 1; end
        if (en[b] && !we && known[b][row]) begin
          checks++;
          if (rdata[b] !== shadow[b][row]) begin failures++; $display("bank %0d row %0d", b, row); end
        end
        if (!(en[b] && !we) && n > 0 && known[b][row]) begin
          checks++;
          if (rdata[b] !== last[b]) failures++;   // read data held
        end
        last[b] = rdata[b];
      end
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
