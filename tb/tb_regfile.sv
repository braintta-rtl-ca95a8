// tb_regfile: self-checking test of the register file at the three widths
// used in the core (32-bit RF, 1024-bit vRF, 1-bit Boolean RF): random
// writes, and all entries compared with a shadow copy after every cycle.
module tb_regfile;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic         we_s, we_v, we_b;
  logic [2:0]   wa_s, wa_v;
  logic [0:0]   wa_b;
  logic [31:0]  wd_s;
  logic [1023:0] wd_v;
  logic         wd_b;
  logic [7:0][31:0]   q_s, m_s;
  logic [7:0][1023:0] q_v, m_v;
  logic [1:0][0:0]    q_b, m_b;

  regfile #(.W(32),   .REGS(8)) u_s (.clk, .rst_n, .we (we_s), .waddr (wa_s), .wdata (wd_s), .regs (q_s));
  regfile #(.W(1024), .REGS(8)) u_v (.clk, .rst_n, .we (we_v), .waddr (wa_v), .wdata (wd_v), .regs (q_v));
  regfile #(.W(1),    .REGS(2)) u_b (.clk, .rst_n, .we (we_b), .waddr (wa_b), .wdata (wd_b), .regs (q_b));

  always #5 clk = ~clk;

  initial begin
    {we_s, we_v, we_b} = '0;
    wa_s = '0; wa_v = '0; wa_b = '0; wd_s = '0; wd_v = '0; wd_b = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    m_s = '0; m_v = '0; m_b = '0;
    checks++;
    if (q_s !== m_s || q_v !== m_v || q_b !== m_b) failures++;   // reset to zero
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      we_s = $urandom_range(0, 1); wa_s = 3'($urandom); wd_s = $urandom;
      we_v = $urandom_range(0, 1); wa_v = 3'($urandom);
      for (int i = 0; i < 32; i++) wd_v[i*32 +: 32] = $urandom;
      we_b = $urandom_range(0, 1); wa_b = 1'($urandom); wd_b = 1'($urandom);
      if (we_s) m_s[wa_s] = wd_s;
      if (we_v) m_v[wa_v] = wd_v;
      if (we_b) m_b[wa_b] = wd_b;
      @(posedge clk); #1;
      checks++;
      if (q_s !== m_s || q_v !== m_v || q_b !== m_b) begin
        failures++;
        $display("mismatch at step %0d", n);
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
