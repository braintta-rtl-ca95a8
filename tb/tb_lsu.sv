// tb_lsu: self-checking test of the load-store unit attached to a banked
// SRAM. Random aligned stores and loads of 1 to 32 words are compared with
// a word-addressed shadow memory; for each access the number of enabled
// banks must equal the access size, and load data must appear exactly two
// cycles after the trigger.
module tb_lsu;
  import tta_pkg::*;
  localparam int ROWS = 64;
  logic clk = 0, rst_n = 0, trig = 0;
  logic [OPC_W-1:0] opc = '0;
  logic [31:0] addr = '0;
  logic [VW-1:0] wdata = '0, out;
  logic [31:0] mem_en;
  logic mem_we;
  logic [5:0] mem_row;
  logic [31:0][31:0] mem_wdata, mem_rdata;
  int checks = 0, failures = 0;
  logic [31:0] shadow [ROWS*32];

  lsu #(.NBANK(32), .ROWS(ROWS)) dut (.clk, .rst_n, .trig, .opc, .addr, .wdata, .out,
    .mem_en, .mem_we, .mem_row, .mem_wdata, .mem_rdata);
  banked_sram #(.NBANK(32), .ROWS(ROWS)) mem (.clk, .en (mem_en), .we (mem_we), .row (mem_row),
    .wdata (mem_wdata), .rdata (mem_rdata));

  always #5 clk = ~clk;

  function automatic logic [VW-1:0] rnd_vec();
    logic [VW-1:0] v;
    for (int i = 0; i < VW/32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic access(input bit st, input int lg, input int word);
    logic [VW-1:0] e;
    int n;
    n = 1 << lg;
    @(negedge clk);
    trig = 1; opc = {st, 3'(lg)}; addr = 32'(word * 4); wdata = rnd_vec();
    #1;
    checks++;
    if ($countones(mem_en) != n) begin failures++; $display("bank enables %0d for %0d words", $countones(mem_en), n); end
    e = '0;
    for (int j = 0; j < n; j++)
      if (st) shadow[word + j] = wdata[j*32 +: 32];
      else    e[j*32 +: 32] = shadow[word + j];
    @(negedge clk);
    trig = 0;
    if (!st) begin
      @(posedge clk); #1;        // two cycles after the trigger edge
      checks++;
      if (out !== e) begin failures++; $display("load mismatch word %0d n %0d", word, n); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill the memory with full-width stores, so every word is known
    for (int r = 0; r < ROWS; r++) access(1, 5, r * 32);
    for (int k = 0; k < 300; k++) begin
      int lg, word;
      lg = $urandom_range(0, 5);
      word = $urandom_range(0, ROWS*32 - 1) & ~((1 << lg) - 1);
      access($urandom_range(0, 1), lg, word);
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
