// tb_arbiter: self-checking test of the host/core arbiter with small
// memories behind it. The host writes and reads random words in DMEM, PMEM
// and IMEM while a core model issues random bank requests; host requests
// must be held off exactly while the core uses the addressed memory, and
// the host must read back what it wrote (shadow copy here). Debugger
// register accesses are checked against a register model.
module tb_arbiter;
  import tta_pkg::*;
  localparam int ROWS = 64;
  logic clk = 0, rst_n = 0;
  logic h_req = 0, h_we = 0, h_gnt, h_rvalid;
  logic [31:0] h_addr = '0, h_wdata = '0, h_rdata;
  logic [31:0] c_dmem_en = '0, c_pmem_en = '0;
  logic c_dmem_we = 0, c_pmem_we = 0, c_imem_en = 0;
  logic [5:0] c_dmem_row = '0, c_pmem_row = '0;
  logic [31:0][31:0] c_dmem_wdata = '0, c_pmem_wdata = '0;
  logic [11:0] c_imem_addr = '0;
  logic [31:0] dmem_en, pmem_en;
  logic dmem_we, pmem_we, imem_en, imem_we;
  logic [5:0] dmem_row, pmem_row;
  logic [31:0][31:0] dmem_wdata, pmem_wdata, dmem_rdata, pmem_rdata;
  logic [11:0] imem_addr;
  logic [7:0] imem_wmask;
  logic [255:0] imem_wdata, imem_rdata;
  logic dbg_we, dbg_re;
  logic [2:0] dbg_addr;
  logic [31:0] dbg_wdata, dbg_rdata;
  logic [31:0] dbg_regs [8];
  int checks = 0, failures = 0, held = 0;

  arbiter #(.NBANK(32), .ROWS(ROWS)) dut (.*);
  banked_sram #(.NBANK(32), .ROWS(ROWS)) u_d (.clk, .en (dmem_en), .we (dmem_we), .row (dmem_row), .wdata (dmem_wdata), .rdata (dmem_rdata));
  banked_sram #(.NBANK(32), .ROWS(ROWS)) u_p (.clk, .en (pmem_en), .we (pmem_we), .row (pmem_row), .wdata (pmem_wdata), .rdata (pmem_rdata));
  imem #(.NBANK(4), .DEPTH(16), .AW(12)) u_i (.clk, .en (imem_en), .we (imem_we), .addr (imem_addr), .wmask (imem_wmask), .wdata (imem_wdata), .rdata (imem_rdata));

  // debugger register model
  always_ff @(posedge clk) begin
    if (dbg_we) dbg_regs[dbg_addr] <= dbg_wdata;
    if (dbg_re) dbg_rdata <= dbg_regs[dbg_addr];
  end

  always #5 clk = ~clk;

  // core model: random reads (never writes, so the shadow stays valid)
  always @(negedge clk) if (rst_n) begin
    c_dmem_en   = ($urandom_range(0, 2) == 0) ? $urandom : '0;
    c_pmem_en   = ($urandom_range(0, 2) == 0) ? $urandom : '0;
    c_imem_en   = $urandom_range(0, 2) == 0;
    c_imem_addr = 12'($urandom_range(0, 63));
    c_dmem_row  = 6'($urandom);
    c_pmem_row  = 6'($urandom);
  end

  // a held-off request must see the core busy on that memory
  always @(posedge clk) if (h_req) begin
    logic busy;
    case (h_addr[21:20])
      2'd0: busy = |c_dmem_en;
      2'd1: busy = |c_pmem_en;
      2'd2: busy = c_imem_en;
      default: busy = 0;
    endcase
    checks++;
    if (h_gnt == busy) begin failures++; $display("grant %0d with busy %0d", h_gnt, busy); end
    if (!h_gnt) held++;
    if (h_gnt && h_addr[21:20] == 2'd0 && dmem_en != (32'd1 << h_addr[6:2])) failures++;
  end

  task automatic access(input bit we, input logic [31:0] a, input logic [31:0] d, output logic [31:0] q);
    @(negedge clk);
    h_req = 1; h_we = we; h_addr = a; h_wdata = d;
    @(posedge clk);
    while (!h_gnt) @(posedge clk);
    @(negedge clk);
    h_req = 0;
    q = h_rdata;
    if (!we) begin checks++; if (!h_rvalid) failures++; end
  endtask

  logic [31:0] shadow [logic [31:0]];

  initial begin
    logic [31:0] q;
    logic [31:0] addrs [$];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 150; n++) begin
      logic [31:0] a;
      case (n % 4)
        0: a = 32'h0000_0000 | 32'($urandom_range(0, ROWS*32 - 1) * 4);
        1: a = 32'h0010_0000 | 32'($urandom_range(0, ROWS*32 - 1) * 4);
        2: a = 32'h0020_0000 | 32'($urandom_range(0, 64*8 - 1) * 4);
        default: a = 32'h0030_0000 | 32'($urandom_range(0, 7) * 4);
      endcase
      if (!shadow.exists(a)) addrs.push_back(a);
      shadow[a] = $urandom;
      access(1, a, shadow[a], q);
    end
    foreach (addrs[k]) begin
      access(0, addrs[k], '0, q);
      checks++;
      if (q !== shadow[addrs[k]]) begin failures++; $display("read %h: %h vs %h", addrs[k], q, shadow[addrs[k]]); end
    end
    checks++;
    if (held == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
