// banked_sram: the TTA core's data memory (DMEM) or parameter memory
// (PMEM): NBANK independent 32-bit banks of ROWS words each. With the
// defaults, 32 banks of 16 kB = 512 kB, as in the paper.
//
// Every bank has its own enable, so an access of n consecutive 32-bit words
// switches on only n banks; this is how the paper makes narrow (1-bit and
// 2-bit operand) accesses cheap. All enabled banks share one row address and
// one write-enable (the LSU and the host never mix reads and writes in one
// access). Word w of the memory lives in bank w mod NBANK, row w / NBANK.
//
// Timing: read data on rdata one cycle after the enable.
module banked_sram #(
  parameter int unsigned NBANK = 32,
  parameter int unsigned ROWS  = 4096
) (
  input  logic                         clk,
  input  logic [NBANK-1:0]             en,
  input  logic                         we,
  input  logic [$clog2(ROWS)-1:0]      row,
  input  logic [NBANK-1:0][31:0]       wdata,
  output logic [NBANK-1:0][31:0]       rdata
);
  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    sram_bank #(.DEPTH(ROWS), .W(32)) u_bank (
      .clk   (clk),
      .en    (en[b]),
      .we    (we),
      .addr  (row),
      .wmask (1'b1),
      .wdata (wdata[b]),
      .rdata (rdata[b])
    );
  end

endmodule
