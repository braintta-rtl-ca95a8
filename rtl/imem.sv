// imem: instruction memory of the TTA core, NBANK banks of DEPTH
// instructions (defaults: 4 banks x 1024 x 256 bit = 4 x 32 kB, the size
// the paper gives). The top address bits select the bank, so only one bank
// is active per fetch.
//
// One port, shared by the core's fetch and the host (through the arbiter):
// en/we/addr select an instruction; wmask enables 32-bit slices for writes,
// so the host can fill an instruction one 32-bit word at a time.
//
// Timing: rdata is valid one cycle after a read enable and holds until the
// next read. The 256-bit instruction width is this design's encoding.
module imem #(
  parameter int unsigned NBANK = 4,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned W     = 256,
  parameter int unsigned AW    = $clog2(NBANK * DEPTH)
) (
  input  logic              clk,
  input  logic              en,
  input  logic              we,
  input  logic [AW-1:0]     addr,
  input  logic [W/32-1:0]   wmask,
  input  logic [W-1:0]      wdata,
  output logic [W-1:0]      rdata
);
  localparam int unsigned DW = $clog2(DEPTH);
  localparam int unsigned BW = (NBANK > 1) ? $clog2(NBANK) : 1;

  logic [NBANK-1:0][W-1:0] bank_rdata;
  logic [BW-1:0]           sel_q;
  logic [BW-1:0]           sel;

  assign sel = (NBANK > 1) ? BW'(addr >> DW) : '0;

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    sram_bank #(.DEPTH(DEPTH), .W(W)) u_bank (
      .clk   (clk),
      .en    (en && sel == BW'(b)),
      .we    (we),
      .addr  (addr[DW-1:0]),
      .wmask (wmask),
      .wdata (wdata),
      .rdata (bank_rdata[b])
    );
  end

  always_ff @(posedge clk)
    if (en && !we) sel_q <= sel;

  assign rdata = bank_rdata[sel_q];

endmodule
