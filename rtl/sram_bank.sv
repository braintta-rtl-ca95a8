// sram_bank: one single-port SRAM bank, written as an array.
//
// DEPTH words of W bits with a write mask of one bit per 32-bit slice.
// A read (en & !we) returns the word on rdata in the next cycle; rdata
// keeps its value while the bank is not read. A write (en & we) updates
// the masked slices. Stands for a foundry SRAM macro, whose ports it
// mirrors; the array contents are not reset.
module sram_bank #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned W     = 32,
  parameter int unsigned MW    = (W + 31) / 32
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [MW-1:0]            wmask,
  input  logic [W-1:0]             wdata,
  output logic [W-1:0]             rdata
);
  localparam int unsigned SL = W / MW;

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (en) begin
      if (we) begin
        for (int m = 0; m < int'(MW); m++)
          if (wmask[m]) mem[addr][m*SL +: SL] <= wdata[m*SL +: SL];
      end else begin
        rdata <= mem[addr];
      end
    end

endmodule
