// lsu: load-store unit between the TTA core and one banked SRAM (DMEM or
// PMEM).
//
// The trigger port takes a byte address; the opcode selects load or store
// (bit 3) and the access size, 2^opc[2:0] consecutive 32-bit words (1, 2,
// 4, 8, 16 or 32 words, i.e. 32 to 1024 bits). Word w is in bank
// w mod NBANK, so an aligned access of n words touches n neighbouring banks
// in one row, and only those banks are enabled. Stores take their data from
// the operand port wdata (word 0 in bits 31:0). Loads return word j of the
// access in lane j of out; unused lanes are zero.
//
// Timing: the memory request is issued in the trigger cycle; the banks
// answer one cycle later and the result register out is valid two cycles
// after the trigger. Accesses must be aligned to their size (assertion).
// Banking and selective bank enabling follow the paper; word interleaving,
// alignment rule and latency are this design's choices.
module lsu
  import tta_pkg::*;
#(
  parameter int unsigned NBANK = 32,
  parameter int unsigned ROWS  = 4096,
  parameter int unsigned VEC_W    = 1024
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         trig,
  input  logic [OPC_W-1:0]             opc,
  input  logic [SW-1:0]                addr,
  input  logic [VEC_W-1:0]                wdata,
  output logic [VEC_W-1:0]                out,
  // memory side
  output logic [NBANK-1:0]             mem_en,
  output logic                         mem_we,
  output logic [$clog2(ROWS)-1:0]      mem_row,
  output logic [NBANK-1:0][31:0]       mem_wdata,
  input  logic [NBANK-1:0][31:0]       mem_rdata
);
  localparam int unsigned BW = $clog2(NBANK);
  localparam int unsigned RW = $clog2(ROWS);

  logic [SW-3:0]  word;
  logic [BW-1:0]  b0;
  logic [BW:0]    n;
  logic           st;

  assign word    = addr[SW-1:2];
  assign b0      = word[BW-1:0];
  assign n       = (BW+1)'(1) << opc[2:0];
  assign st      = opc[3];
  assign mem_we  = st;
  assign mem_row = word[BW +: RW];

  always_comb begin
    for (int b = 0; b < int'(NBANK); b++) begin
      logic [BW-1:0] j;
      j = BW'(b) - b0;                       // word index within the access
      mem_en[b]    = trig && ({1'b0, j} < n) && (b >= int'(b0));
      mem_wdata[b] = wdata[j*32 +: 32];
    end
  end

  // load response
  logic          ld_q;
  logic [BW-1:0] b0_q;
  logic [BW:0]   n_q;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      ld_q <= 1'b0;
      b0_q <= '0;
      n_q  <= '0;
      out  <= '0;
    end else begin
      ld_q <= trig && !st;
      if (trig) begin
        b0_q <= b0;
        n_q  <= n;
      end
      if (ld_q)
        for (int j = 0; j < int'(NBANK); j++)
          out[j*32 +: 32] <= (j < int'(n_q)) ? mem_rdata[BW'(b0_q + BW'(j))] : '0;
    end

  a_aligned: assert property (@(posedge clk)
    trig |-> ((addr[1:0] == 2'b00) && ((32'(b0) & (32'(n) - 1)) == 0)))
    else $error("lsu: unaligned access");

endmodule
