// arbiter: border between the host side (RISC-V and AXI bus) and the TTA
// side of the SoC.
//
// The host reaches the TTA core's three memories and the debugger through
// one 32-bit request/grant port. Address map (byte address):
//   bits 21:20 = 0  DMEM  word = addr[18:2], bank = word mod NBANK
//              = 1  PMEM  (same layout)
//              = 2  IMEM  instruction = addr[IAW+4:5], 32-bit slice = addr[4:2]
//              = 3  debugger registers, index = addr[4:2]
// Each memory has one port shared by the core and the host, through a
// multiplexer in front of it. The core always wins: a host request to a
// memory the core uses in that cycle is held off (h_gnt low) and must stay
// unchanged until granted. Debugger registers are always granted.
//
// Timing: h_gnt in the request cycle; for a granted read, h_rvalid and
// h_rdata one cycle later. The muxes in front of each memory and the
// arbiter's position are from the paper's SoC diagram; the priority rule,
// the bus protocol and the address map are this design's own.
module arbiter
  import tta_pkg::*;
#(
  parameter int unsigned NBANK = 32,
  parameter int unsigned ROWS  = 4096,
  parameter int unsigned IAW   = IADDR_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // host port
  input  logic                         h_req,
  input  logic                         h_we,
  input  logic [31:0]                  h_addr,
  input  logic [31:0]                  h_wdata,
  output logic                         h_gnt,
  output logic                         h_rvalid,
  output logic [31:0]                  h_rdata,
  // core side
  input  logic [NBANK-1:0]             c_dmem_en,
  input  logic                         c_dmem_we,
  input  logic [$clog2(ROWS)-1:0]      c_dmem_row,
  input  logic [NBANK-1:0][31:0]       c_dmem_wdata,
  input  logic [NBANK-1:0]             c_pmem_en,
  input  logic                         c_pmem_we,
  input  logic [$clog2(ROWS)-1:0]      c_pmem_row,
  input  logic [NBANK-1:0][31:0]       c_pmem_wdata,
  input  logic                         c_imem_en,
  input  logic [IAW-1:0]               c_imem_addr,
  // memory side
  output logic [NBANK-1:0]             dmem_en,
  output logic                         dmem_we,
  output logic [$clog2(ROWS)-1:0]      dmem_row,
  output logic [NBANK-1:0][31:0]       dmem_wdata,
  input  logic [NBANK-1:0][31:0]       dmem_rdata,
  output logic [NBANK-1:0]             pmem_en,
  output logic                         pmem_we,
  output logic [$clog2(ROWS)-1:0]      pmem_row,
  output logic [NBANK-1:0][31:0]       pmem_wdata,
  input  logic [NBANK-1:0][31:0]       pmem_rdata,
  output logic                         imem_en,
  output logic                         imem_we,
  output logic [IAW-1:0]               imem_addr,
  output logic [INSTR_W/32-1:0]        imem_wmask,
  output logic [INSTR_W-1:0]           imem_wdata,
  input  logic [INSTR_W-1:0]           imem_rdata,
  // debugger registers
  output logic                         dbg_we,
  output logic                         dbg_re,
  output logic [2:0]                   dbg_addr,
  output logic [31:0]                  dbg_wdata,
  input  logic [31:0]                  dbg_rdata
);
  localparam int unsigned BW = $clog2(NBANK);
  localparam int unsigned RW = $clog2(ROWS);
  localparam int unsigned SLW = $clog2(INSTR_W/32);

  typedef enum logic [1:0] {R_DMEM = 2'd0, R_PMEM = 2'd1, R_IMEM = 2'd2, R_DBG = 2'd3} region_e;

  region_e         region;
  logic [BW-1:0]   bank;
  logic [RW-1:0]   row;
  logic [SLW-1:0]  slice;
  logic            busy;

  assign region = region_e'(h_addr[21:20]);
  assign bank   = h_addr[2 +: BW];
  assign row    = h_addr[2+BW +: RW];
  assign slice  = h_addr[2 +: SLW];

  always_comb begin
    unique case (region)
      R_DMEM:  busy = |c_dmem_en;
      R_PMEM:  busy = |c_pmem_en;
      R_IMEM:  busy = c_imem_en;
      default: busy = 1'b0;
    endcase
  end

  assign h_gnt = h_req && !busy;

  always_comb begin
    // core requests pass straight through
    dmem_en    = c_dmem_en;
    dmem_we    = c_dmem_we;
    dmem_row   = c_dmem_row;
    dmem_wdata = c_dmem_wdata;
    pmem_en    = c_pmem_en;
    pmem_we    = c_pmem_we;
    pmem_row   = c_pmem_row;
    pmem_wdata = c_pmem_wdata;
    imem_en    = c_imem_en;
    imem_we    = 1'b0;
    imem_addr  = c_imem_addr;
    imem_wmask = '0;
    imem_wdata = '0;
    dbg_we     = 1'b0;
    dbg_re     = 1'b0;
    dbg_addr   = h_addr[4:2];
    dbg_wdata  = h_wdata;
    if (h_gnt) begin
      unique case (region)
        R_DMEM: begin
          dmem_en          = '0;
          dmem_en[bank]    = 1'b1;
          dmem_we          = h_we;
          dmem_row         = row;
          dmem_wdata[bank] = h_wdata;
        end
        R_PMEM: begin
          pmem_en          = '0;
          pmem_en[bank]    = 1'b1;
          pmem_we          = h_we;
          pmem_row         = row;
          pmem_wdata[bank] = h_wdata;
        end
        R_IMEM: begin
          imem_en           = 1'b1;
          imem_we           = h_we;
          imem_addr         = h_addr[5 +: IAW];
          imem_wmask[slice] = 1'b1;
          imem_wdata        = {(INSTR_W/32){h_wdata}};
        end
        default: begin
          dbg_we = h_we;
          dbg_re = !h_we;
        end
      endcase
    end
  end

  // read response
  region_e        region_q;
  logic [BW-1:0]  bank_q;
  logic [SLW-1:0] slice_q;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      h_rvalid <= 1'b0;
      region_q <= R_DMEM;
      bank_q   <= '0;
      slice_q  <= '0;
    end else begin
      h_rvalid <= h_gnt && !h_we;
      if (h_gnt) begin
        region_q <= region;
        bank_q   <= bank;
        slice_q  <= slice;
      end
    end

  always_comb begin
    unique case (region_q)
      R_DMEM:  h_rdata = dmem_rdata[bank_q];
      R_PMEM:  h_rdata = pmem_rdata[bank_q];
      R_IMEM:  h_rdata = imem_rdata[slice_q*32 +: 32];
      default: h_rdata = dbg_rdata;
    endcase
  end

  a_hold: assert property (@(posedge clk)
    (h_req && !h_gnt) |=> (h_req && $stable(h_addr) && $stable(h_we) && $stable(h_wdata)))
    else $error("arbiter: host request changed before it was granted");

endmodule
