// braintta_soc: the TTA half of the BrainTTA system-on-chip.
//
// Holds the TTA core with its three memories - DMEM for feature maps and
// PMEM for weights (each NBANK banks of ROWS 32-bit words, by default
// 32 x 16 kB) and the instruction memory IMEM (4 x 32 kB) - together with
// the arbiter that lets the host reach these memories and the debugger that
// starts, freezes and monitors the core. The RISC-V host, its memories, the
// AXI/APB buses and the peripherals are outside this module; the host bus
// port h_* is where the AXI interconnect attaches, and irq goes to the host.
//
// Typical use: the host writes the program into IMEM and the data into DMEM
// and PMEM, writes START_PC and then CTRL.start, waits for irq, and reads
// the results back from DMEM. See arbiter and dbg for the port protocol,
// address map and registers.
module braintta_soc
  import tta_pkg::*;
#(
  parameter int unsigned NBANK    = 32,
  parameter int unsigned ROWS     = 4096,
  parameter int unsigned IBANKS   = 4,
  parameter int unsigned IDEPTH   = 1024,
  parameter int unsigned LB_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        h_req,
  input  logic        h_we,
  input  logic [31:0] h_addr,
  input  logic [31:0] h_wdata,
  output logic        h_gnt,
  output logic        h_rvalid,
  output logic [31:0] h_rdata,
  output logic        irq
);
  localparam int unsigned RW = $clog2(ROWS);

  // core <-> arbiter
  logic [NBANK-1:0]        c_dmem_en, c_pmem_en;
  logic                    c_dmem_we, c_pmem_we;
  logic [RW-1:0]           c_dmem_row, c_pmem_row;
  logic [NBANK-1:0][31:0]  c_dmem_wdata, c_pmem_wdata;
  logic                    c_imem_en;
  logic [IADDR_W-1:0]      c_imem_addr;
  // arbiter <-> memories
  logic [NBANK-1:0]        dmem_en, pmem_en;
  logic                    dmem_we, pmem_we;
  logic [RW-1:0]           dmem_row, pmem_row;
  logic [NBANK-1:0][31:0]  dmem_wdata, pmem_wdata, dmem_rdata, pmem_rdata;
  logic                    imem_en, imem_we;
  logic [IADDR_W-1:0]      imem_addr;
  logic [INSTR_W/32-1:0]   imem_wmask;
  logic [INSTR_W-1:0]      imem_wdata, imem_rdata;
  // debugger
  logic                    dbg_we, dbg_re;
  logic [2:0]              dbg_addr;
  logic [31:0]             dbg_wdata, dbg_rdata;
  logic                    start, halt, running, done, exec, from_lb;
  logic [IADDR_W-1:0]      start_pc, pc;

  tta_core #(.NBANK(NBANK), .ROWS(ROWS), .LB_DEPTH(LB_DEPTH)) u_core (
    .clk, .rst_n, .start, .start_pc, .dbg_halt (halt),
    .running, .done, .pc, .exec, .from_lb,
    .imem_en (c_imem_en), .imem_addr (c_imem_addr), .imem_rdata,
    .dmem_en (c_dmem_en), .dmem_we (c_dmem_we), .dmem_row (c_dmem_row),
    .dmem_wdata (c_dmem_wdata), .dmem_rdata,
    .pmem_en (c_pmem_en), .pmem_we (c_pmem_we), .pmem_row (c_pmem_row),
    .pmem_wdata (c_pmem_wdata), .pmem_rdata
  );

  arbiter #(.NBANK(NBANK), .ROWS(ROWS)) u_arb (
    .clk, .rst_n,
    .h_req, .h_we, .h_addr, .h_wdata, .h_gnt, .h_rvalid, .h_rdata,
    .c_dmem_en, .c_dmem_we, .c_dmem_row, .c_dmem_wdata,
    .c_pmem_en, .c_pmem_we, .c_pmem_row, .c_pmem_wdata,
    .c_imem_en, .c_imem_addr,
    .dmem_en, .dmem_we, .dmem_row, .dmem_wdata, .dmem_rdata,
    .pmem_en, .pmem_we, .pmem_row, .pmem_wdata, .pmem_rdata,
    .imem_en, .imem_we, .imem_addr, .imem_wmask, .imem_wdata, .imem_rdata,
    .dbg_we, .dbg_re, .dbg_addr, .dbg_wdata, .dbg_rdata
  );

  banked_sram #(.NBANK(NBANK), .ROWS(ROWS)) u_dmem (
    .clk, .en (dmem_en), .we (dmem_we), .row (dmem_row),
    .wdata (dmem_wdata), .rdata (dmem_rdata)
  );

  banked_sram #(.NBANK(NBANK), .ROWS(ROWS)) u_pmem (
    .clk, .en (pmem_en), .we (pmem_we), .row (pmem_row),
    .wdata (pmem_wdata), .rdata (pmem_rdata)
  );

  imem #(.NBANK(IBANKS), .DEPTH(IDEPTH), .W(INSTR_W), .AW(IADDR_W)) u_imem (
    .clk, .en (imem_en), .we (imem_we), .addr (imem_addr),
    .wmask (imem_wmask), .wdata (imem_wdata), .rdata (imem_rdata)
  );

  dbg #(.AW(IADDR_W)) u_dbg (
    .clk, .rst_n,
    .reg_we (dbg_we), .reg_re (dbg_re), .reg_addr (dbg_addr),
    .reg_wdata (dbg_wdata), .reg_rdata (dbg_rdata),
    .running, .done, .pc, .start, .start_pc, .halt, .irq
  );

endmodule
