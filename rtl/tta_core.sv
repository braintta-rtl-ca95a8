// tta_core: the transport-triggered neural-network core.
//
// Units, as in the paper's core diagram: control unit with loop buffer
// (cu), long-immediate unit (imm_unit), three scalar ALUs, three scalar
// register files, two vector register files, one Boolean register file, the
// three vector MAC units (8-bit vMAC, ternary vTMAC, binary vBMAC), the
// vector adder (vADD), the auxiliary vector unit (vOPS) and two load-store
// units, one for the data memory DMEM (feature maps) and one for the
// parameter memory PMEM (weights). They are joined by 6 scalar and 6
// vector buses (tta_ic). Every cycle the CU presents one instruction; its
// 12 moves are carried out at once and the target registers capture the
// values at the clock edge. Writing a trigger port starts an operation;
// its result register can be read from the next cycle (two cycles for LSU
// loads). Each register file takes one write per cycle, as drawn in the
// paper (assertion); any number of moves may read it. The DMA unit of the
// paper's core diagram is not included.
//
// Interfaces: instruction memory port (imem_*), DMEM and PMEM bank ports
// (dmem_* / pmem_*, one enable per bank), start / dbg_halt control and
// status outputs for the debugger.
module tta_core
  import tta_pkg::*;
#(
  parameter int unsigned NBANK    = 32,
  parameter int unsigned ROWS     = 4096,
  parameter int unsigned LB_DEPTH = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [IADDR_W-1:0]           start_pc,
  input  logic                         dbg_halt,
  output logic                         running,
  output logic                         done,
  output logic [IADDR_W-1:0]           pc,
  output logic                         exec,
  output logic                         from_lb,
  // instruction memory
  output logic                         imem_en,
  output logic [IADDR_W-1:0]           imem_addr,
  input  logic [INSTR_W-1:0]           imem_rdata,
  // data memory (feature maps)
  output logic [NBANK-1:0]             dmem_en,
  output logic                         dmem_we,
  output logic [$clog2(ROWS)-1:0]      dmem_row,
  output logic [NBANK-1:0][31:0]       dmem_wdata,
  input  logic [NBANK-1:0][31:0]       dmem_rdata,
  // parameter memory (weights)
  output logic [NBANK-1:0]             pmem_en,
  output logic                         pmem_we,
  output logic [$clog2(ROWS)-1:0]      pmem_row,
  output logic [NBANK-1:0][31:0]       pmem_wdata,
  input  logic [NBANK-1:0][31:0]       pmem_rdata
);
  localparam int unsigned NDST = int'(D_BOOL) + BOOL_REGS;

  instr_t                              instr;
  logic [INSTR_W-1:0]                  instr_bits;
  logic [NDST-1:0]                     we;
  logic [NDST-1:0][VW-1:0]             val;
  logic [NDST-1:0][OPC_W-1:0]          opc;
  logic [N_BUS-1:0][VW-1:0]            bus;

  logic [SW-1:0]                       imm_q, ra;
  logic [N_ALU-1:0][SW-1:0]            alu_out;
  logic [VW-1:0]                       vmac_out, vtmac_out, vbmac_out, vadd_out, vops_out;
  logic [VW-1:0]                       lsud_out, lsup_out;
  logic [N_RF-1:0][RF_REGS-1:0][SW-1:0]  rf_q;
  logic [N_VRF-1:0][RF_REGS-1:0][VW-1:0] vrf_q;
  logic [BOOL_REGS-1:0][0:0]           bool_q;

  assign instr = instr_t'(instr_bits);

  // ------------------------------------------------------------ control
  cu #(.LB_DEPTH(LB_DEPTH)) u_cu (
    .clk, .rst_n, .start, .start_pc, .dbg_halt,
    .in2_we (we[D_CU_IN2]), .in2 (val[D_CU_IN2][SW-1:0]),
    .trig   (we[D_CU_T]),   .opc (opc[D_CU_T]), .t (val[D_CU_T][SW-1:0]),
    .ra,
    .imem_en, .imem_addr, .imem_rdata,
    .instr (instr_bits), .exec, .pc, .running, .done, .from_lb
  );

  imm_unit #(.W(SW)) u_imm (
    .clk, .rst_n, .we (exec && instr.limm_we), .limm (instr.limm), .out (imm_q)
  );

  // -------------------------------------------------------- interconnect
  tta_ic #(.NDST(NDST)) u_ic (
    .clk, .exec, .instr,
    .s_imm (imm_q), .s_alu (alu_out), .s_vmac (vmac_out), .s_vtmac (vtmac_out),
    .s_vbmac (vbmac_out), .s_vadd (vadd_out), .s_vops (vops_out),
    .s_lsud (lsud_out), .s_lsup (lsup_out), .s_cu (ra),
    .s_rf (rf_q), .s_vrf (vrf_q), .s_bool (bool_q),
    .bus, .dst_we (we), .dst_val (val), .dst_opc (opc)
  );

  // --------------------------------------------------------- scalar part
  for (genvar k = 0; k < N_ALU; k++) begin : g_alu
    localparam int unsigned DI2 = int'(D_ALU0_IN2) + 2*k;
    localparam int unsigned DT  = int'(D_ALU0_IN1T) + 2*k;
    alu #(.W(SW)) u_alu (
      .clk, .rst_n,
      .in2_we (we[DI2]), .in2 (val[DI2][SW-1:0]),
      .trig (we[DT]), .opc (opc[DT]), .in1t (val[DT][SW-1:0]),
      .out (alu_out[k])
    );
  end

  for (genvar k = 0; k < N_RF; k++) begin : g_rf
    logic [RF_REGS-1:0] wsel;
    logic [2:0]         widx;
    logic [SW-1:0]      wval;
    always_comb begin
      widx = '0;
      wval = '0;
      for (int r = 0; r < int'(RF_REGS); r++) begin
        wsel[r] = we[int'(D_RF0) + RF_REGS*k + r];
        if (wsel[r]) begin
          widx = 3'(r);
          wval = val[int'(D_RF0) + RF_REGS*k + r][SW-1:0];
        end
      end
    end
    a_one_write: assert property (@(posedge clk) $onehot0(wsel))
      else $error("tta_core: two writes to RF%0d in one cycle", k);
    regfile #(.W(SW), .REGS(RF_REGS)) u_rf (
      .clk, .rst_n, .we (|wsel), .waddr (widx), .wdata (wval), .regs (rf_q[k])
    );
  end

  for (genvar k = 0; k < N_VRF; k++) begin : g_vrf
    logic [RF_REGS-1:0] wsel;
    logic [2:0]         widx;
    logic [VW-1:0]      wval;
    always_comb begin
      widx = '0;
      wval = '0;
      for (int r = 0; r < int'(RF_REGS); r++) begin
        wsel[r] = we[int'(D_VRF0) + RF_REGS*k + r];
        if (wsel[r]) begin
          widx = 3'(r);
          wval = val[int'(D_VRF0) + RF_REGS*k + r];
        end
      end
    end
    a_one_write: assert property (@(posedge clk) $onehot0(wsel))
      else $error("tta_core: two writes to vRF%0d in one cycle", k);
    regfile #(.W(VW), .REGS(RF_REGS)) u_vrf (
      .clk, .rst_n, .we (|wsel), .waddr (widx), .wdata (wval), .regs (vrf_q[k])
    );
  end

  regfile #(.W(1), .REGS(BOOL_REGS)) u_bool (
    .clk, .rst_n,
    .we    (we[D_BOOL] | we[D_BOOL+1]),
    .waddr (we[D_BOOL+1]),
    .wdata (we[D_BOOL+1] ? val[D_BOOL+1][0] : val[D_BOOL][0]),
    .regs  (bool_q)
  );

  // --------------------------------------------------------- vector part
  logic [VW-1:0] vmac_a, vmac_w, vtmac_a, vtmac_w, vbmac_a, vbmac_w;
  logic [VW-1:0] vadd_b, vops_a, lsud_wd, lsup_wd;
  logic [SW-1:0] vops_p;

  opnd_reg #(.W(VW)) u_vmac_a  (.clk, .rst_n, .we (we[D_VMAC_IN1]),  .d (val[D_VMAC_IN1]),  .q (vmac_a));
  opnd_reg #(.W(VW)) u_vmac_w  (.clk, .rst_n, .we (we[D_VMAC_IN2]),  .d (val[D_VMAC_IN2]),  .q (vmac_w));
  opnd_reg #(.W(VW)) u_vtmac_a (.clk, .rst_n, .we (we[D_VTMAC_IN1]), .d (val[D_VTMAC_IN1]), .q (vtmac_a));
  opnd_reg #(.W(VW)) u_vtmac_w (.clk, .rst_n, .we (we[D_VTMAC_IN2]), .d (val[D_VTMAC_IN2]), .q (vtmac_w));
  opnd_reg #(.W(VW)) u_vbmac_a (.clk, .rst_n, .we (we[D_VBMAC_IN1]), .d (val[D_VBMAC_IN1]), .q (vbmac_a));
  opnd_reg #(.W(VW)) u_vbmac_w (.clk, .rst_n, .we (we[D_VBMAC_IN2]), .d (val[D_VBMAC_IN2]), .q (vbmac_w));
  opnd_reg #(.W(VW)) u_vadd_b  (.clk, .rst_n, .we (we[D_VADD_IN2]),  .d (val[D_VADD_IN2]),  .q (vadd_b));
  opnd_reg #(.W(VW)) u_vops_a  (.clk, .rst_n, .we (we[D_VOPS_IN1]),  .d (val[D_VOPS_IN1]),  .q (vops_a));
  opnd_reg #(.W(SW)) u_vops_p  (.clk, .rst_n, .we (we[D_VOPS_IN2]),  .d (val[D_VOPS_IN2][SW-1:0]), .q (vops_p));
  opnd_reg #(.W(VW)) u_lsud_wd (.clk, .rst_n, .we (we[D_LSUD_IN2]),  .d (val[D_LSUD_IN2]),  .q (lsud_wd));
  opnd_reg #(.W(VW)) u_lsup_wd (.clk, .rst_n, .we (we[D_LSUP_IN2]),  .d (val[D_LSUP_IN2]),  .q (lsup_wd));

  vmac8 u_vmac (.clk, .rst_n, .trig (we[D_VMAC_T]), .opc (opc[D_VMAC_T]),
                .in1 (vmac_a), .in2 (vmac_w), .t_acc (val[D_VMAC_T]), .out (vmac_out));
  vtmac u_vtmac (.clk, .rst_n, .trig (we[D_VTMAC_T]), .opc (opc[D_VTMAC_T]),
                 .in1 (vtmac_a), .in2 (vtmac_w), .t_acc (val[D_VTMAC_T]), .out (vtmac_out));
  vbmac u_vbmac (.clk, .rst_n, .trig (we[D_VBMAC_T]), .opc (opc[D_VBMAC_T]),
                 .in1 (vbmac_a), .in2 (vbmac_w), .t_acc (val[D_VBMAC_T]), .out (vbmac_out));
  vadd  u_vadd  (.clk, .rst_n, .trig (we[D_VADD_T]), .opc (opc[D_VADD_T]),
                 .in2 (vadd_b), .t (val[D_VADD_T]), .out (vadd_out));
  vops  u_vops  (.clk, .rst_n, .trig (we[D_VOPS_T]), .opc (opc[D_VOPS_T]),
                 .in1 (vops_a), .in2 (vops_p), .t (val[D_VOPS_T]), .out (vops_out));

  lsu #(.NBANK(NBANK), .ROWS(ROWS)) u_lsud (
    .clk, .rst_n, .trig (we[D_LSUD_T]), .opc (opc[D_LSUD_T]),
    .addr (val[D_LSUD_T][SW-1:0]), .wdata (lsud_wd), .out (lsud_out),
    .mem_en (dmem_en), .mem_we (dmem_we), .mem_row (dmem_row),
    .mem_wdata (dmem_wdata), .mem_rdata (dmem_rdata)
  );

  lsu #(.NBANK(NBANK), .ROWS(ROWS)) u_lsup (
    .clk, .rst_n, .trig (we[D_LSUP_T]), .opc (opc[D_LSUP_T]),
    .addr (val[D_LSUP_T][SW-1:0]), .wdata (lsup_wd), .out (lsup_out),
    .mem_en (pmem_en), .mem_we (pmem_we), .mem_row (pmem_row),
    .mem_wdata (pmem_wdata), .mem_rdata (pmem_rdata)
  );

endmodule
