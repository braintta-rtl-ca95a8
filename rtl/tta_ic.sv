// tta_ic: transport interconnect of the TTA core.
//
// Each of the 12 buses is driven by the move slot of the same number in the
// current instruction: the slot's source id picks a value (an FU result
// register, a register-file entry, the IMM register or zero) and puts it on
// the bus. Buses 0-5 are scalar and carry the low 32 bits of their source;
// buses 6-11 are vector buses and carry all 1024 bits (a scalar source is
// zero-extended). Each destination id d (an FU operand or trigger port, a
// register-file entry) receives dst_we[d], the value of the bus whose slot
// named d, and that slot's opcode. Nothing moves when exec is low.
//
// Purely combinational: the moves of one instruction happen in one cycle,
// and the destination registers capture them at the clock edge.
// The bus count and widths are the paper's. The paper's core connects each
// port to a selected subset of the buses; here every port can reach every
// bus. Two slots naming one destination is a program error (assertion).
module tta_ic
  import tta_pkg::*;
#(
  parameter int unsigned NDST = 74
) (
  input  logic                             clk,
  input  logic                             exec,
  input  instr_t                           instr,
  // sources
  input  logic [SW-1:0]                    s_imm,
  input  logic [N_ALU-1:0][SW-1:0]         s_alu,
  input  logic [VW-1:0]                    s_vmac,
  input  logic [VW-1:0]                    s_vtmac,
  input  logic [VW-1:0]                    s_vbmac,
  input  logic [VW-1:0]                    s_vadd,
  input  logic [VW-1:0]                    s_vops,
  input  logic [VW-1:0]                    s_lsud,
  input  logic [VW-1:0]                    s_lsup,
  input  logic [SW-1:0]                    s_cu,
  input  logic [N_RF-1:0][RF_REGS-1:0][SW-1:0]  s_rf,
  input  logic [N_VRF-1:0][RF_REGS-1:0][VW-1:0] s_vrf,
  input  logic [BOOL_REGS-1:0]             s_bool,
  // buses and destinations
  output logic [N_BUS-1:0][VW-1:0]         bus,
  output logic [NDST-1:0]                  dst_we,
  output logic [NDST-1:0][VW-1:0]          dst_val,
  output logic [NDST-1:0][OPC_W-1:0]       dst_opc
);
  function automatic logic [VW-1:0] src_value(input logic [ID_W-1:0] id,
      input logic [SW-1:0] imm, input logic [N_ALU-1:0][SW-1:0] alu,
      input logic [VW-1:0] vmac, input logic [VW-1:0] vtmac,
      input logic [VW-1:0] vbmac, input logic [VW-1:0] vad,
      input logic [VW-1:0] vop, input logic [VW-1:0] lsud,
      input logic [VW-1:0] lsup, input logic [SW-1:0] cuv,
      input logic [N_RF-1:0][RF_REGS-1:0][SW-1:0] rf,
      input logic [N_VRF-1:0][RF_REGS-1:0][VW-1:0] vrf,
      input logic [BOOL_REGS-1:0] bl);
    logic [VW-1:0] v;
    v = '0;
    if (id == S_IMM)                          v = VW'(imm);
    else if (id >= S_ALU0 && id < S_ALU0 + N_ALU) v = VW'(alu[id - S_ALU0]);
    else if (id == S_VMAC)                    v = vmac;
    else if (id == S_VTMAC)                   v = vtmac;
    else if (id == S_VBMAC)                   v = vbmac;
    else if (id == S_VADD)                    v = vad;
    else if (id == S_VOPS)                    v = vop;
    else if (id == S_LSUD)                    v = lsud;
    else if (id == S_LSUP)                    v = lsup;
    else if (id == S_CU)                      v = VW'(cuv);
    else if (id >= S_RF0 && id < S_RF0 + N_RF*RF_REGS)
      v = VW'(rf[(id - S_RF0) / RF_REGS][(id - S_RF0) % RF_REGS]);
    else if (id >= S_VRF0 && id < S_VRF0 + N_VRF*RF_REGS)
      v = vrf[(id - S_VRF0) / RF_REGS][(id - S_VRF0) % RF_REGS];
    else if (id >= S_BOOL && id < S_BOOL + BOOL_REGS)
      v = VW'(bl[id - S_BOOL]);
    return v;
  endfunction

  always_comb begin
    for (int b = 0; b < int'(N_BUS); b++) begin
      logic [VW-1:0] v;
      v = src_value(instr.slots[b].src, s_imm, s_alu, s_vmac, s_vtmac, s_vbmac,
                    s_vadd, s_vops, s_lsud, s_lsup, s_cu, s_rf, s_vrf, s_bool);
      bus[b] = (b < int'(N_SBUS)) ? VW'(v[SW-1:0]) : v;
    end
  end

  always_comb begin
    dst_we  = '0;
    dst_val = '0;
    dst_opc = '0;
    for (int b = 0; b < int'(N_BUS); b++) begin
      logic [ID_W-1:0] d;
      d = instr.slots[b].dst;
      if (exec && d != D_NOP && int'(d) < int'(NDST)) begin
        dst_we[d]  = 1'b1;
        dst_val[d] = bus[b];
        dst_opc[d] = instr.slots[b].opc;
      end
    end
  end

  // one writer per destination and cycle
  logic [NDST-1:0][3:0] n_writers;
  always_comb begin
    n_writers = '0;
    for (int b = 0; b < int'(N_BUS); b++)
      if (instr.slots[b].dst != D_NOP && int'(instr.slots[b].dst) < int'(NDST))
        n_writers[instr.slots[b].dst] = n_writers[instr.slots[b].dst] + 1'b1;
  end

  for (genvar d = 1; d < NDST; d++) begin : g_chk
    a_one_writer: assert property (@(posedge clk) exec |-> n_writers[d] <= 1)
      else $error("tta_ic: destination %0d written by several buses", d);
  end

endmodule
