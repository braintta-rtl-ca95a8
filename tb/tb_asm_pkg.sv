// tb_asm_pkg: helpers for writing TTA programs in testbenches.
// A program is a queue of instructions; mv() adds one move to an
// instruction on a given bus, imm() sets the long immediate that the
// instruction loads into the IMM unit. Buses 0-5 are scalar, 6-11 vector.
package tb_asm_pkg;
  import tta_pkg::*;

  function automatic instr_t nop();
    instr_t i;
    i = '0;
    return i;
  endfunction

  function automatic void mv(inout instr_t i, input int bus, input logic [ID_W-1:0] src,
                             input logic [ID_W-1:0] dst, input logic [OPC_W-1:0] opc = '0);
    i.slots[bus].src = src;
    i.slots[bus].dst = dst;
    i.slots[bus].opc = opc;
  endfunction

  function automatic void imm(inout instr_t i, input logic [31:0] v);
    i.limm    = v;
    i.limm_we = 1'b1;
  endfunction

  function automatic logic [ID_W-1:0] rf_s(input int k, input int r);
    return ID_W'(int'(S_RF0) + 8*k + r);
  endfunction
  function automatic logic [ID_W-1:0] rf_d(input int k, input int r);
    return ID_W'(int'(D_RF0) + 8*k + r);
  endfunction
  function automatic logic [ID_W-1:0] vrf_s(input int k, input int r);
    return ID_W'(int'(S_VRF0) + 8*k + r);
  endfunction
  function automatic logic [ID_W-1:0] vrf_d(input int k, input int r);
    return ID_W'(int'(D_VRF0) + 8*k + r);
  endfunction
  function automatic logic [ID_W-1:0] alu_s(input int k);
    return ID_W'(int'(S_ALU0) + k);
  endfunction
  function automatic logic [ID_W-1:0] alu_in2(input int k);
    return ID_W'(int'(D_ALU0_IN2) + 2*k);
  endfunction
  function automatic logic [ID_W-1:0] alu_t(input int k);
    return ID_W'(int'(D_ALU0_IN1T) + 2*k);
  endfunction
endpackage
