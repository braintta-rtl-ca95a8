// tb_tta_ic: self-checking test of the transport interconnect. Random
// instructions (random sources including unused ids, distinct random
// destinations or no-ops, random opcodes, random exec) are applied with
// random source values; every bus value and every destination's write
// enable, value and opcode is compared with a reference model written here.
// Scalar buses must carry only the low 32 bits of their source.
module tb_tta_ic;
  import tta_pkg::*;
  localparam int NDST = 74;
  logic clk = 0, exec;
  instr_t instr;
  logic [SW-1:0] s_imm, s_cu;
  logic [N_ALU-1:0][SW-1:0] s_alu;
  logic [VW-1:0] s_vmac, s_vtmac, s_vbmac, s_vadd, s_vops, s_lsud, s_lsup;
  logic [N_RF-1:0][RF_REGS-1:0][SW-1:0] s_rf;
  logic [N_VRF-1:0][RF_REGS-1:0][VW-1:0] s_vrf;
  logic [BOOL_REGS-1:0] s_bool;
  logic [N_BUS-1:0][VW-1:0] bus;
  logic [NDST-1:0] dst_we;
  logic [NDST-1:0][VW-1:0] dst_val;
  logic [NDST-1:0][OPC_W-1:0] dst_opc;
  int checks = 0, failures = 0;

  tta_ic #(.NDST(NDST)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [VW-1:0] rvec();
    logic [VW-1:0] v;
    for (int w = 0; w < int'(VW) / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic logic [VW-1:0] ref_src(input int id);
    if (id == 1)              return VW'(s_imm);
    if (id >= 2 && id <= 4)   return VW'(s_alu[id-2]);
    case (id)
      5: return s_vmac;  6: return s_vtmac; 7: return s_vbmac; 8: return s_vadd;
      9: return s_vops; 10: return s_lsud; 11: return s_lsup; 12: return VW'(s_cu);
      default: ;
    endcase
    if (id >= 16 && id < 40)  return VW'(s_rf[(id-16)/8][(id-16)%8]);
    if (id >= 40 && id < 56)  return s_vrf[(id-40)/8][(id-40)%8];
    if (id >= 56 && id < 58)  return VW'(s_bool[id-56]);
    return '0;
  endfunction

  initial begin
    for (int n = 0; n < 300; n++) begin
      int used [int];
      @(negedge clk);
      used.delete();
      s_imm = $urandom; s_cu = $urandom; s_bool = 2'($urandom);
      for (int k = 0; k < 3; k++) s_alu[k] = $urandom;
      s_vmac = rvec(); s_vtmac = rvec(); s_vbmac = rvec(); s_vadd = rvec();
      s_vops = rvec(); s_lsud = rvec(); s_lsup = rvec();
      for (int k = 0; k < 3; k++) for (int r = 0; r < 8; r++) s_rf[k][r] = $urandom;
      for (int k = 0; k < 2; k++) for (int r = 0; r < 8; r++) s_vrf[k][r] = rvec();
      exec = ($urandom_range(0, 7) != 0);
      instr = '0;
      instr.limm = $urandom;
      for (int b = 0; b < int'(N_BUS); b++) begin
        int d;
        instr.slots[b].src = ID_W'($urandom_range(0, 63));
        instr.slots[b].opc = OPC_W'($urandom);
        d = ($urandom_range(0, 3) == 0) ? 0 : $urandom_range(1, NDST - 1);
        if (used.exists(d)) d = 0;
        if (d != 0) used[d] = b;
        instr.slots[b].dst = ID_W'(d);
      end
      #1;
      for (int b = 0; b < int'(N_BUS); b++) begin
        logic [VW-1:0] e;
        e = ref_src(int'(instr.slots[b].src));
        if (b < 6) e = VW'(e[31:0]);
        checks++;
        if (bus[b] !== e) begin failures++; $display("bus %0d src %0d wrong", b, instr.slots[b].src); end
      end
      for (int d = 1; d < NDST; d++) begin
        logic ewe;
        ewe = exec && used.exists(d);
        checks++;
        if (dst_we[d] !== ewe) begin failures++; $display("dst %0d we %b", d, dst_we[d]); end
        if (ewe) begin
          checks++;
          if (dst_val[d] !== bus[used[d]] || dst_opc[d] !== instr.slots[used[d]].opc) begin
            failures++; $display("dst %0d value/opc wrong", d);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
