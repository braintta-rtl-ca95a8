// tta_pkg: shared constants, instruction format, port identifiers and
// operation codes of the transport-triggered (TTA) neural-network core.
//
// The core is programmed with moves: every instruction holds one move slot
// per bus (6 scalar 32-bit buses, 6 vector 1024-bit buses, as in the core
// diagram) plus one 32-bit long-immediate field. A slot names a source (an
// FU result register, a register-file entry, the immediate register) and a
// destination (an FU operand or trigger port, a register-file entry). Writing
// a trigger port starts the FU operation selected by the slot's opcode.
//
// The bus count and widths, the set of units and the vector organisation
// (32 lanes of 32 bits; 4 x int8, 16 trits or 32 bits per lane) follow the
// paper. The binary encoding below (field widths, identifier numbers,
// opcodes, 256-bit instruction word) is this design's own: the original core
// was generated by a TTA toolchain whose encoding is not published.
package tta_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned SW        = 32;    // scalar bus width
  localparam int unsigned VW        = 1024;  // vector bus width
  localparam int unsigned LANES     = 32;    // vector lanes (v_M = 32)
  localparam int unsigned N_SBUS    = 6;     // scalar buses 0-5
  localparam int unsigned N_VBUS    = 6;     // vector buses 6-11
  localparam int unsigned N_BUS     = N_SBUS + N_VBUS;
  localparam int unsigned ID_W      = 7;     // source / destination id width
  localparam int unsigned OPC_W     = 4;     // trigger opcode width
  localparam int unsigned SLOT_W    = 2*ID_W + OPC_W;          // 18
  localparam int unsigned INSTR_W   = 256;   // 12*18 + 1 + 32 = 249, padded
  localparam int unsigned PAD_W     = INSTR_W - N_BUS*SLOT_W - 1 - SW;
  localparam int unsigned IADDR_W   = 12;    // 4096 instructions = 4 x 32 kB
  localparam int unsigned RF_REGS   = 8;     // entries per (v)RF
  localparam int unsigned BOOL_REGS = 2;     // entries of the Boolean RF
  localparam int unsigned N_ALU     = 3;
  localparam int unsigned N_RF      = 3;
  localparam int unsigned N_VRF     = 2;

  typedef logic [SW-1:0] sword_t;
  typedef logic [VW-1:0] vword_t;

  typedef struct packed {
    logic [ID_W-1:0]  src;
    logic [ID_W-1:0]  dst;
    logic [OPC_W-1:0] opc;
  } slot_t;

  typedef struct packed {
    logic [PAD_W-1:0]  pad;
    logic              limm_we;  // load limm into the IMM unit
    logic [SW-1:0]     limm;     // long immediate
    slot_t [N_BUS-1:0] slots;    // slot b drives bus b
  } instr_t;

  // ---------------------------------------------------------- source ids
  localparam logic [ID_W-1:0] S_ZERO  = 7'd0;
  localparam logic [ID_W-1:0] S_IMM   = 7'd1;
  localparam logic [ID_W-1:0] S_ALU0  = 7'd2;   // ALU k = 2+k
  localparam logic [ID_W-1:0] S_VMAC  = 7'd5;
  localparam logic [ID_W-1:0] S_VTMAC = 7'd6;
  localparam logic [ID_W-1:0] S_VBMAC = 7'd7;
  localparam logic [ID_W-1:0] S_VADD  = 7'd8;
  localparam logic [ID_W-1:0] S_VOPS  = 7'd9;
  localparam logic [ID_W-1:0] S_LSUD  = 7'd10;
  localparam logic [ID_W-1:0] S_LSUP  = 7'd11;
  localparam logic [ID_W-1:0] S_CU    = 7'd12;  // return address
  localparam logic [ID_W-1:0] S_RF0   = 7'd16;  // RF k, entry r = 16+8k+r
  localparam logic [ID_W-1:0] S_VRF0  = 7'd40;  // vRF k, entry r = 40+8k+r
  localparam logic [ID_W-1:0] S_BOOL  = 7'd56;  // b0, b1 = 56, 57

  // ----------------------------------------------------- destination ids
  localparam logic [ID_W-1:0] D_NOP       = 7'd0;
  localparam logic [ID_W-1:0] D_ALU0_IN2  = 7'd1;   // ALU k: 1+2k, 2+2k
  localparam logic [ID_W-1:0] D_ALU0_IN1T = 7'd2;
  localparam logic [ID_W-1:0] D_VMAC_IN1  = 7'd7;   // activations
  localparam logic [ID_W-1:0] D_VMAC_IN2  = 7'd8;   // weights
  localparam logic [ID_W-1:0] D_VMAC_T    = 7'd9;   // accumulator, trigger
  localparam logic [ID_W-1:0] D_VTMAC_IN1 = 7'd10;
  localparam logic [ID_W-1:0] D_VTMAC_IN2 = 7'd11;
  localparam logic [ID_W-1:0] D_VTMAC_T   = 7'd12;
  localparam logic [ID_W-1:0] D_VBMAC_IN1 = 7'd13;
  localparam logic [ID_W-1:0] D_VBMAC_IN2 = 7'd14;
  localparam logic [ID_W-1:0] D_VBMAC_T   = 7'd15;
  localparam logic [ID_W-1:0] D_VADD_IN2  = 7'd16;
  localparam logic [ID_W-1:0] D_VADD_T    = 7'd17;
  localparam logic [ID_W-1:0] D_VOPS_IN1  = 7'd18;
  localparam logic [ID_W-1:0] D_VOPS_IN2  = 7'd19;
  localparam logic [ID_W-1:0] D_VOPS_T    = 7'd20;
  localparam logic [ID_W-1:0] D_LSUD_IN2  = 7'd21;  // store data
  localparam logic [ID_W-1:0] D_LSUD_T    = 7'd22;  // byte address, trigger
  localparam logic [ID_W-1:0] D_LSUP_IN2  = 7'd23;
  localparam logic [ID_W-1:0] D_LSUP_T    = 7'd24;
  localparam logic [ID_W-1:0] D_CU_IN2    = 7'd25;
  localparam logic [ID_W-1:0] D_CU_T      = 7'd26;
  localparam logic [ID_W-1:0] D_RF0       = 7'd32;  // RF k, entry r = 32+8k+r
  localparam logic [ID_W-1:0] D_VRF0      = 7'd56;  // vRF k, entry r = 56+8k+r
  localparam logic [ID_W-1:0] D_BOOL      = 7'd72;  // b0, b1 = 72, 73

  // ------------------------------------------------------------- opcodes
  localparam logic [OPC_W-1:0] ALU_ADD  = 4'd0,  ALU_SUB = 4'd1,  ALU_AND = 4'd2,
                               ALU_OR   = 4'd3,  ALU_XOR = 4'd4,  ALU_SHL = 4'd5,
                               ALU_SHR  = 4'd6,  ALU_SHRA = 4'd7, ALU_MUL = 4'd8,
                               ALU_EQ   = 4'd9,  ALU_GT  = 4'd10, ALU_GTU = 4'd11,
                               ALU_MIN  = 4'd12, ALU_MAX = 4'd13, ALU_PASS = 4'd14;

  // vMAC / vTMAC / vBMAC: broadcast lane 0 of the activation vector to all
  // 32 reduction trees (convolution), or pair lane i with tree i (depth-wise)
  localparam logic [OPC_W-1:0] MAC_BCAST = 4'd0, MAC_VEC = 4'd1;

  localparam logic [OPC_W-1:0] VADD_32 = 4'd0,   // 32 x 32 bit (1024-bit)
                               VADD_16 = 4'd1;   // 32 x 16 bit (low 512 bits)

  localparam logic [OPC_W-1:0] VOP_RELU32 = 4'd0, VOP_RELU16 = 4'd1,
                               VOP_MAX32  = 4'd2, VOP_MAX16  = 4'd3,
                               VOP_REQ8   = 4'd4, VOP_REQT   = 4'd5,
                               VOP_REQB   = 4'd6, VOP_EXTRACT = 4'd7,
                               VOP_INSERT = 4'd8;

  // LSU: bit 3 = store, bits 2:0 = log2 of the number of 32-bit words (0..5)
  localparam logic [OPC_W-1:0] LSU_ST = 4'b1000;

  localparam logic [OPC_W-1:0] CU_JUMP = 4'd0,  // pc <= t
                               CU_CALL = 4'd1,  // ra <= pc+1, pc <= t
                               CU_JNZ  = 4'd2,  // if in2 != 0: pc <= t
                               CU_LOOP = 4'd3,  // repeat next t instrs in2 times
                               CU_HALT = 4'd4;  // stop, flag completion

  // ternary digit encoding (2 bits per trit)
  localparam logic [1:0] TRIT_ZERO = 2'b00;
  localparam logic [1:0] TRIT_POS  = 2'b01;
  localparam logic [1:0] TRIT_NEG  = 2'b11;

endpackage
