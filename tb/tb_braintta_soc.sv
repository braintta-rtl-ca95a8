// tb_braintta_soc: end-to-end test of the TTA half of the SoC at its full
// default size, driven through the host bus as the host processor would.
//
// The host writes a program and data, starts the core, polls memory while
// the core runs (so that the arbiter has to hold it off), freezes and
// resumes the core through the debugger, waits for the completion
// interrupt and reads the results back. The program runs, for P = 2 output
// pixels each, one layer step of every kind the core supports:
//   8-bit convolution     C = 16 (4 steps of v_C = 4), broadcast, vMAC
//   ternary convolution   C = 32 (2 steps of v_C = 16), broadcast, vTMAC
//   binary convolution    C = 64 (2 steps of v_C = 32), broadcast, vBMAC
//   8-bit depth-wise      32 channels x 12 taps (3 steps), per-lane vMAC
// each with M = 32 output channels, followed by requantization in vOPS
// (to int8, trits or bits) and a residual addition (vADD, 16-bit lanes)
// of the ternary and binary accumulators. The reduction loops run from the
// CU's loop buffer. Expected values are computed here from the same data
// with plain integer arithmetic. Each mechanism is counted and must occur.
module tb_braintta_soc;
  import tta_pkg::*;
  import tb_asm_pkg::*;

  localparam int P = 2;

  logic clk = 0, rst_n = 0;
  logic h_req = 0, h_we = 0, h_gnt, h_rvalid, irq;
  logic [31:0] h_addr = '0, h_wdata = '0, h_rdata;
  int checks = 0, failures = 0;

  braintta_soc dut (.clk, .rst_n, .h_req, .h_we, .h_addr, .h_wdata, .h_gnt, .h_rvalid, .h_rdata, .irq);

  always #5 clk = ~clk;

  // ------------------------------------------------------------ host bus
  task automatic hw(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk);
    h_req = 1; h_we = 1; h_addr = a; h_wdata = d;
    @(posedge clk);
    while (!h_gnt) @(posedge clk);
    @(negedge clk);
    h_req = 0; h_we = 0;
  endtask

  task automatic hr(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    h_req = 1; h_we = 0; h_addr = a;
    @(posedge clk);
    while (!h_gnt) @(posedge clk);
    @(negedge clk);
    h_req = 0;
    d = h_rdata;                       // h_rvalid is high in this cycle
    if (!h_rvalid) failures++;
  endtask

  function automatic logic [31:0] dmem(input int word); return 32'h0000_0000 | 32'(word * 4); endfunction
  function automatic logic [31:0] pmem(input int word); return 32'h0010_0000 | 32'(word * 4); endfunction
  localparam logic [31:0] IMEM = 32'h0020_0000, DBG = 32'h0030_0000;

  // ---------------------------------------------------------- data set
  // layers: 0 = int8 conv, 1 = ternary conv, 2 = binary conv, 3 = int8 depth-wise
  localparam int STEPS [4] = '{4, 2, 2, 3};
  localparam int ABASE [4] = '{0, 64, 128, 1024};     // DMEM words
  localparam int WBASE [4] = '{0, 1024, 2048, 3072};  // PMEM words
  function automatic int oacc(input int l, input int p); return 4096 + l*256 + p*32; endfunction
  function automatic int oreq(input int l, input int p); return 8192 + l*256 + p*32; endfunction
  function automatic int ores(input int p); return 12288 + p*32; endfunction

  logic [31:0] act_w [4][P][3*32];   // activation words per layer, pixel, step(*32 for dw)
  logic [31:0] wgt_w [4][3][32];     // weight words per layer, step, lane
  int          acc   [4][P][32];

  function automatic int s8(input logic [7:0] b); return int'($signed(b)); endfunction
  function automatic int tr(input logic [1:0] t); return (t == 2'b01) ? 1 : (t == 2'b11) ? -1 : 0; endfunction
  function automatic logic [1:0] rnd_trit(); int r; r = $urandom_range(0, 2);
    return (r == 0) ? 2'b00 : (r == 1) ? 2'b01 : 2'b11; endfunction

  task automatic make_data();
    for (int l = 0; l < 4; l++)
      for (int s = 0; s < STEPS[l]; s++)
        for (int m = 0; m < 32; m++) begin
          logic [31:0] w;
          w = $urandom;
          if (l == 1) for (int k = 0; k < 16; k++) w[2*k +: 2] = rnd_trit();
          wgt_w[l][s][m] = w;
        end
    for (int l = 0; l < 4; l++)
      for (int p = 0; p < P; p++)
        for (int s = 0; s < STEPS[l] * ((l == 3) ? 32 : 1); s++) begin
          logic [31:0] a;
          a = $urandom;
          if (l == 1) for (int k = 0; k < 16; k++) a[2*k +: 2] = rnd_trit();
          act_w[l][p][s] = a;
        end
    for (int l = 0; l < 4; l++)
      for (int p = 0; p < P; p++)
        for (int m = 0; m < 32; m++) begin
          int sum;
          sum = 0;
          for (int s = 0; s < STEPS[l]; s++) begin
            logic [31:0] a, w;
            a = (l == 3) ? act_w[l][p][s*32 + m] : act_w[l][p][s];
            w = wgt_w[l][s][m];
            case (l)
              0, 3: for (int k = 0; k < 4; k++)  sum += s8(a[k*8 +: 8]) * s8(w[k*8 +: 8]);
              1:    for (int k = 0; k < 16; k++) sum += tr(a[2*k +: 2]) * tr(w[2*k +: 2]);
              default: for (int k = 0; k < 32; k++) sum += (a[k] == w[k]) ? 1 : -1;
            endcase
          end
          acc[l][p][m] = sum;
        end
  endtask

  // ------------------------------------------------------------ program
  instr_t prog [$];

  localparam logic [ID_W-1:0] U_IN1 [4] = '{D_VMAC_IN1, D_VTMAC_IN1, D_VBMAC_IN1, D_VMAC_IN1};
  localparam logic [ID_W-1:0] U_IN2 [4] = '{D_VMAC_IN2, D_VTMAC_IN2, D_VBMAC_IN2, D_VMAC_IN2};
  localparam logic [ID_W-1:0] U_T   [4] = '{D_VMAC_T, D_VTMAC_T, D_VBMAC_T, D_VMAC_T};
  localparam logic [ID_W-1:0] U_OUT [4] = '{S_VMAC, S_VTMAC, S_VBMAC, S_VMAC};
  localparam logic [OPC_W-1:0] REQOP [4] = '{VOP_REQ8, VOP_REQT, VOP_REQB, VOP_REQ8};
  localparam int REQPAR [4] = '{4, 2, 0, 3};
  localparam int REQLG  [4] = '{3, 1, 0, 3};    // log2 words of the requantized result

  task automatic gen_program();
    instr_t i;
    for (int l = 0; l < 4; l++) begin
      i = nop(); imm(i, 32'(REQPAR[l])); prog.push_back(i);
      i = nop(); mv(i, 0, S_IMM, rf_d(2, 0)); prog.push_back(i);
      for (int p = 0; p < P; p++) begin
        int abyte, astride;
        abyte   = (l == 3) ? (ABASE[l] + p*96) * 4 : (ABASE[l] + p*STEPS[l]) * 4;
        astride = (l == 3) ? 128 : 4;
        i = nop(); imm(i, 32'(abyte)); prog.push_back(i);
        i = nop(); mv(i, 0, S_IMM, rf_d(0, 0)); imm(i, 32'(WBASE[l] * 4)); prog.push_back(i);
        i = nop(); mv(i, 0, S_IMM, rf_d(1, 1)); mv(i, 6, S_ZERO, vrf_d(0, 0)); imm(i, 32'(astride)); prog.push_back(i);
        i = nop(); mv(i, 0, S_IMM, alu_in2(0)); imm(i, 128); prog.push_back(i);
        i = nop(); mv(i, 0, S_IMM, alu_in2(1)); imm(i, 32'(STEPS[l])); prog.push_back(i);
        i = nop(); mv(i, 0, S_IMM, rf_d(1, 0)); imm(i, 4); prog.push_back(i);
        i = nop(); mv(i, 0, rf_s(1, 0), D_CU_IN2); mv(i, 1, S_IMM, D_CU_T, CU_LOOP); prog.push_back(i);
        // loop body (RF0.r0 = activation pointer, RF1.r1 = weight pointer;
        // an RF takes one write per cycle): load activations and weights, advance pointers, MAC
        i = nop();
        mv(i, 0, rf_s(0, 0), D_LSUD_T, (l == 3) ? 4'd5 : 4'd0);
        mv(i, 1, rf_s(1, 1), D_LSUP_T, 4'd5);
        mv(i, 2, rf_s(0, 0), alu_t(0), ALU_ADD);
        mv(i, 3, rf_s(1, 1), alu_t(1), ALU_ADD);
        prog.push_back(i);
        i = nop(); mv(i, 0, alu_s(0), rf_d(0, 0)); mv(i, 1, alu_s(1), rf_d(1, 1)); prog.push_back(i);
        i = nop();
        mv(i, 6, S_LSUD, U_IN1[l]);
        mv(i, 7, S_LSUP, U_IN2[l]);
        mv(i, 8, vrf_s(0, 0), U_T[l], (l == 3) ? MAC_VEC : MAC_BCAST);
        prog.push_back(i);
        i = nop(); mv(i, 6, U_OUT[l], vrf_d(0, 0)); prog.push_back(i);
        // store the accumulators and their requantized form
        i = nop(); mv(i, 6, vrf_s(0, 0), D_LSUD_IN2); imm(i, 32'(oacc(l, p) * 4)); prog.push_back(i);
        i = nop();
        mv(i, 0, S_IMM, D_LSUD_T, LSU_ST | 4'd5);
        mv(i, 6, vrf_s(0, 0), D_VOPS_T, REQOP[l]);
        mv(i, 1, rf_s(2, 0), D_VOPS_IN2);
        imm(i, 32'(oreq(l, p) * 4));
        prog.push_back(i);
        i = nop(); mv(i, 6, S_VOPS, D_LSUD_IN2); mv(i, 0, S_IMM, D_LSUD_T, LSU_ST | 4'(REQLG[l])); prog.push_back(i);
      end
    end
    // residual: ternary + binary accumulators, 16-bit lanes
    for (int p = 0; p < P; p++) begin
      i = nop(); imm(i, 32'(oacc(1, p) * 4)); prog.push_back(i);
      i = nop(); mv(i, 0, S_IMM, D_LSUD_T, 4'd4); imm(i, 32'(oacc(2, p) * 4)); prog.push_back(i);
      i = nop(); mv(i, 0, S_IMM, D_LSUD_T, 4'd4); imm(i, 32'(ores(p) * 4)); prog.push_back(i);
      i = nop(); mv(i, 6, S_LSUD, D_VADD_IN2); prog.push_back(i);
      i = nop(); mv(i, 6, S_LSUD, D_VADD_T, VADD_16); prog.push_back(i);
      i = nop(); mv(i, 6, S_VADD, D_LSUD_IN2); mv(i, 0, S_IMM, D_LSUD_T, LSU_ST | 4'd4); prog.push_back(i);
    end
    i = nop(); mv(i, 0, S_ZERO, D_CU_T, CU_HALT); prog.push_back(i);
  endtask

  // -------------------------------------------------------- mechanisms
  int n_lb = 0, n_vmac_b = 0, n_vmac_v = 0, n_vtmac = 0, n_vbmac = 0, n_vadd = 0, n_vops = 0;
  int n_narrow = 0, n_wide = 0, n_hold = 0, n_frozen = 0, n_irq = 0, cycles = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_core.exec && dut.u_core.from_lb) n_lb++;
    if (dut.u_core.we[D_VMAC_T] && dut.u_core.opc[D_VMAC_T] == MAC_BCAST) n_vmac_b++;
    if (dut.u_core.we[D_VMAC_T] && dut.u_core.opc[D_VMAC_T] == MAC_VEC) n_vmac_v++;
    if (dut.u_core.we[D_VTMAC_T]) n_vtmac++;
    if (dut.u_core.we[D_VBMAC_T]) n_vbmac++;
    if (dut.u_core.we[D_VADD_T]) n_vadd++;
    if (dut.u_core.we[D_VOPS_T]) n_vops++;
    if ($countones(dut.c_dmem_en) inside {[1:31]} || $countones(dut.c_pmem_en) inside {[1:31]}) n_narrow++;
    if ($countones(dut.c_dmem_en) == 32 || $countones(dut.c_pmem_en) == 32) n_wide++;
    if (h_req && !h_gnt) n_hold++;
    if (dut.u_core.running && dut.halt && !dut.u_core.exec) n_frozen++;
    if (dut.u_core.running) cycles++;
  end
  always @(posedge irq) n_irq++;

  // -------------------------------------------------------------- main
  initial begin
    logic [31:0] d, pc0, pc1;
    int polls;
    repeat (3) @(posedge clk);
    rst_n = 1;
    make_data();
    gen_program();
    // load program and data
    foreach (prog[k])
      for (int s = 0; s < 8; s++) hw(IMEM | 32'(k * 32 + s * 4), prog[k][s*32 +: 32]);
    for (int l = 0; l < 4; l++) begin
      for (int s = 0; s < STEPS[l]; s++)
        for (int m = 0; m < 32; m++) hw(pmem(WBASE[l] + s*32 + m), wgt_w[l][s][m]);
      for (int p = 0; p < P; p++)
        if (l == 3) for (int s = 0; s < 96; s++) hw(dmem(ABASE[l] + p*96 + s), act_w[l][p][s]);
        else        for (int s = 0; s < STEPS[l]; s++) hw(dmem(ABASE[l] + p*STEPS[l] + s), act_w[l][p][s]);
    end
    // spot-check the program as the host reads it back
    hr(IMEM | 32'(5 * 32 + 4), d);
    checks++;
    if (d !== prog[5][63:32]) failures++;
    // run
    hw(DBG | 32'h10, 32'd0);           // START_PC
    hw(DBG | 32'h00, 32'd1);           // start
    polls = 0;
    while (!irq) begin
      hr(dmem(0), d);                  // competes with the core for DMEM
      polls++;
      if (polls == 20) begin
        hw(DBG | 32'h00, 32'd2);       // freeze
        repeat (10) @(posedge clk);
        hr(DBG | 32'h04, d);
        checks++;
        if (d[2:0] != 3'b101) begin failures++; $display("status while frozen %h", d); end
        hr(DBG | 32'h08, pc0);
        repeat (5) @(posedge clk);
        hr(DBG | 32'h08, pc1);
        checks++;
        if (pc0 != pc1) begin failures++; $display("pc moved while frozen %0d %0d", pc0, pc1); end
        hw(DBG | 32'h00, 32'd0);       // resume
      end
    end
    hr(DBG | 32'h04, d);
    checks++;
    if (d[3:0] != 4'b1010) begin failures++; $display("status after run %h", d); end
    // results
    for (int l = 0; l < 4; l++)
      for (int p = 0; p < P; p++) begin
        logic [31:0] e;
        for (int w = 0; w < 32; w++) begin
          hr(dmem(oacc(l, p) + w), d);
          if (l == 0 || l == 3) e = acc[l][p][w];
          else if (w < 16) e = {16'(acc[l][p][2*w+1]), 16'(acc[l][p][2*w])};
          else e = '0;
          checks++;
          if (d !== e) begin failures++; $display("layer %0d pixel %0d acc word %0d: %h vs %h", l, p, w, d, e); end
        end
        for (int w = 0; w < (1 << REQLG[l]); w++) begin
          e = '0;
          for (int m = 0; m < 32; m++) begin
            int q;
            case (l)
              0, 3: begin
                q = acc[l][p][m] >>> REQPAR[l];
                q = (q > 127) ? 127 : (q < -128) ? -128 : q;
                if (m / 4 == w) e[(m % 4)*8 +: 8] = 8'(q);
              end
              1: if (m / 16 == w)
                   e[(m % 16)*2 +: 2] = (acc[l][p][m] > 2) ? 2'b01 : (acc[l][p][m] < -2) ? 2'b11 : 2'b00;
              default: e[m] = (acc[l][p][m] >= 0);
            endcase
          end
          hr(dmem(oreq(l, p) + w), d);
          checks++;
          if (d !== e) begin failures++; $display("layer %0d pixel %0d requant word %0d: %h vs %h", l, p, w, d, e); end
        end
      end
    for (int p = 0; p < P; p++)
      for (int w = 0; w < 16; w++) begin
        logic [31:0] e;
        e = {16'(acc[1][p][2*w+1] + acc[2][p][2*w+1]), 16'(acc[1][p][2*w] + acc[2][p][2*w])};
        hr(dmem(ores(p) + w), d);
        checks++;
        if (d !== e) begin failures++; $display("residual pixel %0d word %0d: %h vs %h", p, w, d, e); end
      end
    // every mechanism must have occurred
    $display("program %0d instructions, %0d cycles running", prog.size(), cycles);
    $display("loop-buffer issues %0d, vMAC bcast %0d, vMAC per-lane %0d, vTMAC %0d, vBMAC %0d, vADD %0d, vOPS %0d",
             n_lb, n_vmac_b, n_vmac_v, n_vtmac, n_vbmac, n_vadd, n_vops);
    $display("narrow bank accesses %0d, full-width %0d, host held off %0d, frozen cycles %0d, irq %0d",
             n_narrow, n_wide, n_hold, n_frozen, n_irq);
    checks++; if (n_lb == 0)     failures++;
    checks++; if (n_vmac_b != P*STEPS[0]) failures++;
    checks++; if (n_vmac_v != P*STEPS[3]) failures++;
    checks++; if (n_vtmac != P*STEPS[1]) failures++;
    checks++; if (n_vbmac != P*STEPS[2]) failures++;
    checks++; if (n_vadd != P)  failures++;
    checks++; if (n_vops != 4*P) failures++;
    checks++; if (n_narrow == 0) failures++;
    checks++; if (n_wide == 0)   failures++;
    checks++; if (n_hold == 0)   failures++;
    checks++; if (n_frozen == 0) failures++;
    checks++; if (n_irq != 1)    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
