// tb_tta_core: self-checking program-level test of the TTA core with
// behavioural instruction, data and parameter memories (small DMEM/PMEM).
// A program with random operands exercises: long immediates, scalar RFs,
// the three ALUs in parallel (sub, xor, mul, gt), the Boolean RF, a software
// loop closed by a conditional jump (JNZ), a hardware LOOP run from the loop
// buffer, CALL and return through the return address, vector loads from DMEM
// and PMEM, the vOPS extract / insert / ReLU / max operations, and scalar
// and full-width stores. Results are read from the DMEM model and compared
// with values computed here.
module tb_tta_core;
  import tta_pkg::*;
  import tb_asm_pkg::*;
  localparam int ROWS = 64;
  localparam int NB = 32;

  logic clk = 0, rst_n = 0, start = 0, dbg_halt = 0;
  logic running, done, exec, from_lb, imem_en;
  logic [IADDR_W-1:0] pc, imem_addr;
  logic [INSTR_W-1:0] imem_rdata;
  logic [NB-1:0] dmem_en, pmem_en;
  logic dmem_we, pmem_we;
  logic [5:0] dmem_row, pmem_row;
  logic [NB-1:0][31:0] dmem_wdata, pmem_wdata, dmem_rdata, pmem_rdata;
  int checks = 0, failures = 0, lb_issues = 0, cycles = 0;

  tta_core #(.NBANK(NB), .ROWS(ROWS), .LB_DEPTH(16)) dut (
    .clk, .rst_n, .start, .start_pc (12'd0), .dbg_halt,
    .running, .done, .pc, .exec, .from_lb,
    .imem_en, .imem_addr, .imem_rdata,
    .dmem_en, .dmem_we, .dmem_row, .dmem_wdata, .dmem_rdata,
    .pmem_en, .pmem_we, .pmem_row, .pmem_wdata, .pmem_rdata);

  // behavioural memories, synchronous read
  instr_t      prog [$];
  logic [31:0] dm [ROWS][NB];
  logic [31:0] pm [ROWS][NB];
  always_ff @(posedge clk) begin
    if (imem_en) imem_rdata <= (int'(imem_addr) < prog.size()) ? INSTR_W'(prog[imem_addr]) : '0;
    for (int b = 0; b < NB; b++) begin
      if (dmem_en[b]) begin
        if (dmem_we) dm[dmem_row][b] <= dmem_wdata[b];
        else         dmem_rdata[b]   <= dm[dmem_row][b];
      end
      if (pmem_en[b]) begin
        if (pmem_we) pm[pmem_row][b] <= pmem_wdata[b];
        else         pmem_rdata[b]   <= pm[pmem_row][b];
      end
    end
  end

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (running) cycles++;
    if (exec && from_lb) lb_issues++;
  end

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  logic [31:0] a, b, n, m, k, j, ins;
  int sub_at;

  task automatic gen_program();
    instr_t i;
    int loop_pc;
    // scalars and parallel ALU ops
    i = nop(); imm(i, a); prog.push_back(i);
    i = nop(); mv(i, 0, S_IMM, rf_d(0, 0)); imm(i, b); prog.push_back(i);
    i = nop(); mv(i, 0, S_IMM, rf_d(0, 1)); prog.push_back(i);
    i = nop();
    mv(i, 0, rf_s(0, 1), alu_in2(0)); mv(i, 1, rf_s(0, 0), alu_t(0), ALU_SUB);
    mv(i, 2, rf_s(0, 1), alu_in2(1)); mv(i, 3, rf_s(0, 0), alu_t(1), ALU_XOR);
    mv(i, 4, rf_s(0, 1), alu_in2(2)); mv(i, 5, rf_s(0, 0), alu_t(2), ALU_MUL);
    prog.push_back(i);
    i = nop();
    mv(i, 0, alu_s(0), rf_d(1, 0)); mv(i, 1, alu_s(1), rf_d(2, 0)); mv(i, 2, alu_s(2), D_LSUD_IN2);
    mv(i, 3, rf_s(0, 0), alu_t(0), ALU_GT); imm(i, 32'd8);
    prog.push_back(i);
    i = nop(); mv(i, 0, S_IMM, D_LSUD_T, LSU_ST); mv(i, 1, alu_s(0), D_BOOL); prog.push_back(i);   // mul -> word 2
    i = nop(); mv(i, 0, rf_s(1, 0), D_LSUD_IN2); mv(i, 1, S_ZERO, D_LSUD_T, LSU_ST); imm(i, 32'd4); prog.push_back(i);
    i = nop(); mv(i, 0, rf_s(2, 0), D_LSUD_IN2); mv(i, 1, S_IMM, D_LSUD_T, LSU_ST); imm(i, 32'd12); prog.push_back(i);
    i = nop(); mv(i, 0, S_BOOL, D_LSUD_IN2); mv(i, 1, S_IMM, D_LSUD_T, LSU_ST); imm(i, 32'd1); prog.push_back(i);
    // software loop: RF2.r1 = n down to 1, RF1.r2 += RF2.r1, JNZ back
    i = nop(); mv(i, 0, S_IMM, rf_d(0, 2)); imm(i, n); prog.push_back(i);
    i = nop(); mv(i, 0, S_IMM, rf_d(2, 1)); mv(i, 1, S_ZERO, rf_d(1, 2)); prog.push_back(i);
    loop_pc = prog.size();
    i = nop();
    mv(i, 0, rf_s(0, 2), alu_in2(0)); mv(i, 1, rf_s(2, 1), alu_t(0), ALU_SUB);
    mv(i, 2, rf_s(2, 1), alu_in2(1)); mv(i, 3, rf_s(1, 2), alu_t(1), ALU_ADD);
    imm(i, 32'(loop_pc));
    prog.push_back(i);
    i = nop();
    mv(i, 0, alu_s(0), rf_d(2, 1)); mv(i, 1, alu_s(1), rf_d(1, 2));
    mv(i, 2, alu_s(0), D_CU_IN2); mv(i, 3, S_IMM, D_CU_T, CU_JNZ);
    prog.push_back(i);
    i = nop(); mv(i, 0, rf_s(1, 2), D_LSUD_IN2); imm(i, 32'd16); prog.push_back(i);
    i = nop(); mv(i, 0, S_IMM, D_LSUD_T, LSU_ST); imm(i, 32'd3); prog.push_back(i);
    // hardware loop: RF2.r3 += 3, m times, body of 2 instructions
    i = nop(); mv(i, 0, S_IMM, alu_in2(2)); mv(i, 1, S_ZERO, rf_d(2, 3)); imm(i, m); prog.push_back(i);
    i = nop(); mv(i, 0, S_IMM, rf_d(0, 4)); imm(i, 32'd2); prog.push_back(i);
    i = nop(); mv(i, 0, rf_s(0, 4), D_CU_IN2); mv(i, 1, S_IMM, D_CU_T, CU_LOOP); prog.push_back(i);
    i = nop(); mv(i, 0, rf_s(2, 3), alu_t(2), ALU_ADD); prog.push_back(i);
    i = nop(); mv(i, 0, alu_s(2), rf_d(2, 3)); prog.push_back(i);
    i = nop(); mv(i, 0, rf_s(2, 3), D_LSUD_IN2); imm(i, 32'd20); prog.push_back(i);
    i = nop(); mv(i, 0, S_IMM, D_LSUD_T, LSU_ST); imm(i, 32'(sub_at)); prog.push_back(i);
    // call the vector subroutine, then halt
    i = nop(); mv(i, 0, S_IMM, D_CU_T, CU_CALL); prog.push_back(i);
    i = nop(); mv(i, 0, S_ZERO, D_CU_T, CU_HALT); prog.push_back(i);
    while (prog.size() < sub_at) prog.push_back(nop());
    // subroutine: v0 = DMEM row 2, v1 = PMEM row 1
    i = nop(); mv(i, 0, S_CU, rf_d(0, 7)); imm(i, 32'd256); prog.push_back(i);
    i = nop(); mv(i, 0, S_IMM, D_LSUD_T, 4'd5); imm(i, 32'd128); prog.push_back(i);
    i = nop(); mv(i, 0, S_IMM, D_LSUP_T, 4'd5); imm(i, k); prog.push_back(i);
    i = nop(); mv(i, 6, S_LSUD, vrf_d(0, 0)); mv(i, 0, S_IMM, rf_d(0, 5)); imm(i, j); prog.push_back(i);
    i = nop(); mv(i, 6, S_LSUP, vrf_d(1, 0)); mv(i, 0, S_IMM, rf_d(0, 6)); imm(i, ins); prog.push_back(i);
    // extract lane k of v0 and store it at byte j; insert ins into lane j/4 of v0
    i = nop();
    mv(i, 6, vrf_s(0, 0), D_VOPS_T, VOP_EXTRACT); mv(i, 0, rf_s(0, 5), D_VOPS_IN2);
    mv(i, 1, S_IMM, rf_d(0, 3)); imm(i, j / 4);
    prog.push_back(i);
    i = nop();
    mv(i, 7, S_VOPS, D_LSUD_IN2); mv(i, 0, rf_s(0, 6), D_LSUD_T, LSU_ST);
    mv(i, 6, vrf_s(0, 0), D_VOPS_T, VOP_INSERT); mv(i, 1, S_IMM, D_VOPS_IN2); mv(i, 2, rf_s(0, 3), D_VOPS_IN1);
    imm(i, 32'd512);
    prog.push_back(i);
    i = nop(); mv(i, 6, S_VOPS, D_LSUD_IN2); mv(i, 0, S_IMM, D_LSUD_T, LSU_ST | 4'd5); prog.push_back(i);
    // relu(v0) -> row 5, max(v0, v1) -> row 6
    i = nop(); mv(i, 6, vrf_s(0, 0), D_VOPS_T, VOP_RELU32); imm(i, 32'd640); prog.push_back(i);
    i = nop();
    mv(i, 6, S_VOPS, D_LSUD_IN2); mv(i, 0, S_IMM, D_LSUD_T, LSU_ST | 4'd5);
    mv(i, 7, vrf_s(0, 0), D_VOPS_T, VOP_MAX32); mv(i, 8, vrf_s(1, 0), D_VOPS_IN1);
    imm(i, 32'd768);
    prog.push_back(i);
    i = nop(); mv(i, 6, S_VOPS, D_LSUD_IN2); mv(i, 0, S_IMM, D_LSUD_T, LSU_ST | 4'd5); prog.push_back(i);
    i = nop(); mv(i, 0, rf_s(0, 7), D_CU_T, CU_JUMP); prog.push_back(i);
  endtask

  initial begin
    int steps;
    logic [31:0] v0 [32], v1 [32];
    a = $urandom; b = $urandom;
    n = $urandom_range(3, 10); m = $urandom_range(2, 9);
    k = $urandom_range(0, 31);
    j = 32'($urandom_range(8, 31) * 4);       // byte address of the extract target in row 0, past the scalars
    ins = $urandom;
    sub_at = 40;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < NB; c++) begin dm[r][c] = $urandom; pm[r][c] = $urandom; end
    for (int c = 0; c < NB; c++) begin v0[c] = dm[2][c]; v1[c] = pm[1][c]; end
    gen_program();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    steps = 0;
    while (!done && steps < 2000) begin @(posedge clk); steps++; end
    @(negedge clk);
    check(32'(done), 1, "done");
    check(dm[0][0], a - b, "sub");
    check(dm[0][1], a ^ b, "xor");
    check(dm[0][2], a * b, "mul");
    check(dm[0][3], {31'd0, $signed(a) > $signed(b)}, "gt -> bool RF");
    check(dm[0][4], n * (n + 1) / 2, "JNZ loop sum");
    check(dm[0][5], 3 * m, "hardware loop");
    check(32'(lb_issues), 2 * (m - 1), "loop buffer issues");
    check(dm[0][j / 4], v0[k], "extract");
    for (int c = 0; c < NB; c++) begin
      check(dm[4][c], (c == int'(j / 4)) ? ins : v0[c], "insert");
      check(dm[5][c], $signed(v0[c]) < 0 ? 32'd0 : v0[c], "relu");
      check(dm[6][c], $signed(v0[c]) > $signed(v1[c]) ? v0[c] : v1[c], "max");
    end
    $display("cycles running: %0d, loop buffer issues: %0d", cycles, lb_issues);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
