// tb_cu: self-checking test of the control unit.
// A small instruction memory model holds a script: each word carries its own
// address, a random tag and an action (loop, jump, call, conditional jump,
// halt) that the testbench turns into moves on the CU's ports while the
// word executes. The sequence of executed words is compared with the
// expected program order, including three passes of a 4-instruction loop
// body. Checked too: the loop body is fetched from memory only once, the
// return address of CALL, a debugger freeze in the middle of the loop that
// must not change the trace, and done after HALT.
module tb_cu;
  import tta_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, dbg_halt = 0;
  logic in2_we, trig;
  logic [OPC_W-1:0] opc;
  logic [31:0] in2, t, ra;
  logic imem_en;
  logic [11:0] imem_addr, pc;
  logic [255:0] imem_rdata, instr;
  logic exec, running, done, from_lb;
  int checks = 0, failures = 0;

  cu dut (.clk, .rst_n, .start, .start_pc (12'd0), .dbg_halt, .in2_we, .in2, .trig, .opc, .t, .ra,
          .imem_en, .imem_addr, .imem_rdata, .instr, .exec, .pc, .running, .done, .from_lb);

  always #5 clk = ~clk;

  // script words: [15:0] own address, [19:16] action, [51:20] t value, [255:52] tag
  localparam int A_NONE = 0, A_LOOP = 1, A_JUMP = 2, A_CALL = 3, A_JNZ0 = 4, A_JNZ1 = 5, A_HALT = 6;
  logic [255:0] mem [64];

  function automatic logic [255:0] word(input int a, input int act, input int tv);
    logic [255:0] w;
    for (int i = 0; i < 8; i++) w[i*32 +: 32] = $urandom;
    w[15:0] = 16'(a); w[19:16] = 4'(act); w[51:20] = 32'(tv);
    return w;
  endfunction

  always_ff @(posedge clk) if (imem_en) imem_rdata <= mem[imem_addr[5:0]];

  always_comb begin
    in2_we = 0; in2 = '0; trig = 0; opc = '0; t = instr[51:20];
    if (exec) unique case (int'(instr[19:16]))
      A_LOOP: begin trig = 1; opc = CU_LOOP; in2_we = 1; in2 = 3; end
      A_JUMP: begin trig = 1; opc = CU_JUMP; end
      A_CALL: begin trig = 1; opc = CU_CALL; end
      A_JNZ0: begin trig = 1; opc = CU_JNZ; in2_we = 1; in2 = 0; end
      A_JNZ1: begin trig = 1; opc = CU_JNZ; in2_we = 1; in2 = 7; end
      A_HALT: begin trig = 1; opc = CU_HALT; end
      default: ;
    endcase
  end

  int trace [$];
  int exp_trace [$] = '{0, 1, 2, 3, 4, 5, 2, 3, 4, 5, 2, 3, 4, 5, 6, 10, 20, 21, 30};
  int fetches = 0, lb_issues = 0, cyc = 0, frozen_exec = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (imem_en) fetches++;
    if (exec) begin
      trace.push_back(int'(pc));
      if (from_lb) lb_issues++;
      checks++;
      if (instr !== mem[pc[5:0]] || int'(instr[15:0]) != int'(pc)) begin
        failures++; $display("wrong instruction at pc %0d", pc);
      end
    end
    if (dbg_halt && exec) frozen_exec++;
  end

  initial begin
    for (int a = 0; a < 64; a++) mem[a] = word(a, A_NONE, 0);
    mem[1]  = word(1, A_LOOP, 4);
    mem[6]  = word(6, A_JUMP, 10);
    mem[10] = word(10, A_CALL, 20);
    mem[20] = word(20, A_JNZ0, 40);
    mem[21] = word(21, A_JNZ1, 30);
    mem[30] = word(30, A_HALT, 0);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    repeat (8) @(negedge clk);
    dbg_halt = 1;                      // freeze in the second loop pass
    repeat (5) @(negedge clk);
    dbg_halt = 0;
    wait (done);
    repeat (3) @(posedge clk);
    checks++;
    if (trace != exp_trace) begin
      failures++;
      $display("trace mismatch, %0d entries", trace.size());
      foreach (trace[i]) $write("%0d ", trace[i]);
      $display("");
    end
    checks++;
    if (lb_issues != 8) begin failures++; $display("loop buffer issued %0d", lb_issues); end
    checks++;                          // 19 executed, 8 from the buffer, plus start fetch
    if (fetches != 19 - 8) begin failures++; $display("fetches %0d", fetches); end
    checks++;
    if (ra != 11) begin failures++; $display("ra %0d", ra); end
    checks++;
    if (frozen_exec != 0 || running) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
