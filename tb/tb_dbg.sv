// tb_dbg: self-checking test of the debugger register block: start pulse
// and START_PC, halt level, status and PC read-back, cycle counter,
// completion interrupt raised on done and cleared by software.
module tb_dbg;
  logic clk = 0, rst_n = 0;
  logic reg_we = 0, reg_re = 0;
  logic [2:0] reg_addr = '0;
  logic [31:0] reg_wdata = '0, reg_rdata;
  logic running = 0, done = 0, start, halt, irq;
  logic [11:0] pc = '0, start_pc;
  int checks = 0, failures = 0;

  dbg dut (.clk, .rst_n, .reg_we, .reg_re, .reg_addr, .reg_wdata, .reg_rdata,
           .running, .done, .pc, .start, .start_pc, .halt, .irq);

  always #5 clk = ~clk;

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk); reg_we = 1; reg_addr = 3'(a); reg_wdata = d;
    @(negedge clk); reg_we = 0;
  endtask
  task automatic rd(input int a, output logic [31:0] d);
    @(negedge clk); reg_re = 1; reg_addr = 3'(a);
    @(negedge clk); reg_re = 0; d = reg_rdata;
  endtask
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int starts = 0;
  always @(posedge clk) if (rst_n && start) starts++;

  initial begin
    logic [31:0] d;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wr(4, 32'd123);
    check(start_pc == 12'd123, "start_pc");
    rd(4, d); check(d == 123, "START_PC read");
    wr(0, 32'd1);
    @(negedge clk);
    check(starts == 1 && !start, "one start pulse");
    running = 1;
    repeat (10) @(negedge clk);
    wr(0, 32'd2);
    check(halt, "halt set");
    rd(1, d); check(d[2:0] == 3'b101, "status running+halted");
    wr(0, 32'd0);
    check(!halt, "halt released");
    pc = 12'd77;
    rd(2, d); check(d == 77, "pc read");
    rd(3, d); check(d >= 15 && d <= 20, "cycle counter");
    @(negedge clk); running = 0; done = 1;
    @(negedge clk);
    check(irq, "irq on done");
    rd(1, d); check(d[3:0] == 4'b1010, "status done+irq");
    wr(0, 32'd4);
    check(!irq, "irq cleared");
    repeat (3) @(negedge clk);
    check(!irq, "irq stays low while done stays high");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
