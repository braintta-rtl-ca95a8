// tb_alu: self-checking test of the scalar ALU: every opcode on random
// operands, plus the operand-register behaviour (in2 kept between
// triggers, and bypassed when written together with the trigger).
module tb_alu;
  import tta_pkg::*;
  logic clk = 0, rst_n = 0, trig = 0, in2_we = 0;
  logic [OPC_W-1:0] opc;
  logic [31:0] in2, in1t, out;
  int checks = 0, failures = 0;

  alu dut (.clk, .rst_n, .in2_we, .in2, .trig, .opc, .in1t, .out);

  always #5 clk = ~clk;

  function automatic logic [31:0] model(input logic [3:0] op, input logic [31:0] a, b);
    case (op)
      ALU_ADD:  return a + b;
      ALU_SUB:  return a - b;
      ALU_AND:  return a & b;
      ALU_OR:   return a | b;
      ALU_XOR:  return a ^ b;
      ALU_SHL:  return a << (b % 32);
      ALU_SHR:  return a >> (b % 32);
      ALU_SHRA: return 32'(int'($signed(a)) >>> (b % 32));
      ALU_MUL:  return 32'(longint'(a) * longint'(b));
      ALU_EQ:   return (a == b) ? 1 : 0;
      ALU_GT:   return (int'($signed(a)) > int'($signed(b))) ? 1 : 0;
      ALU_GTU:  return (a > b) ? 1 : 0;
      ALU_MIN:  return (int'($signed(a)) < int'($signed(b))) ? a : b;
      ALU_MAX:  return (int'($signed(a)) > int'($signed(b))) ? a : b;
      default:  return a;
    endcase
  endfunction

  initial begin
    logic [31:0] held;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 150; n++) begin
      logic [31:0] e;
      @(negedge clk);
      opc = 4'(n % 15);
      in1t = $urandom;
      in2_we = (n % 4 != 3);       // every fourth op reuses the held in2
      if (in2_we) begin
        in2 = (n % 8 == 0) ? in1t : $urandom;
        held = in2;
      end else in2 = $urandom;     // not written: must be ignored
      trig = 1;
      e = model(opc, in1t, held);
      @(posedge clk); #1;
      checks++;
      if (out !== e) begin failures++; $display("mismatch op %0d opc %0d: %h vs %h", n, opc, out, e); end
    end
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
