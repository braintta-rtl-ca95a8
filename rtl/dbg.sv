// dbg: debugger of the TTA core, as seen by the host processor.
//
// A small register block reached over the host bus. The host starts the
// core, may freeze it at any instruction boundary and resume it, and is
// interrupted when the program signals completion (HALT):
//   0x00 CTRL      write: bit0 start (pulse), bit1 halt (level), bit2 clear IRQ
//                  read : bit1 halt
//   0x04 STATUS    bit0 running, bit1 done, bit2 halted, bit3 irq
//   0x08 PC        instruction address being executed
//   0x0C CYCLES    cycles spent running since the last start
//   0x10 START_PC  first instruction executed after start
// irq rises in the cycle after the core's done flag rises and stays high
// until cleared or until the next start.
//
// Timing: register writes act at the clock edge; read data is returned on
// reg_rdata in the cycle after reg_re. The paper gives the debugger's
// role (halting the core, signalling completion to the host); the register
// map is this design's own.
module dbg #(
  parameter int unsigned AW = 12
) (
  input  logic          clk,
  input  logic          rst_n,
  // register port
  input  logic          reg_we,
  input  logic          reg_re,
  input  logic [2:0]    reg_addr,    // word index
  input  logic [31:0]   reg_wdata,
  output logic [31:0]   reg_rdata,
  // core side
  input  logic          running,
  input  logic          done,
  input  logic [AW-1:0] pc,
  output logic          start,
  output logic [AW-1:0] start_pc,
  output logic          halt,
  // to the host
  output logic          irq
);
  logic        done_q;
  logic [31:0] cycles;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      start     <= 1'b0;
      start_pc  <= '0;
      halt      <= 1'b0;
      irq       <= 1'b0;
      done_q    <= 1'b0;
      cycles    <= '0;
      reg_rdata <= '0;
    end else begin
      start  <= 1'b0;
      done_q <= done;
      if (done && !done_q) irq <= 1'b1;
      if (running)         cycles <= cycles + 1;
      if (reg_we) begin
        unique case (reg_addr)
          3'd0: begin
            start <= reg_wdata[0];
            halt  <= reg_wdata[1];
            if (reg_wdata[2] || reg_wdata[0]) irq <= 1'b0;
            if (reg_wdata[0]) cycles <= '0;
          end
          3'd4:    start_pc <= reg_wdata[AW-1:0];
          default: ;
        endcase
      end
      if (reg_re) begin
        unique case (reg_addr)
          3'd0:    reg_rdata <= {30'd0, halt, 1'b0};
          3'd1:    reg_rdata <= {28'd0, irq, halt, done, running};
          3'd2:    reg_rdata <= 32'(pc);
          3'd3:    reg_rdata <= cycles;
          3'd4:    reg_rdata <= 32'(start_pc);
          default: reg_rdata <= '0;
        endcase
      end
    end

endmodule
