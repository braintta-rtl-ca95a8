// cu: control unit of the TTA core: instruction fetch, program flow and
// the hardware loop buffer.
//
// Fetch: the instruction memory is read synchronously; the address for the
// next instruction is computed in the cycle the current one executes, so
// jumps take effect immediately (no delay slots). The CU is itself an FU
// with an operand port in2 and a trigger port t:
//   CU_JUMP  pc <= t              CU_CALL  ra <= pc+1, pc <= t
//   CU_JNZ   if in2 != 0: pc <= t CU_HALT  stop and raise done
//   CU_LOOP  repeat the t instructions that follow in2 times
// Loop buffer: during the first pass of a LOOP body the executed
// instructions are copied into a LB_DEPTH-entry buffer; later passes are
// issued from the buffer with the instruction memory disabled, which is
// where the paper's instruction-fetch saving comes from. One loop level;
// no jumps inside a buffered body; a count of 0 runs the body once.
//
// Debug: dbg_halt freezes the core: the instruction being executed is kept
// in a hold register, nothing is issued (exec low), and execution resumes
// with that instruction when dbg_halt is released. start (re)starts
// execution at start_pc and clears done.
//
// The existence of fetch/decode and of a hardware loop buffer is the
// paper's; the operation set, loop semantics and buffer size are this
// design's own.
module cu
  import tta_pkg::*;
#(
  parameter int unsigned LB_DEPTH = 16,
  parameter int unsigned AW       = IADDR_W,
  parameter int unsigned IW       = INSTR_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [AW-1:0]     start_pc,
  input  logic              dbg_halt,
  // FU ports
  input  logic              in2_we,
  input  logic [SW-1:0]     in2,
  input  logic              trig,
  input  logic [OPC_W-1:0]  opc,
  input  logic [SW-1:0]     t,
  output logic [SW-1:0]     ra,
  // instruction memory
  output logic              imem_en,
  output logic [AW-1:0]     imem_addr,
  input  logic [IW-1:0]     imem_rdata,
  // to the datapath
  output logic [IW-1:0]     instr,
  output logic              exec,
  output logic [AW-1:0]     pc,
  output logic              running,
  output logic              done,
  output logic              from_lb        // instr comes from the loop buffer
);
  localparam int unsigned LBW = $clog2(LB_DEPTH);

  logic          valid;
  logic          use_hold;
  logic [IW-1:0] hold_q;
  logic [IW-1:0] lb [LB_DEPTH];
  logic [LBW-1:0] lb_idx_q;
  logic          lb_on, lb_filled;
  logic [AW-1:0] lb_start, lb_end;
  logic [SW-1:0] lb_cnt;
  logic [SW-1:0] b_q, b;

  assign b     = in2_we ? in2 : b_q;
  assign instr = use_hold ? hold_q : (from_lb ? lb[lb_idx_q] : imem_rdata);
  assign exec  = running && valid && !dbg_halt;

  // ------------------------------------------------------- next address
  logic          halt_op, take, loop_back, lb_next;
  logic [AW-1:0] next_pc;

  always_comb begin
    halt_op   = trig && opc == CU_HALT;
    take      = trig && (opc == CU_JUMP || opc == CU_CALL ||
                         (opc == CU_JNZ && b != '0));
    loop_back = lb_on && pc == lb_end && lb_cnt > 1;
    if (take)           next_pc = AW'(t);
    else if (loop_back) next_pc = lb_start;
    else                next_pc = pc + 1'b1;
    // issue from the buffer once the body has been recorded
    lb_next = lb_on && !take && (loop_back ||
              (lb_filled && pc != lb_end && next_pc >= lb_start && next_pc <= lb_end));
  end

  assign imem_en   = start || (exec && !halt_op && !lb_next);
  assign imem_addr = start ? start_pc : next_pc;

  // ------------------------------------------------------------ state
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      running   <= 1'b0;
      valid     <= 1'b0;
      done      <= 1'b0;
      pc        <= '0;
      ra        <= '0;
      b_q       <= '0;
      use_hold  <= 1'b0;
      hold_q    <= '0;
      from_lb   <= 1'b0;
      lb_idx_q  <= '0;
      lb_on     <= 1'b0;
      lb_filled <= 1'b0;
      lb_start  <= '0;
      lb_end    <= '0;
      lb_cnt    <= '0;
    end else if (start) begin
      running   <= 1'b1;
      valid     <= 1'b1;
      done      <= 1'b0;
      pc        <= start_pc;
      use_hold  <= 1'b0;
      from_lb   <= 1'b0;
      lb_on     <= 1'b0;
      lb_filled <= 1'b0;
    end else begin
      if (in2_we) b_q <= in2;
      if (running && valid && dbg_halt && !use_hold) begin
        hold_q   <= instr;
        use_hold <= 1'b1;
      end
      if (exec) begin
        use_hold <= 1'b0;
        if (halt_op) begin
          running <= 1'b0;
          valid   <= 1'b0;
          done    <= 1'b1;
        end
        pc       <= next_pc;
        from_lb  <= lb_next;
        lb_idx_q <= LBW'(next_pc - lb_start);
        if (trig && opc == CU_CALL) ra <= SW'(pc) + 1;
        // loop bookkeeping
        if (lb_on && pc == lb_end) begin
          lb_cnt    <= lb_cnt - 1;
          lb_filled <= 1'b1;
          if (lb_cnt <= 1) lb_on <= 1'b0;
        end
        if (trig && opc == CU_LOOP) begin
          lb_on     <= 1'b1;
          lb_filled <= 1'b0;
          lb_start  <= pc + 1'b1;
          lb_end    <= pc + AW'(t);
          lb_cnt    <= (b == '0) ? SW'(1) : b;
        end
      end
    end

  // record the first pass of a loop body
  always_ff @(posedge clk)
    if (exec && lb_on && !lb_filled && pc >= lb_start && pc <= lb_end)
      lb[LBW'(pc - lb_start)] <= instr;

  a_loop_len: assert property (@(posedge clk)
    (exec && trig && opc == CU_LOOP) |-> (t >= 1 && t <= LB_DEPTH))
    else $error("cu: loop body length out of range");

endmodule
