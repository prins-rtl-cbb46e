// prins_controller: the PRINS controller, which runs associative microcode on the RCAM modules.
//
// The host downloads a kernel of associative primitives into the program memory (prog_we),
// then pulses start with the kernel's first address; the data start address is passed in r0.
// The controller then fetches one instruction per clock (prins_pkg::instr_t) and
//   * sets the key and mask registers (SETK, SETKR, MCLR) that drive all modules' bit lines,
//   * issues the associative primitives to all modules at once: compare, write, read (the
//     masked field of the top-most tagged row goes to the key register), first_match and the
//     tag daisy-chain shift,
//   * branches on if_match (BM / BNM) and on its small register file (LDI, ADDI, BNE, JMP),
//   * starts the reduction tree (COUNT) and waits for its result, adding count << lo to a
//     register, which is the normalisation of bit-serial reductions (count of tagged rows
//     with bit j set, weighted by 2^j),
//   * stores results into the data buffer (STB), which the host reads through buf_raddr.
// Timing: every instruction takes one cycle, except COUNT, which takes 1 + cnt latency cycles
// (the device's two tree pipelines). Tags change at the end of the COMPARE cycle, so a branch
// on if_match or a READ may follow directly. HALT ends the kernel (done); an undefined opcode
// ends it with err set. status: busy while running; run_cycles counts the cycles of the last
// kernel. The primitives follow the paper; the instruction set around them, the register
// file, the data-buffer size and all timing are this design's choices.
module prins_controller
  import prins_pkg::*;
#(
  parameter int unsigned CNT_W = 13
) (
  input  logic               clk,
  input  logic               rst_n,
  // host side
  input  logic               start,
  input  logic [PC_W-1:0]    start_pc,
  input  logic [REG_W-1:0]   param,
  input  logic               prog_we,
  input  logic [PC_W-1:0]    prog_waddr,
  input  instr_t             prog_wdata,
  input  logic [BUF_AW-1:0]  buf_raddr,
  output logic [REG_W-1:0]   buf_rdata,
  output logic               busy,
  output logic               done,
  output logic               err,
  output logic [31:0]        run_cycles,
  // array side
  output acmd_e              acmd,
  output logic [ROW_W-1:0]   key,
  output logic [ROW_W-1:0]   mask,
  input  logic               any,
  input  logic [ROW_W-1:0]   rd_data,
  input  logic               cnt_valid,
  input  logic [CNT_W-1:0]   cnt
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_WAIT} state_e;

  state_e              state;
  logic [PC_W-1:0]     pc;
  logic [REG_W-1:0]    regs [NREGS];
  logic [REG_W-1:0]    dbuf [BUF_DEPTH];
  instr_t              prog [PROG_DEPTH];
  instr_t              ir;
  km_op_e              km_op;
  logic [REG_W-1:0]    km_val;
  logic                legal;

  assign ir = prog[pc];
  assign legal = (ir.op <= OP_JMP);

  // ---- program memory and data buffer -----------------------------------------------------
  always_ff @(posedge clk) begin
    if (prog_we) prog[prog_waddr] <= prog_wdata;
  end
  assign buf_rdata = dbuf[buf_raddr];

  // ---- key / mask registers ---------------------------------------------------------------
  always_comb begin
    km_op  = KM_NONE;
    km_val = ir.imm;
    if (state == S_RUN) begin
      unique case (ir.op)
        OP_MCLR:  km_op = KM_MCLR;
        OP_SETK:  km_op = KM_SETF;
        OP_SETKR: begin km_op = KM_SETF; km_val = regs[ir.rs]; end
        OP_READ:  km_op = KM_LOADR;
        default:  km_op = KM_NONE;
      endcase
    end
  end

  prins_key_mask u_km (
    .clk     (clk),
    .rst_n   (rst_n),
    .op      (km_op),
    .lo      (ir.lo),
    .len     (ir.len),
    .val     (km_val),
    .rd_data (rd_data),
    .key     (key),
    .mask    (mask)
  );

  // ---- array command ----------------------------------------------------------------------
  always_comb begin
    acmd = ACMD_NONE;
    if (state == S_RUN) begin
      unique case (ir.op)
        OP_COMP:  acmd = ACMD_COMPARE;
        OP_WRITE: acmd = ACMD_WRITE;
        OP_FIRST: acmd = ACMD_FIRST;
        OP_SHIFT: acmd = ACMD_SHIFT;
        OP_COUNT: acmd = ACMD_COUNT;
        default:  acmd = ACMD_NONE;
      endcase
    end
  end

  // ---- sequencing -------------------------------------------------------------------------
  logic [REG_W-1:0] key_field;
  assign key_field = REG_W'(key >> ir.lo) & REG_W'(field_mask('0, ir.len));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      pc         <= '0;
      done       <= 1'b0;
      err        <= 1'b0;
      run_cycles <= '0;
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (start) begin
            state      <= S_RUN;
            pc         <= start_pc;
            done       <= 1'b0;
            err        <= 1'b0;
            run_cycles <= '0;
            regs[0]    <= param;
            for (int i = 1; i < NREGS; i++) regs[i] <= '0;
          end
        end
        S_RUN: begin
          run_cycles <= run_cycles + 32'd1;
          pc         <= pc + PC_W'(1);
          if (!legal) begin
            state <= S_IDLE;
            err   <= 1'b1;
          end else begin
            unique case (ir.op)
              OP_HALT: begin state <= S_IDLE; done <= 1'b1; end
              OP_GETK: regs[ir.rd] <= key_field;
              OP_COUNT: begin pc <= pc; state <= S_WAIT; end
              OP_LDI:  regs[ir.rd] <= ir.imm;
              OP_ADDI: regs[ir.rd] <= regs[ir.rd] + ir.imm;
              OP_BNE:  if (regs[ir.rd] != ir.imm) pc <= ir.tgt;
              OP_BM:   if (any)  pc <= ir.tgt;
              OP_BNM:  if (!any) pc <= ir.tgt;
              OP_JMP:  pc <= ir.tgt;
              default: ;
            endcase
          end
        end
        S_WAIT: begin
          run_cycles <= run_cycles + 32'd1;
          if (cnt_valid) begin
            regs[ir.rd] <= regs[ir.rd] + (REG_W'(cnt) << ir.lo);
            pc          <= pc + PC_W'(1);
            state       <= S_RUN;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_RUN && legal && ir.op == OP_STB) begin
      dbuf[BUF_AW'(regs[ir.rd] + ir.imm)] <= regs[ir.rs];
    end
  end

  assign busy = (state != S_IDLE);

  // A tree result may only arrive while the controller waits for one.
  a_cnt_expected : assert property (@(posedge clk) disable iff (!rst_n)
                                    cnt_valid |-> state == S_WAIT);

endmodule
