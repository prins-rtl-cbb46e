// prins_asm_pkg: microcode assembler for PRINS testbenches.
//
// Functions that encode single instructions (prins_pkg::instr_t) and a small program builder
// (a queue of instructions plus helpers) that emits the associative kernels used by the tests:
//   * vector add S = A + B, bit-serial, eight compare/write pairs per bit (full-adder truth
//     table, Fig. 6 style: inputs c, b_i, a_i; outputs c, s_i);
//   * in-place accumulate ACC += X, optionally only in rows whose condition column is 1, which
//     gives the shift-and-add multiplier (four compare/write pairs per bit, because the other
//     four full-adder entries leave the row unchanged);
//   * histogram over an 8-bit field (compare + reduction per bin);
//   * a lookup of any function of a small field through its full truth table.
// Entry order matters when a write changes a column that later compares read: an entry whose
// output state equals the input pattern of another entry is issued after that entry.
package prins_asm_pkg;
  import prins_pkg::*;

  function automatic instr_t mk(op_e op, int rd = 0, int rs = 0, int lo = 0, int len = 0,
                                int tgt = 0, logic [63:0] imm = '0);
    instr_t i;
    i.op  = op;
    i.rd  = RIDX_W'(rd);
    i.rs  = RIDX_W'(rs);
    i.lo  = COL_AW'(lo);
    i.len = LEN_W'(len);
    i.tgt = PC_W'(tgt);
    i.imm = imm;
    return i;
  endfunction

  class prog_t;
    instr_t code[$];
    int     n_compare, n_write;

    function int here();
      return code.size();
    endfunction
    function void emit(instr_t i);
      if (i.op == OP_COMP)  n_compare++;
      if (i.op == OP_WRITE) n_write++;
      code.push_back(i);
    endfunction
    function void patch_tgt(int at, int tgt);
      code[at].tgt = PC_W'(tgt);
    endfunction

    function void mclr();                          emit(mk(OP_MCLR)); endfunction
    function void setk(int lo, int len, logic [63:0] v); emit(mk(OP_SETK, 0, 0, lo, len, 0, v)); endfunction
    function void setkr(int lo, int len, int rs);  emit(mk(OP_SETKR, 0, rs, lo, len)); endfunction
    function void comp();                          emit(mk(OP_COMP)); endfunction
    function void write();                         emit(mk(OP_WRITE)); endfunction
    function void halt();                          emit(mk(OP_HALT)); endfunction

    // tag every row (empty mask matches everything)
    function void tag_all();
      mclr(); comp();
    endfunction

    // one truth-table step: compare pattern (cols/vals), write pattern (cols/vals)
    function void step(int ccol[$], int cval[$], int wcol[$], int wval[$]);
      mclr();
      foreach (ccol[k]) setk(ccol[k], 1, 64'(cval[k]));
      comp();
      mclr();
      foreach (wcol[k]) setk(wcol[k], 1, 64'(wval[k]));
      write();
    endfunction

    // S = A + B over m bits (S has m bits, final carry left in column c)
    function void vec_add(int a, int b, int s, int c, int m);
      // entries as (cin, b, a) -> (cout, s); 000 before 100, 111 before 011
      int ord[8] = '{3'b000, 3'b001, 3'b010, 3'b100, 3'b101, 3'b110, 3'b111, 3'b011};
      tag_all(); mclr(); setk(c, 1, 0); write();
      for (int i = 0; i < m; i++) begin
        foreach (ord[e]) begin
          int cin, bb, aa, sum;
          cin = (ord[e] >> 2) & 1; bb = (ord[e] >> 1) & 1; aa = ord[e] & 1;
          sum = cin + bb + aa;
          step('{c, b + i, a + i}, '{cin, bb, aa}, '{c, s + i}, '{sum >> 1, sum & 1});
        end
      end
    endfunction

    // ACC[acc +: alen] += X[x +: xlen] in rows where column cond is 1 (cond < 0: all rows).
    // Column c is the carry and must be 0 on entry; it is 0 again on exit.
    function void acc_add(int acc, int alen, int x, int xlen, int c, int cond = -1);
      // (c, x, acc) -> (c', acc'); only the four entries that change a row are issued
      int ord[4] = '{3'b011, 3'b010, 3'b100, 3'b101};
      for (int i = 0; i < alen; i++) begin
        if (i < xlen) begin
          foreach (ord[e]) begin
            int ci, xi, ai, sum;
            ci = (ord[e] >> 2) & 1; xi = (ord[e] >> 1) & 1; ai = ord[e] & 1;
            sum = ci + xi + ai;
            if (cond >= 0) step('{c, x + i, acc + i, cond}, '{ci, xi, ai, 1}, '{c, acc + i}, '{sum >> 1, sum & 1});
            else           step('{c, x + i, acc + i},       '{ci, xi, ai},    '{c, acc + i}, '{sum >> 1, sum & 1});
          end
        end else begin
          // carry propagation: (c, acc) 10 -> 01 first, then 11 -> 10
          if (cond >= 0) begin
            step('{c, acc + i, cond}, '{1, 0, 1}, '{c, acc + i}, '{0, 1});
            step('{c, acc + i, cond}, '{1, 1, 1}, '{c, acc + i}, '{1, 0});
          end else begin
            step('{c, acc + i}, '{1, 0}, '{c, acc + i}, '{0, 1});
            step('{c, acc + i}, '{1, 1}, '{c, acc + i}, '{1, 0});
          end
        end
      end
      // drop a carry out of the top bit
      tag_all(); mclr(); setk(c, 1, 0); write();
    endfunction

    // P[p +: 2m] = A[a +: m] * B[b +: m] (shift-and-add, m*m bit steps); c is a carry column
    function void mult(int a, int b, int p, int c, int m);
      tag_all(); mclr(); setk(p, 2 * m, 0); setk(c, 1, 0); write();
      for (int j = 0; j < m; j++) acc_add(p + j, m + 1, a, m, c, b + j);
    endfunction

    // any function of a small field by its full truth table: for every input value v,
    // compare IN == v and write OUT = vals[v] into the matching rows (2^len steps)
    function void lut(int in_lo, int in_len, int out_lo, int out_len, logic [63:0] vals[$]);
      for (int v = 0; v < (1 << in_len); v++) begin
        mclr(); setk(in_lo, in_len, 64'(v)); comp();
        mclr(); setk(out_lo, out_len, vals[v]); write();
      end
    endfunction

    // histogram of the 8-bit field at lo: buf[bin] = number of rows whose field equals bin
    function void histogram(int lo, int nbins);
      int top;
      emit(mk(OP_LDI, 1, 0, 0, 0, 0, 0));            // r1 = bin
      top = here();
      emit(mk(OP_LDI, 2, 0, 0, 0, 0, 0));            // r2 = count
      mclr(); setkr(lo, 8, 1); comp();
      emit(mk(OP_COUNT, 2));                          // r2 += tags
      emit(mk(OP_STB, 1, 2));                         // buf[r1] = r2
      emit(mk(OP_ADDI, 1, 0, 0, 0, 0, 1));
      emit(mk(OP_BNE, 1, 0, 0, 0, top, 64'(nbins)));
    endfunction
  endclass

endpackage
