// prins_e2e_test: end-to-end test of a PRINS device, driven only through its host bus.
//
// The host side loads data rows through the storage window, downloads associative kernels
// (assembled with prins_asm_pkg), starts them, polls the status register and reads results
// from the data buffer or back from the rows. Kernels, each checked against a reference
// computed here:
//   1. vector add S = A + B of 8-bit fields in every row (bit-serial, 8 compare/write
//      pairs per bit);
//   2. 256-bin histogram of 32-bit samples on bits 31..24 (compare + reduction tree per bin);
//   3. dot product of every row's 2-element 4-bit vector with a hyperplane vector H
//      (H broadcast into a temporary column, associative multiply, associative add);
//   3b. squared Euclidean distance of the same vectors to a centroid (a 16-entry truth table
//      per element gives (x - h)^2, then associative accumulate);
//   4. SpMV C = A*B with A stored one nonzero per row (broadcast of B by column-index
//      compare, associative multiply, per-row reduction with the tag counter);
//   5. serial BFS on the Table-2 row layout (first_match, read, if_match branches);
//   6. the tag daisy chain: a tag shifted across every module boundary and out of the device;
//   7. a row write refused while a kernel runs, and an undefined instruction (exception).
// Every mechanism (compare, write, read, first_match, shift, count, taken if_match branch,
// loop branch, accepted and refused row access, exception, cascade output) is counted;
// one that never happens counts as a failure. The device is instantiated by the testbench
// that uses this module; NMOD and ROWS must match it. The probes only feed the counters.
module prins_e2e_test
  import prins_pkg::*;
  import prins_asm_pkg::*;
#(
  parameter int unsigned NMOD   = 3,
  parameter int unsigned ROWS   = 16,
  parameter int unsigned BFS_V  = 12,
  parameter int unsigned SPMV_N = 6
) (
  output logic        clk,
  output logic        rst_n,
  output logic [15:0] host_addr,
  output logic        host_we,
  output logic        host_re,
  output logic [63:0] host_wdata,
  input  logic [63:0] host_rdata,
  input  logic        host_rvalid,
  output logic        cascade_tag_in,
  output logic        cascade_fm_in,
  input  logic        cascade_tag_out,
  input  logic        cascade_fm_out,
  // probes into the device, for counting mechanisms only
  input  acmd_e       p_acmd,
  input  km_op_e      p_km_op,
  input  logic        p_running,
  input  instr_t      p_ir,
  input  logic [63:0] p_rd_val,
  input  logic        p_any,
  input  logic        p_row_ack,
  input  logic        p_row_rej
);
  localparam int unsigned NR = NMOD * ROWS;

  initial clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ---- mechanism counters -------------------------------------------------------------
  int n_compare = 0, n_write = 0, n_read = 0, n_first = 0, n_shift = 0, n_count = 0;
  int n_ifmatch_taken = 0, n_loop = 0, n_row_ok = 0, n_row_refused = 0, n_exception = 0;
  int n_cascade_out = 0;
  always @(posedge clk) if (rst_n) begin
    case (p_acmd)
      ACMD_COMPARE: n_compare++;
      ACMD_WRITE:   n_write++;
      ACMD_FIRST:   n_first++;
      ACMD_SHIFT:   n_shift++;
      ACMD_COUNT:   n_count++;
      default: ;
    endcase
    if (p_km_op == KM_LOADR) n_read++;
    if (p_running) begin
      if ((p_ir.op == OP_BM && p_any) || (p_ir.op == OP_BNM && !p_any)) n_ifmatch_taken++;
      if (p_ir.op == OP_BNE && p_rd_val != p_ir.imm) n_loop++;
      if (p_ir.op > OP_JMP) n_exception++;
    end
    if (p_row_ack) n_row_ok++;
    if (p_row_rej) n_row_refused++;
    if (cascade_tag_out) n_cascade_out++;
  end

  // ---- host bus ----------------------------------------------------------------------------
  task automatic wr(logic [15:0] a, logic [63:0] d);
    @(negedge clk); host_addr = a; host_wdata = d; host_we = 1'b1; host_re = 1'b0;
    @(posedge clk); #1; host_we = 1'b0;
  endtask
  task automatic rd(logic [15:0] a, output logic [63:0] d);
    @(negedge clk); host_addr = a; host_re = 1'b1; host_we = 1'b0;
    @(posedge clk); #1; host_re = 1'b0;
    @(posedge clk); #1;
    d = host_rdata;
  endtask
  task automatic row_write(int a, logic [ROW_W-1:0] v);
    for (int i = 0; i < ROW_W / 64; i++) wr(16'h0008 + 16'(i), v[64*i +: 64]);
    wr(16'h0006, 64'(a));
    wr(16'h0000, 64'h2);
  endtask
  task automatic row_read(int a, output logic [ROW_W-1:0] v);
    logic [63:0] d;
    wr(16'h0006, 64'(a));
    wr(16'h0000, 64'h4);
    @(posedge clk); #1;
    for (int i = 0; i < ROW_W / 64; i++) begin rd(16'h0008 + 16'(i), d); v[64*i +: 64] = d; end
  endtask
  task automatic load_prog(prog_t p);
    check(p.code.size() <= PROG_DEPTH, "kernel fits the program memory");
    foreach (p.code[i]) begin
      wr(16'h000C, p.code[i][63:0]);
      wr(16'h4000 + 16'(i), 64'(p.code[i] >> 64));
    end
  endtask
  // start at 0, poll status; returns the status word and the kernel's cycle count
  task automatic run(output logic [63:0] status, output int cycles);
    logic [63:0] d;
    wr(16'h0003, 64'd0);
    wr(16'h0000, 64'h1);
    do begin
      repeat (20) @(posedge clk);
      rd(16'h0001, status);
    end while (status[0]);
    rd(16'h0005, d);
    cycles = int'(d);
  endtask
  task automatic buf_read(int a, output logic [63:0] d);
    rd(16'h8000 + 16'(a), d);
  endtask

  // ---- watchdog ----------------------------------------------------------------------------
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- test ---------------------------------------------------------------------------------
  logic [7:0]  va_a [NR], va_b [NR];
  logic [31:0] sample [NR];
  logic [3:0]  dp_x [NR][2];
  logic [3:0]  dp_h [2];

  initial begin
    logic [63:0] st, d;
    logic [ROW_W-1:0] row;
    int cyc;
    prog_t p;
    rst_n = 1'b0; host_addr = '0; host_we = 1'b0; host_re = 1'b0; host_wdata = '0;
    cascade_tag_in = 1'b0; cascade_fm_in = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ================= data for kernels 1-3 =============================================
    // A[7:0] B[15:8] S[23:16] C24 | sample[63:32] | x0[67:64] x1[71:68] H[75:72]
    // P[83:76] DP[93:84] carry 94
    dp_h[0] = 4'($urandom); dp_h[1] = 4'($urandom);
    for (int r = 0; r < NR; r++) begin
      va_a[r] = 8'($urandom); va_b[r] = 8'($urandom);
      sample[r] = $urandom;
      if (r % 5 == 0) sample[r][31:24] = 8'd7;            // one crowded bin
      dp_x[r][0] = 4'($urandom); dp_x[r][1] = 4'($urandom);
      if (r == 0) begin va_a[r] = 8'hFF; va_b[r] = 8'h01; dp_x[r][0] = 4'hF; dp_x[r][1] = 4'hF; end
      row = {ROW_W{1'b1}};                                 // unused columns hold ones
      row[7:0] = va_a[r]; row[15:8] = va_b[r];
      row[63:32] = sample[r];
      row[67:64] = dp_x[r][0]; row[71:68] = dp_x[r][1];
      row_write(r, row);
    end

    // ================= 1. vector add ====================================================
    p = new();
    p.vec_add(0, 8, 16, 24, 8);
    p.halt();
    load_prog(p);
    run(st, cyc);
    check(st[1] && !st[2], "vector add completed");
    check(p.n_compare == 1 + 8 * 8 && p.n_write == 1 + 8 * 8, "8 compare/write pairs per bit");
    check(cyc == p.code.size(), $sformatf("vector add: one instruction per cycle (%0d)", cyc));
    for (int r = 0; r < NR; r++) begin
      row_read(r, row);
      check({row[24], row[23:16]} == 9'(va_a[r]) + 9'(va_b[r]), $sformatf("sum row %0d", r));
      check(row[15:0] == {va_b[r], va_a[r]} && row[63:32] == sample[r], "operands unchanged");
    end
    $display("vector add: %0d rows, %0d cycles", NR, cyc);

    // ================= 2. histogram =====================================================
    p = new();
    p.histogram(56, 256);
    p.halt();
    load_prog(p);
    run(st, cyc);
    check(st[1] && !st[2], "histogram completed");
    for (int bin = 0; bin < 256; bin++) begin
      automatic int e = 0;
      for (int r = 0; r < NR; r++) if (sample[r][31:24] == 8'(bin)) e++;
      buf_read(bin, d);
      check(d == 64'(e), $sformatf("bin %0d: %0d expected %0d", bin, d, e));
    end
    $display("histogram: %0d samples, 256 bins, %0d cycles", NR, cyc);

    // ================= 3. dot product ====================================================
    p = new();
    p.tag_all(); p.mclr(); p.setk(84, 10, 0); p.setk(94, 1, 0); p.write();
    for (int i = 0; i < 2; i++) begin
      p.tag_all(); p.mclr(); p.setk(72, 4, 64'(dp_h[i])); p.write();   // H_i to every row
      p.mult(64 + 4 * i, 72, 76, 94, 4);                               // P = x_i * H_i
      p.acc_add(84, 10, 76, 8, 94);                                    // DP += P
    end
    p.halt();
    load_prog(p);
    run(st, cyc);
    check(st[1] && !st[2], "dot product completed");
    for (int r = 0; r < NR; r++) begin
      row_read(r, row);
      check(row[93:84] == 10'(dp_x[r][0] * dp_h[0] + dp_x[r][1] * dp_h[1]),
            $sformatf("dot product row %0d: %0d", r, row[93:84]));
    end
    $display("dot product: %0d vectors, %0d cycles", NR, cyc);

    // ================= 3b. Euclidean distance ============================================
    // squared distance of every row's 2-element vector x to the centroid H:
    // SQ[167:160] = (x_i - H_i)^2 through a 16-entry truth table, ED[176:168] += SQ, carry 177
    begin
      logic [63:0] sq[$];
      p = new();
      p.tag_all(); p.mclr(); p.setk(168, 9, 0); p.setk(177, 1, 0); p.write();
      for (int i = 0; i < 2; i++) begin
        sq = {};
        for (int v = 0; v < 16; v++) sq.push_back(64'((v - int'(dp_h[i])) * (v - int'(dp_h[i]))));
        p.lut(64 + 4 * i, 4, 160, 8, sq);
        p.acc_add(168, 9, 160, 8, 177);
      end
      p.halt();
      load_prog(p);
      run(st, cyc);
      check(st[1] && !st[2], "Euclidean distance completed");
      for (int r = 0; r < NR; r++) begin
        automatic int e = 0;
        for (int i = 0; i < 2; i++) e += (int'(dp_x[r][i]) - int'(dp_h[i])) ** 2;
        row_read(r, row);
        check(row[176:168] == 9'(e), $sformatf("squared distance row %0d: %0d expected %0d", r, row[176:168], e));
      end
      $display("Euclidean distance: %0d vectors, %0d cycles", NR, cyc);
    end

    // ================= 4. SpMV ===========================================================
    // eA[3:0] iA[15:8] k[23:16] eB[27:24] PR[35:28] carry 36; spare rows hold iA = k = 0xFF
    begin
      automatic int nnz = 0;
      logic [3:0] a_m [SPMV_N][SPMV_N];
      logic [3:0] b_v [SPMV_N];
      for (int k = 0; k < int'(SPMV_N); k++) begin
        b_v[k] = 4'($urandom);
        for (int j = 0; j < int'(SPMV_N); j++) begin
          a_m[k][j] = (($urandom % 3 == 0) || k == j) ? 4'(1 + $urandom % 15) : 4'd0;
        end
      end
      for (int r = NR - 1, k = 0, j = 0; r >= 0; r--) begin
        // matrix nonzeros are scattered from the bottom of the device upwards
        row = {ROW_W{1'b1}};
        while (k < int'(SPMV_N) && a_m[k][j] == 0) begin j++; if (j == int'(SPMV_N)) begin j = 0; k++; end end
        if (k < int'(SPMV_N)) begin
          row[3:0] = a_m[k][j]; row[15:8] = 8'(j); row[23:16] = 8'(k);
          nnz++;
          j++; if (j == int'(SPMV_N)) begin j = 0; k++; end
        end
        row_write(r, row);
      end
      check(nnz <= int'(NR), "matrix fits");
      p = new();
      for (int j = 0; j < int'(SPMV_N); j++) begin
        p.mclr(); p.setk(8, 8, 64'(j)); p.comp();                 // i_B against all i_A
        p.mclr(); p.setk(24, 4, 64'(b_v[j])); p.write();           // e_B into matching rows
      end
      p.mult(0, 24, 28, 36, 4);                                    // PR = e_A * e_B
      p.emit(mk(OP_LDI, 1, 0, 0, 0, 0, 0));
      begin
        automatic int top = p.here();
        p.emit(mk(OP_LDI, 2, 0, 0, 0, 0, 0));
        for (int b = 0; b < 8; b++) begin
          p.mclr(); p.setkr(16, 8, 1); p.setk(28 + b, 1, 1); p.comp();
          p.emit(mk(OP_COUNT, 2, 0, b));                           // r2 += count << b
        end
        p.emit(mk(OP_STB, 1, 2));
        p.emit(mk(OP_ADDI, 1, 0, 0, 0, 0, 1));
        p.emit(mk(OP_BNE, 1, 0, 0, 0, top, 64'(SPMV_N)));
      end
      p.halt();
      load_prog(p);
      run(st, cyc);
      check(st[1] && !st[2], "SpMV completed");
      for (int k = 0; k < int'(SPMV_N); k++) begin
        automatic int e = 0;
        for (int j = 0; j < int'(SPMV_N); j++) e += a_m[k][j] * b_v[j];
        buf_read(k, d);
        check(d == 64'(e), $sformatf("C[%0d] = %0d expected %0d", k, d, e));
      end
      $display("SpMV: %0dx%0d, %0d nonzeros, %0d cycles", SPMV_N, SPMV_N, nnz, cyc);
    end

    // ================= 5. BFS ============================================================
    // Table 2: vertex[47:0] successor[95:48] visited 96 visited_from 97 pred[145:98] vdist[153:146]
    begin
      automatic int ne = 0;
      int adj [BFS_V][$];
      int vdist [BFS_V];
      int q[$];
      int lvl_top, loop_top, next_at, done_at, bnm1, bnm2;
      for (int v = 0; v < int'(BFS_V); v++) begin
        adj[v].push_back((v + 1) % int'(BFS_V));             // a ring keeps it connected
        for (int e = 0; e < 2; e++) adj[v].push_back($urandom % BFS_V);
      end
      // reference distances
      for (int v = 0; v < int'(BFS_V); v++) vdist[v] = -1;
      vdist[0] = 0; q.push_back(0);
      while (q.size() > 0) begin
        automatic int u = q.pop_front();
        foreach (adj[u][i]) if (vdist[adj[u][i]] < 0) begin vdist[adj[u][i]] = vdist[u] + 1; q.push_back(adj[u][i]); end
      end
      // rows: one per edge, placed from the top
      for (int v = 0, r = 0; v < int'(BFS_V); v++) begin
        foreach (adj[v][i]) begin
          row = '0;
          row[47:0] = 48'(v) + 48'h1000_0000_0000; row[95:48] = 48'(adj[v][i]) + 48'h1000_0000_0000;
          row[96] = (v == 0); row[97] = 1'b0; row[153:146] = (v == 0) ? 8'd0 : 8'hFF;
          row_write(r, row);
          r++; ne++;
        end
      end
      for (int r = ne; r < int'(NR); r++) begin
        row = '0; row[47:0] = 48'hFFFF_FFFF_FFFF; row[95:48] = 48'hFFFF_FFFF_FFFF;
        row[96] = 1'b1; row[153:146] = 8'hFE;
        row_write(r, row);
      end
      p = new();
      p.emit(mk(OP_LDI, 1, 0, 0, 0, 0, 0));                   // r1 = j
      p.emit(mk(OP_LDI, 3, 0, 0, 0, 0, 1));                   // r3 = j + 1
      lvl_top = p.here();
      p.mclr(); p.setkr(146, 8, 1); p.comp();
      bnm1 = p.here(); p.emit(mk(OP_BNM));                     // no vertex at level j: done
      loop_top = p.here();
      p.mclr(); p.setkr(146, 8, 1); p.setk(97, 1, 0); p.comp();
      bnm2 = p.here(); p.emit(mk(OP_BNM));                     // level j exhausted: j++
      p.emit(mk(OP_FIRST));
      p.mclr(); p.setk(97, 1, 1); p.write();                   // visited_from = 1
      p.mclr(); p.setk(0, 48, 0); p.setk(48, 48, 0); p.emit(mk(OP_READ));
      p.emit(mk(OP_GETK, 0, 0, 0, 48));                        // r0 = vertex
      p.emit(mk(OP_GETK, 2, 0, 48, 48));                       // r2 = successor
      p.mclr(); p.setkr(0, 48, 2); p.setk(96, 1, 0); p.comp(); // unvisited rows of successor
      p.mclr(); p.setkr(146, 8, 3); p.setkr(98, 48, 0); p.setk(96, 1, 1); p.write();
      p.emit(mk(OP_JMP, 0, 0, 0, 0, loop_top));
      next_at = p.here();
      p.emit(mk(OP_ADDI, 1, 0, 0, 0, 0, 1));
      p.emit(mk(OP_ADDI, 3, 0, 0, 0, 0, 1));
      p.emit(mk(OP_JMP, 0, 0, 0, 0, lvl_top));
      done_at = p.here();
      p.halt();
      p.patch_tgt(bnm1, done_at);
      p.patch_tgt(bnm2, next_at);
      load_prog(p);
      run(st, cyc);
      check(st[1] && !st[2], "BFS completed");
      for (int r = 0; r < ne; r++) begin
        automatic int v, pr;
        row_read(r, row);
        v = int'(row[47:0] - 48'h1000_0000_0000);
        check(int'(row[153:146]) == vdist[v], $sformatf("BFS distance of %0d: %0d expected %0d", v, row[153:146], vdist[v]));
        check(row[96] == 1'b1 && row[97] == 1'b1, "every edge row visited and expanded");
        if (v != 0) begin
          automatic bit ok = 0;
          pr = int'(row[145:98] - 48'h1000_0000_0000);
          if (pr >= 0 && pr < int'(BFS_V) && vdist[pr] == vdist[v] - 1)
            foreach (adj[pr][i]) if (adj[pr][i] == v) ok = 1;
          check(ok, $sformatf("BFS predecessor of %0d", v));
        end
      end
      $display("BFS: %0d vertices, %0d edges, %0d cycles", BFS_V, ne, cyc);
    end

    // ================= 6. daisy chain across modules ======================================
    // tag the last row of every module, shift once: the tag lands in the first row of the
    // next module (the last module's tag leaves through cascade_tag_out); mark the new rows
    for (int r = 0; r < int'(NR); r++) begin
      row = '0; row[15:0] = 16'(r); row_write(r, row);
    end
    p = new();
    p.mclr(); p.setk(16, 8, 0); p.comp();                     // tag all rows, clear marks
    p.write();
    for (int m = 0; m < int'(NMOD); m++) begin
      p.mclr(); p.setk(0, 16, 64'(m * ROWS + ROWS - 1)); p.comp();
      p.emit(mk(OP_SHIFT));
      p.mclr(); p.setk(16, 8, 64'(m + 1)); p.write();
    end
    p.halt();
    load_prog(p);
    run(st, cyc);
    check(st[1] && !st[2], "shift kernel completed");
    for (int r = 0; r < int'(NR); r++) begin
      automatic int e = (r % ROWS == 0 && r != 0) ? r / ROWS : 0;
      row_read(r, row);
      check(int'(row[23:16]) == e, $sformatf("shifted tag mark row %0d: %0d expected %0d", r, row[23:16], e));
    end

    // ================= 7. refused row access, exception ===================================
    p = new();
    p.emit(mk(OP_LDI, 1, 0, 0, 0, 0, 0));
    p.emit(mk(OP_ADDI, 1, 0, 0, 0, 0, 1));
    p.emit(mk(OP_BNE, 1, 0, 0, 0, 1, 64'd400));
    p.halt();
    load_prog(p);
    wr(16'h0003, 64'd0);
    wr(16'h0000, 64'h1);
    row = '1;
    row_write(3, row);                                         // kernel still running
    repeat (2) @(posedge clk);
    rd(16'h0001, st);
    check(st[0] && st[4] && !st[3], $sformatf("row write refused while busy, status %0h", st));
    do begin repeat (20) @(posedge clk); rd(16'h0001, st); end while (st[0]);
    row_read(3, row);
    check(row[15:0] == 16'd3 && st[1], "refused write left the row alone");
    p = new();
    p.emit(mk(OP_NOP));
    begin instr_t bad; bad = '0; bad.op = op_e'(5'd30); p.emit(bad); end
    p.halt();
    load_prog(p);
    run(st, cyc);
    check(st[2] && !st[1], "undefined instruction raises the exception bit");

    // ================= mechanisms ==========================================================
    $display("mechanisms: compare=%0d write=%0d read=%0d first_match=%0d shift=%0d count=%0d",
             n_compare, n_write, n_read, n_first, n_shift, n_count);
    $display("            if_match_taken=%0d loop=%0d row_ok=%0d row_refused=%0d exception=%0d cascade_out=%0d",
             n_ifmatch_taken, n_loop, n_row_ok, n_row_refused, n_exception, n_cascade_out);
    check(n_compare > 0, "compare happened");
    check(n_write > 0, "write happened");
    check(n_read > 0, "read happened");
    check(n_first > 0, "first_match happened");
    check(n_shift > 0, "shift happened");
    check(n_count > 0, "reduction happened");
    check(n_ifmatch_taken > 0, "if_match branch happened");
    check(n_loop > 0, "loop branch happened");
    check(n_row_ok > 0, "row access happened");
    check(n_row_refused > 0, "refused row access happened");
    check(n_exception > 0, "exception happened");
    check(n_cascade_out > 0, "cascade output happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
