// tb_prins_controller: self-checking test of the controller driving one 16-row RCAM module.
// Kernels are assembled with prins_asm_pkg and downloaded through the program port:
//   1. vector add S = A + B (4-bit fields in columns 0-3 and 4-7, sum in 8-11, carry in 12,
//      the layout of the paper's example): sums checked for every row, and the number of
//      compare and write commands seen on the array bus must be 8 + 8 per bit (plus setup);
//   2. histogram of an 8-bit field into the data buffer (COUNT, STB, loop with BNE);
//   3. if_match branches (BM / BNM), READ + GETK (the read field lands in the key register);
//   4. an undefined opcode must stop the kernel with err set.
module tb_prins_controller;
  import prins_pkg::*;
  import prins_asm_pkg::*;
  localparam int ROWS = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, start, prog_we, busy, done, err, any, cnt_valid;
  logic [PC_W-1:0] start_pc, prog_waddr;
  logic [REG_W-1:0] param, buf_rdata;
  instr_t prog_wdata;
  logic [BUF_AW-1:0] buf_raddr;
  logic [31:0] run_cycles;
  acmd_e acmd;
  logic [ROW_W-1:0] key, mask, rd_data, st_wdata, st_rdata;
  logic [4:0] cnt;
  logic st_we, chain_out, fm_out;
  logic [3:0] st_addr;
  int checks = 0, failures = 0, n_comp = 0, n_wr = 0;
  logic [3:0] a [ROWS], b [ROWS];
  logic [7:0] h [ROWS];

  prins_controller #(.CNT_W(5)) dut (.*);
  rcam_module #(.ROWS(ROWS)) u_mod (
    .clk, .rst_n, .cmd(acmd), .key, .mask, .chain_in(1'b0), .chain_out, .fm_in(1'b0), .fm_out,
    .any, .rd_data, .cnt_valid, .cnt, .st_we, .st_addr, .st_wdata, .st_rdata);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) begin
    if (acmd == ACMD_COMPARE) n_comp++;
    if (acmd == ACMD_WRITE)   n_wr++;
  end

  task automatic load_and_run(prog_t p, int max_cycles);
    foreach (p.code[i]) begin
      @(negedge clk); prog_we = 1; prog_waddr = PC_W'(i); prog_wdata = p.code[i];
    end
    @(negedge clk); prog_we = 0; start = 1; start_pc = '0;
    @(negedge clk); start = 0;
    for (int c = 0; c < max_cycles && busy; c++) @(negedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prog_t p;
    rst_n = 0; start = 0; prog_we = 0; start_pc = '0; prog_waddr = '0; prog_wdata = '0;
    param = 64'd7; buf_raddr = '0; st_we = 0; st_addr = '0; st_wdata = '0;
    @(negedge clk); @(negedge clk); rst_n = 1;
    // data: A in 0-3, B in 4-7, histogram field in 32-39
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      a[r] = 4'($urandom); b[r] = 4'($urandom); h[r] = 8'($urandom % 5);
      st_we = 1; st_addr = 4'(r); st_wdata = '0;
      st_wdata[3:0] = a[r]; st_wdata[7:4] = b[r]; st_wdata[11:8] = 4'($urandom); st_wdata[39:32] = h[r];
    end
    @(negedge clk); st_we = 0;

    // ---- 1. vector add -------------------------------------------------------------
    p = new();
    p.vec_add(0, 4, 8, 12, 4);
    p.halt();
    n_comp = 0; n_wr = 0;
    load_and_run(p, 5000);
    check(done && !err, "vec_add done");
    check(n_comp == 1 + 32 && n_wr == 1 + 32, $sformatf("compare/write count %0d/%0d", n_comp, n_wr));
    check(run_cycles == 32'(p.code.size()), $sformatf("one instruction per cycle: %0d vs %0d", run_cycles, p.code.size()));
    for (int r = 0; r < ROWS; r++) begin
      st_addr = 4'(r); #1;
      check({st_rdata[12], st_rdata[11:8]} == 5'(a[r]) + 5'(b[r]), $sformatf("sum row %0d", r));
    end

    // ---- 2. histogram --------------------------------------------------------------
    p = new();
    p.histogram(32, 8);
    p.halt();
    load_and_run(p, 5000);
    check(done && !err, "histogram done");
    for (int bin = 0; bin < 8; bin++) begin
      automatic int e = 0;
      for (int r = 0; r < ROWS; r++) if (h[r] == 8'(bin)) e++;
      buf_raddr = BUF_AW'(bin); #1;
      check(buf_rdata == 64'(e), $sformatf("bin %0d: %0d exp %0d", bin, buf_rdata, e));
    end

    // ---- 3. if_match branches, first_match, read, getk ------------------------------
    p = new();
    p.mclr(); p.setk(32, 8, 64'd200); p.comp();                // no row holds 200
    p.emit(mk(OP_BNM, 0, 0, 0, 0, 6));                          // taken
    p.emit(mk(OP_LDI, 3, 0, 0, 0, 0, 64'hBAD));
    p.emit(mk(OP_LDI, 3, 0, 0, 0, 0, 64'hBAD));
    p.emit(mk(OP_STB, 0, 3, 0, 0, 0, 64'd0));                  // @6: buf[r0=7] = r3 (0)
    p.mclr(); p.setk(32, 8, 64'(h[5])); p.comp();               // at least row 5 matches
    p.emit(mk(OP_BM, 0, 0, 0, 0, 13));                          // taken
    p.emit(mk(OP_LDI, 3, 0, 0, 0, 0, 64'hBAD));
    p.emit(mk(OP_FIRST));                                       // @13
    p.mclr(); p.setk(0, 8, 0); p.emit(mk(OP_READ));
    p.emit(mk(OP_GETK, 2, 0, 0, 8));                            // r2 = A/B byte of first match
    p.emit(mk(OP_STB, 0, 2, 0, 0, 0, 64'd1));                   // buf[8] = r2
    p.halt();
    load_and_run(p, 500);
    begin
      automatic int f = -1;
      for (int r = ROWS - 1; r >= 0; r--) if (h[r] == h[5]) f = r;
      buf_raddr = BUF_AW'(7); #1;
      check(buf_rdata == 64'd0, "BNM taken, r0 holds the data start parameter");
      buf_raddr = BUF_AW'(8); #1;
      check(buf_rdata == 64'({b[f], a[f]}), $sformatf("first_match + read: %h", buf_rdata));
    end

    // ---- 4. undefined opcode --------------------------------------------------------
    p = new();
    p.emit(mk(OP_NOP));
    begin instr_t bad; bad = '0; bad.op = op_e'(5'd31); p.emit(bad); end
    p.halt();
    load_and_run(p, 50);
    check(err && !done && !busy, "undefined opcode stops with err");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
