// tb_prins_host_if: self-checking test of the memory-mapped host interface.
// The controller and storage management are modelled in this testbench. Checked: register
// write/read-back; the start strobe with kernel start address and data start parameter;
// program download assembling {wdata, PROG_LO} into one instruction; data-buffer reads;
// status bits; a row write (ROW_DATA words to the storage request) and a row read (the row
// returned by storage lands in ROW_DATA), and the refused flag.
module tb_prins_host_if;
  import prins_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, we, re, rvalid, k_start, prog_we, k_busy, k_done, k_err;
  logic [15:0] addr;
  logic [63:0] wdata, rdata;
  logic [PC_W-1:0] k_start_pc, prog_waddr;
  logic [REG_W-1:0] k_param, buf_rdata;
  instr_t prog_wdata;
  logic [BUF_AW-1:0] buf_raddr;
  logic [31:0] k_cycles;
  logic st_req, st_we, st_ack, st_rej;
  logic [11:0] st_addr;
  logic [ROW_W-1:0] st_wdata, st_rdata;
  int checks = 0, failures = 0, n_start = 0, n_prog = 0;
  logic [ROW_W-1:0] row;
  instr_t last_prog;
  logic [PC_W-1:0] last_paddr, last_spc;
  logic [63:0] last_param;
  logic last_st_we;
  logic [11:0] last_st_addr;
  logic [ROW_W-1:0] last_st_wdata;
  bit refuse = 0;

  prins_host_if #(.LAW(12)) dut (.*);

  // controller / storage models
  assign buf_rdata = {52'h5A5A_5A5A_5A5A_5, 4'h0, buf_raddr};
  always @(posedge clk) begin
    st_ack <= 1'b0; st_rej <= 1'b0;
    if (k_start) begin n_start++; last_spc <= k_start_pc; last_param <= k_param; end
    if (prog_we) begin n_prog++; last_prog <= prog_wdata; last_paddr <= prog_waddr; end
    if (st_req) begin
      last_st_we <= st_we; last_st_addr <= st_addr; last_st_wdata <= st_wdata;
      if (refuse) st_rej <= 1'b1; else st_ack <= 1'b1;
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic wr(logic [15:0] a, logic [63:0] d);
    @(negedge clk); addr = a; wdata = d; we = 1; re = 0;
    @(negedge clk); we = 0;
  endtask
  task automatic rd(logic [15:0] a, output logic [63:0] d);
    @(negedge clk); addr = a; re = 1; we = 0;
    @(negedge clk); re = 0;
    check(rvalid, "rvalid");
    d = rdata;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] d;
    instr_t ins;
    rst_n = 0; we = 0; re = 0; addr = '0; wdata = '0; st_rdata = '0;
    k_busy = 0; k_done = 0; k_err = 0; k_cycles = 32'd1234;
    @(negedge clk); @(negedge clk); rst_n = 1;
    // parameter registers
    wr(16'h0002, 64'h42); wr(16'h0003, 64'h10); wr(16'h0004, 64'h1234_5678_9ABC);
    rd(16'h0002, d); check(d == 64'h42, "KERNEL_ID");
    rd(16'h0003, d); check(d == 64'h10, "KERNEL_START");
    rd(16'h0004, d); check(d == 64'h1234_5678_9ABC, "DATA_START");
    rd(16'h0005, d); check(d == 64'd1234, "RUN_CYCLES");
    // start
    wr(16'h0000, 64'h1);
    check(n_start == 1 && last_spc == PC_W'(16) && last_param == 64'h1234_5678_9ABC, "start strobe");
    // program download
    ins = '0; ins.op = OP_SETK; ins.lo = 8'd40; ins.len = 7'd12; ins.tgt = 12'h155; ins.imm = 64'hDEAD_BEEF_0123_4567;
    wr(16'h000C, 64'(ins));
    wr(16'h4000 + 16'd77, 64'(ins >> 64));
    check(n_prog == 1 && last_paddr == PC_W'(77) && last_prog == ins, "program word");
    // buffer read
    rd(16'h8000 + 16'd9, d); check(d == {52'h5A5A_5A5A_5A5A_5, 4'h0, 8'd9}, "buffer read");
    // status
    k_busy = 1; rd(16'h0001, d); check(d[2:0] == 3'b001, "status busy");
    k_busy = 0; k_done = 1; rd(16'h0001, d); check(d[2:0] == 3'b010, "status done");
    k_err = 1; rd(16'h0001, d); check(d[2], "status exception");
    // row write
    for (int i = 0; i < ROW_W / 64; i++) begin row[64*i +: 64] = {$urandom, $urandom}; wr(16'h0008 + 16'(i), row[64*i +: 64]); end
    wr(16'h0006, 64'd300);
    wr(16'h0000, 64'h2);
    check(last_st_we && last_st_addr == 12'd300 && last_st_wdata == row, "row write request");
    rd(16'h0001, d); check(d[4:3] == 2'b01, "row write accepted");
    // row read
    for (int i = 0; i < ROW_W / 32; i++) st_rdata[32*i +: 32] = $urandom;
    wr(16'h0000, 64'h4);
    check(!last_st_we, "row read request");
    for (int i = 0; i < ROW_W / 64; i++) begin rd(16'h0008 + 16'(i), d); check(d == st_rdata[64*i +: 64], "row read data"); end
    // refused access
    refuse = 1; wr(16'h0000, 64'h2); @(negedge clk);
    rd(16'h0001, d); check(d[4:3] == 2'b10, "row access refused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
