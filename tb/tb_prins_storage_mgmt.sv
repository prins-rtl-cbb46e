// tb_prins_storage_mgmt: self-checking test of the storage path (3 modules of 4 rows).
// The module storage ports are modelled by arrays in this testbench. Writes and reads at every
// logical row address must reach module addr/4, row addr%4, and be acknowledged one cycle
// later; accesses while a kernel runs, and beyond the last row, must be refused (rej) without
// touching any module.
module tb_prins_storage_mgmt;
  import prins_pkg::*;
  localparam int NMOD = 3, ROWS = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, prins_busy, req, we, ack, rej;
  logic [3:0] addr;
  logic [ROW_W-1:0] wdata, rdata, st_wdata;
  logic [NMOD-1:0] st_we;
  logic [1:0] st_addr;
  logic [NMOD-1:0][ROW_W-1:0] st_rdata;
  logic [ROW_W-1:0] mods [NMOD][ROWS];
  logic [ROW_W-1:0] ref_rows [NMOD*ROWS];
  int checks = 0, failures = 0;

  prins_storage_mgmt #(.NMOD(NMOD), .ROWS(ROWS)) dut (.*);

  // behavioural storage ports of the modules
  always_comb for (int m = 0; m < NMOD; m++) st_rdata[m] = mods[m][st_addr];
  always_ff @(posedge clk) for (int m = 0; m < NMOD; m++) if (st_we[m]) mods[m][st_addr] <= st_wdata;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic access(bit w, int a, logic [ROW_W-1:0] d, bit expect_ok);
    @(negedge clk); req = 1; we = w; addr = 4'(a); wdata = d;
    @(negedge clk); req = 0;
    check(ack == expect_ok && rej == !expect_ok, $sformatf("ack/rej a=%0d", a));
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; prins_busy = 0; req = 0; we = 0; addr = '0; wdata = '0;
    for (int m = 0; m < NMOD; m++) for (int r = 0; r < ROWS; r++) mods[m][r] = '0;
    @(negedge clk); @(negedge clk); rst_n = 1;
    for (int a = 0; a < NMOD * ROWS; a++) begin
      ref_rows[a] = {8{$urandom}};
      access(1, a, ref_rows[a], 1);
    end
    for (int a = 0; a < NMOD * ROWS; a++)
      check(mods[a / ROWS][a % ROWS] == ref_rows[a], $sformatf("translation a=%0d", a));
    for (int a = 0; a < NMOD * ROWS; a++) begin
      access(0, a, '0, 1);
      check(rdata == ref_rows[a], $sformatf("read a=%0d", a));
    end
    // refused while busy
    prins_busy = 1;
    access(1, 5, '1, 0);
    check(mods[1][1] == ref_rows[5], "no write while busy");
    access(0, 6, '0, 0);
    prins_busy = 0;
    // refused beyond the last row
    access(1, 13, '1, 0);
    for (int a = 0; a < NMOD * ROWS; a++)
      check(mods[a / ROWS][a % ROWS] == ref_rows[a], $sformatf("untouched a=%0d", a));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
