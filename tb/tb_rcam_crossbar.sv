// tb_rcam_crossbar: self-checking test of the RCAM crossbar.
// A 16-row, 32-column crossbar is filled through the storage port with random rows. Random
// key/mask pairs are compared and the match vector is checked against a reference model
// (including the all-zero mask, which must match every row); masked writes into random tag
// sets and masked reads of one-hot selected rows are checked against the same model.
module tb_rcam_crossbar;
  localparam int ROWS = 16, W = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [W-1:0] key, mask, rd_data, st_wdata, st_rdata;
  logic [ROWS-1:0] match, wr_sel, rd_sel;
  logic wr_en, st_we;
  logic [3:0] st_addr;
  logic [W-1:0] ref_mem [ROWS];
  int checks = 0, failures = 0;

  rcam_crossbar #(.ROWS(ROWS), .ROW_W(W)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; st_we = 0; wr_sel = '0; rd_sel = '0; key = '0; mask = '0; st_addr = '0; st_wdata = '0;
    // fill through the storage port; values drawn from a small alphabet so compares hit
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      st_we = 1; st_addr = 4'(r); st_wdata = {$urandom} & 32'h0F0F_0F0F;
      ref_mem[r] = st_wdata;
    end
    @(negedge clk); st_we = 0;
    for (int r = 0; r < ROWS; r++) begin
      st_addr = 4'(r); #1;
      check(st_rdata == ref_mem[r], $sformatf("storage read row %0d", r));
    end
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      case (t % 4)
        0: mask = '0;
        1: mask = 32'h0000_000F << (4 * ($urandom % 7));
        default: mask = $urandom;
      endcase
      key = (t % 3 == 0) ? ref_mem[$urandom % ROWS] : ($urandom & 32'h0F0F_0F0F);
      #1;
      for (int r = 0; r < ROWS; r++)
        check(match[r] == (((ref_mem[r] ^ key) & mask) == 0), $sformatf("match t=%0d r=%0d", t, r));
      // read one selected row through the mask
      rd_sel = '0; rd_sel[$urandom % ROWS] = 1'b1; #1;
      for (int r = 0; r < ROWS; r++)
        if (rd_sel[r]) check(rd_data == (ref_mem[r] & mask), $sformatf("read t=%0d", t));
      // masked write into a random tag set
      wr_sel = 16'($urandom); wr_en = 1;
      @(posedge clk); #1; wr_en = 0;
      for (int r = 0; r < ROWS; r++)
        if (wr_sel[r]) ref_mem[r] = (ref_mem[r] & ~mask) | (key & mask);
      for (int r = 0; r < ROWS; r++) begin
        st_addr = 4'(r); #1;
        check(st_rdata == ref_mem[r], $sformatf("after write t=%0d r=%0d", t, r));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
