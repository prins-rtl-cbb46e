// tb_rcam_module: self-checking test of one RCAM module (16 rows).
// Rows are loaded through the storage port. Random compares are followed by checks of
// if_match, of the read data (masked top-most tagged row), of the tag count (which must
// arrive exactly log2(16) = 4 cycles after COUNT), of masked writes into the tagged rows,
// of first_match with and without a tag in an earlier module, and of the daisy-chain shift
// (chain_in enters row 0, the last row's tag leaves on chain_out). Tag positions after
// first_match and shift are checked through a marker written into the tagged rows.
module tb_rcam_module;
  import prins_pkg::*;
  localparam int ROWS = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, chain_in, chain_out, fm_in, fm_out, any, cnt_valid, st_we;
  acmd_e cmd;
  logic [ROW_W-1:0] key, mask, rd_data, st_wdata, st_rdata;
  logic [4:0] cnt;
  logic [3:0] st_addr;
  logic [ROW_W-1:0] ref_mem [ROWS];
  logic [ROWS-1:0] ref_tag;
  int checks = 0, failures = 0;

  rcam_module #(.ROWS(ROWS)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int first_idx(logic [ROWS-1:0] v);
    for (int r = 0; r < ROWS; r++) if (v[r]) return r;
    return -1;
  endfunction

  task automatic issue(acmd_e c);
    @(negedge clk); cmd = c; @(posedge clk); #1; cmd = ACMD_NONE;
  endtask

  // the tags are internal: write a marker byte into the tagged rows (checked against the
  // reference at the final row read-back) and check if_match and the read row at once
  task automatic mark_tagged(logic [7:0] v, string what);
    int f;
    check(any == (|ref_tag), {what, " if_match"});
    @(negedge clk);
    mask = '0; mask[255:248] = '1; key[255:248] = v;
    issue(ACMD_WRITE);
    for (int r = 0; r < ROWS; r++) if (ref_tag[r]) ref_mem[r][255:248] = v;
    f = first_idx(ref_tag);
    #1;
    if (f >= 0) check(rd_data == (ref_mem[f] & mask), {what, " read"});
    else        check(rd_data == '0, {what, " read none"});
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; cmd = ACMD_NONE; key = '0; mask = '0; chain_in = 0; fm_in = 0;
    st_we = 0; st_addr = '0; st_wdata = '0;
    @(negedge clk); @(negedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      st_we = 1; st_addr = 4'(r);
      st_wdata = '0; st_wdata[7:0] = 8'($urandom % 4); st_wdata[63:32] = $urandom;
      ref_mem[r] = st_wdata;
    end
    @(negedge clk); st_we = 0;
    for (int t = 0; t < 60; t++) begin
      int f, n, lat;
      // compare field [7:0] against a random small value
      @(negedge clk);
      mask = '0; mask[7:0] = 8'hFF; key = '0; key[7:0] = 8'($urandom % 4);
      issue(ACMD_COMPARE);
      for (int r = 0; r < ROWS; r++) ref_tag[r] = (ref_mem[r][7:0] == key[7:0]);
      check(any == (|ref_tag), "if_match");
      // read word [63:32] of the first tagged row
      mask = '0; mask[63:32] = '1; #1;
      f = first_idx(ref_tag);
      if (f >= 0) check(rd_data == (ref_mem[f] & mask), "read first tagged row");
      else        check(rd_data == '0, "read with no tag");
      // count
      n = $countones(ref_tag);
      @(negedge clk); cmd = ACMD_COUNT; @(posedge clk); #1; cmd = ACMD_NONE;
      lat = 0;
      while (!cnt_valid && lat < 20) begin @(posedge clk); #1; lat++; end
      check(cnt == 5'(n), $sformatf("count %0d exp %0d", cnt, n));
      check(lat == 3, $sformatf("count latency %0d", lat + 1));
      // write a random value to field [127:96] of the tagged rows
      @(negedge clk);
      mask = '0; mask[127:96] = '1; key[127:96] = $urandom;
      issue(ACMD_WRITE);
      for (int r = 0; r < ROWS; r++) if (ref_tag[r]) ref_mem[r] = (ref_mem[r] & ~mask) | (key & mask);
      // first_match, with a tag in an earlier module every third round
      fm_in = (t % 3 == 2);
      issue(ACMD_FIRST);
      if (fm_in) ref_tag = '0;
      else if (f >= 0) begin ref_tag = '0; ref_tag[f] = 1'b1; end
      mark_tagged(8'(t), "first_match");
      check(fm_out == (fm_in | (|ref_tag)), "fm_out");
      fm_in = 0;
      // shift twice through the daisy chain
      for (int k = 0; k < 2; k++) begin
        chain_in = 1'($urandom);
        ref_tag = {ref_tag[ROWS-2:0], chain_in};
        issue(ACMD_SHIFT);
        check(chain_out == ref_tag[ROWS-1], "shift chain_out");
        mark_tagged(8'($urandom), "shift");
      end
    end
    // storage read-back of every row after the associative writes
    for (int r = 0; r < ROWS; r++) begin
      st_addr = 4'(r); #1;
      check(st_rdata == ref_mem[r], $sformatf("row %0d", r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
