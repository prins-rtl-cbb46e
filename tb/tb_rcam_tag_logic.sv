// tb_rcam_tag_logic: self-checking test of the tag column.
// Random match vectors are sampled by COMPARE; FIRST must keep only the top-most tag (and
// none when fm_in says a tag is set in an earlier module); SHIFT must move every tag one
// row down and take chain_in into row 0; any, fm_out, chain_out and first_sel are checked
// against a reference model after every step.
module tb_rcam_tag_logic;
  import prins_pkg::*;
  localparam int ROWS = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, chain_in, fm_in, chain_out, fm_out, any;
  acmd_e cmd;
  logic [ROWS-1:0] match, tag, first_sel, ref_tag, ref_first;
  int checks = 0, failures = 0;

  rcam_tag_logic #(.ROWS(ROWS)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [ROWS-1:0] first_of(logic [ROWS-1:0] v);
    for (int r = 0; r < ROWS; r++) if (v[r]) return ROWS'(1) << r;
    return '0;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; cmd = ACMD_NONE; match = '0; chain_in = 0; fm_in = 0;
    @(negedge clk); @(negedge clk); rst_n = 1;
    ref_tag = '0;
    check(tag == '0 && !any, "reset clears tags");
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      match = 16'($urandom) & 16'($urandom);
      chain_in = 1'($urandom);
      fm_in = ($urandom % 4 == 0);
      case ($urandom % 5)
        0, 1: begin cmd = ACMD_COMPARE; ref_tag = match; end
        2:    begin cmd = ACMD_FIRST;   ref_tag = fm_in ? '0 : first_of(ref_tag); end
        3:    begin cmd = ACMD_SHIFT;   ref_tag = {ref_tag[ROWS-2:0], chain_in}; end
        default: cmd = ACMD_NONE;
      endcase
      #1;
      check(fm_out == (fm_in | (|tag)), "fm_out before edge");
      @(posedge clk); #1;
      cmd = ACMD_NONE;
      ref_first = first_of(ref_tag);
      check(tag == ref_tag, $sformatf("tag t=%0d", t));
      check(first_sel == ref_first, "first_sel");
      check(any == (|ref_tag), "if_match");
      check(chain_out == ref_tag[ROWS-1], "chain_out");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
