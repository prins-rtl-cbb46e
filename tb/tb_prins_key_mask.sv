// tb_prins_key_mask: self-checking test of the key and mask registers.
// Random sequences of MCLR, SETF (random field position and length, 1..64) and LOADR (read
// data into the masked columns) are applied; key and mask are compared with a reference
// model after every edge.
module tb_prins_key_mask;
  import prins_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  km_op_e op;
  logic [COL_AW-1:0] lo;
  logic [LEN_W-1:0] len;
  logic [REG_W-1:0] val;
  logic [ROW_W-1:0] rd_data, key, mask, rk, rm, fm;
  int checks = 0, failures = 0;

  prins_key_mask dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; op = KM_NONE; lo = '0; len = '0; val = '0; rd_data = '0;
    @(negedge clk); @(negedge clk); rst_n = 1;
    rk = '0; rm = '0;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      lo = COL_AW'($urandom % 200); len = LEN_W'(1 + $urandom % 64);
      val = {$urandom, $urandom};
      for (int w = 0; w < ROW_W / 32; w++) rd_data[32*w +: 32] = $urandom;
      // independent field mask: columns lo .. lo+len-1
      fm = '0;
      for (int b = 0; b < ROW_W; b++) if (b >= lo && b < int'(lo) + int'(len)) fm[b] = 1'b1;
      case ($urandom % 6)
        0: begin op = KM_MCLR; rm = '0; end
        1, 2, 3: begin
          op = KM_SETF;
          for (int b = 0; b < ROW_W; b++) if (fm[b]) begin rk[b] = val[b - lo]; rm[b] = 1'b1; end
        end
        4: begin op = KM_LOADR; rk = (rk & ~rm) | (rd_data & rm); end
        default: op = KM_NONE;
      endcase
      @(posedge clk); #1; op = KM_NONE;
      check(key == rk, $sformatf("key t=%0d", t));
      check(mask == rm, $sformatf("mask t=%0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
