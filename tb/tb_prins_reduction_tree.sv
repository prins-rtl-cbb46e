// tb_prins_reduction_tree: self-checking test of the pipelined adder tree.
// A 9-input, 4-bit tree (the device-level configuration shape) gets a new random input set
// every cycle; every sum must equal the reference sum and leave the tree exactly
// LEVELS = ceil(log2 9) = 4 cycles after its inputs entered. Maximal inputs check the width.
module tb_prins_reduction_tree;
  localparam int N = 9, W = 4, L = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, out_valid;
  logic [N-1:0][W-1:0] in;
  logic [W+L-1:0] sum;
  int exp_q[$];
  int sent_cycle[$];
  int cycle = 0, checks = 0, failures = 0;

  prins_reduction_tree #(.N(N), .IN_W(W)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  always @(posedge clk) if (rst_n && out_valid) begin
    int e, c;
    e = exp_q.pop_front(); c = sent_cycle.pop_front();
    check(sum == (W+L)'(e), $sformatf("sum %0d exp %0d", sum, e));
    check(cycle - c == L, $sformatf("latency %0d", cycle - c));
  end

  initial begin
    rst_n = 0; in_valid = 0; in = '0;
    @(negedge clk); @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int s;
      @(negedge clk);
      in_valid = ($urandom % 3 != 0);
      s = 0;
      for (int i = 0; i < N; i++) begin
        in[i] = (t < 3) ? '1 : W'($urandom);
        s += int'(in[i]);
      end
      if (in_valid) begin exp_q.push_back(s); sent_cycle.push_back(cycle); end
    end
    @(negedge clk); in_valid = 0;
    repeat (L + 2) @(negedge clk);
    check(exp_q.size() == 0, "all results delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
