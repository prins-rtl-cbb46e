// tb_prins_top_full: end-to-end test of a PRINS device at its default size (9 modules of
// 256 rows, 2304 processing units). The device is driven by prins_e2e_test through its
// host bus: vector add, histogram and dot product over all 2304 rows, a 16x16 SpMV, a BFS
// on a 64-vertex graph, the tag daisy chain through all nine modules, a refused row access
// and an exception.
module tb_prins_top_full;
  import prins_pkg::*;
  logic        clk, rst_n, host_we, host_re, host_rvalid;
  logic [15:0] host_addr;
  logic [63:0] host_wdata, host_rdata;
  logic        cascade_tag_in, cascade_fm_in, cascade_tag_out, cascade_fm_out;

  prins_top dut (.*);

  prins_e2e_test #(.NMOD(9), .ROWS(256), .BFS_V(64), .SPMV_N(16)) test (
    .clk, .rst_n, .host_addr, .host_we, .host_re, .host_wdata, .host_rdata, .host_rvalid,
    .cascade_tag_in, .cascade_fm_in, .cascade_tag_out, .cascade_fm_out,
    .p_acmd    (dut.acmd),
    .p_km_op   (dut.u_ctrl.km_op),
    .p_running (dut.u_ctrl.state == 2'd1),
    .p_ir      (dut.u_ctrl.ir),
    .p_rd_val  (dut.u_ctrl.regs[dut.u_ctrl.ir.rd]),
    .p_any     (dut.any),
    .p_row_ack (dut.s_ack),
    .p_row_rej (dut.s_rej)
  );
endmodule
