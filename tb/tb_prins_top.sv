// tb_prins_top: end-to-end test of a reduced PRINS device (3 modules of 16 rows).
// The device is driven by prins_e2e_test through its host bus; see that module for the
// kernels and mechanisms covered. The reduced size keeps the run short; tb_prins_top_full
// runs the same test at the default size.
module tb_prins_top;
  import prins_pkg::*;
  logic        clk, rst_n, host_we, host_re, host_rvalid;
  logic [15:0] host_addr;
  logic [63:0] host_wdata, host_rdata;
  logic        cascade_tag_in, cascade_fm_in, cascade_tag_out, cascade_fm_out;

  prins_top #(.NMOD(3), .ROWS(16)) dut (.*);

  prins_e2e_test #(.NMOD(3), .ROWS(16), .BFS_V(12), .SPMV_N(6)) test (
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
