// rcam_module: one RCAM module, the unit that PRINS is built from by daisy-chaining.
//
// It contains the resistive crossbar (ROWS rows of ROW_W bits, each row a processing unit),
// the tag logic with its daisy-chain and first_match ripple, and the tag counter (reduction
// tree), as in the paper's RCAM module. The key and mask arrive from the controller's
// registers, and so does the array command (prins_pkg::acmd_e), which every module of the
// device receives in the same cycle:
//   ACMD_COMPARE  tags sample the match lines at the clock edge
//   ACMD_WRITE    tagged rows take the key in the masked columns at the clock edge
//   ACMD_FIRST    first_match (with fm_in from the modules above)
//   ACMD_SHIFT    tags move one row down, tag 0 takes chain_in, chain_out is the last tag
//   ACMD_COUNT    the current tags enter the tag counter; cnt is valid clog2(ROWS) cycles later
// rd_data is the masked content of this module's top-most tagged row (combinational);
// any is this module's if_match line. The storage port reaches the crossbar rows directly
// for plain reads and writes by address.
module rcam_module
  import prins_pkg::*;
#(
  parameter int unsigned ROWS = 256,
  localparam int unsigned AW      = $clog2(ROWS),
  localparam int unsigned CNT_W   = AW + 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  acmd_e              cmd,
  input  logic [ROW_W-1:0]   key,
  input  logic [ROW_W-1:0]   mask,
  // daisy chain and first_match ripple
  input  logic               chain_in,
  output logic               chain_out,
  input  logic               fm_in,
  output logic               fm_out,
  // results
  output logic               any,
  output logic [ROW_W-1:0]   rd_data,
  output logic               cnt_valid,
  output logic [CNT_W-1:0]   cnt,
  // storage path
  input  logic               st_we,
  input  logic [AW-1:0]      st_addr,
  input  logic [ROW_W-1:0]   st_wdata,
  output logic [ROW_W-1:0]   st_rdata
);

  logic [ROWS-1:0] match, tag, first_sel;

  rcam_crossbar #(.ROWS(ROWS), .ROW_W(ROW_W)) u_xbar (
    .clk      (clk),
    .key      (key),
    .mask     (mask),
    .match    (match),
    .wr_en    (cmd == ACMD_WRITE),
    .wr_sel   (tag),
    .rd_sel   (first_sel),
    .rd_data  (rd_data),
    .st_we    (st_we),
    .st_addr  (st_addr),
    .st_wdata (st_wdata),
    .st_rdata (st_rdata)
  );

  rcam_tag_logic #(.ROWS(ROWS)) u_tag (
    .clk       (clk),
    .rst_n     (rst_n),
    .cmd       (cmd),
    .match     (match),
    .chain_in  (chain_in),
    .fm_in     (fm_in),
    .tag       (tag),
    .first_sel (first_sel),
    .chain_out (chain_out),
    .fm_out    (fm_out),
    .any       (any)
  );

  prins_reduction_tree #(.N(ROWS), .IN_W(1)) u_count (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (cmd == ACMD_COUNT),
    .in        (tag),
    .out_valid (cnt_valid),
    .sum       (cnt)
  );

endmodule
