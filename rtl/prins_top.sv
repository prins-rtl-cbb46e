// prins_top: one PRINS device, resistive-CAM storage that is also a massively parallel
// associative (SIMD) processor.
//
// NMOD RCAM modules of ROWS rows each are daisy-chained: the tag of the last row of module m
// feeds the first tag of module m+1 (tag shift), and the "a tag is set above" ripple of
// first_match runs through all modules in the same order. The chain enters and leaves the
// device through the cascade ports, so several devices can be chained into a larger PRINS.
// The controller broadcasts key, mask and the array command to all modules in the same
// cycle. The if_match lines of the modules are ORed; the read data comes from the module that
// holds the top-most tagged row of the device; the module tag counts are added by a second
// reduction tree, so a COUNT result arrives clog2(ROWS) + clog2(NMOD) cycles after it is issued.
// The host reaches the device only through the memory-mapped bus of prins_host_if, which
// loads kernels, starts them, reports status, returns results, and forwards row reads and
// writes to storage management (refused while a kernel runs).
// Nine modules follow the paper's system figure, which shows a 3x3 arrangement of modules;
// the number of rows per module is not given in the paper and is this design's choice.
// Timing: single clock, synchronous active-low reset of all control state; the crossbar
// contents are not reset.
module prins_top
  import prins_pkg::*;
#(
  parameter int unsigned NMOD = 9,
  parameter int unsigned ROWS = 256,
  localparam int unsigned RAW   = $clog2(ROWS),
  localparam int unsigned LAW   = $clog2(NMOD * ROWS),
  localparam int unsigned MCW   = RAW + 1,
  localparam int unsigned CNT_W = MCW + $clog2(NMOD)
) (
  input  logic          clk,
  input  logic          rst_n,
  // host bus
  input  logic [15:0]   host_addr,
  input  logic          host_we,
  input  logic          host_re,
  input  logic [63:0]   host_wdata,
  output logic [63:0]   host_rdata,
  output logic          host_rvalid,
  // daisy-chain cascade to neighbouring PRINS devices
  input  logic          cascade_tag_in,
  input  logic          cascade_fm_in,
  output logic          cascade_tag_out,
  output logic          cascade_fm_out
);

  // controller <-> host interface
  logic                k_start, k_busy, k_done, k_err;
  logic [PC_W-1:0]     k_start_pc, prog_waddr;
  logic [REG_W-1:0]    k_param, buf_rdata;
  logic                prog_we;
  instr_t              prog_wdata;
  logic [BUF_AW-1:0]   buf_raddr;
  logic [31:0]         k_cycles;
  // storage
  logic                s_req, s_we, s_ack, s_rej;
  logic [LAW-1:0]      s_addr;
  logic [ROW_W-1:0]    s_wdata, s_rdata;
  logic [NMOD-1:0]     m_st_we;
  logic [RAW-1:0]      m_st_addr;
  logic [ROW_W-1:0]    m_st_wdata;
  logic [NMOD-1:0][ROW_W-1:0] m_st_rdata;
  // array
  acmd_e               acmd;
  logic [ROW_W-1:0]    key, mask, rd_data;
  logic                any;
  logic [NMOD-1:0]     m_any, m_chain_out, m_fm_out, m_cnt_valid;
  logic [NMOD-1:0]     m_chain_in, m_fm_in;
  logic [NMOD-1:0][ROW_W-1:0] m_rd_data;
  logic [NMOD-1:0][MCW-1:0]   m_cnt;
  logic                cnt_valid;
  logic [CNT_W-1:0]    cnt;

  prins_host_if #(.LAW(LAW)) u_host (
    .clk        (clk),
    .rst_n      (rst_n),
    .addr       (host_addr),
    .we         (host_we),
    .re         (host_re),
    .wdata      (host_wdata),
    .rdata      (host_rdata),
    .rvalid     (host_rvalid),
    .k_start    (k_start),
    .k_start_pc (k_start_pc),
    .k_param    (k_param),
    .prog_we    (prog_we),
    .prog_waddr (prog_waddr),
    .prog_wdata (prog_wdata),
    .buf_raddr  (buf_raddr),
    .buf_rdata  (buf_rdata),
    .k_busy     (k_busy),
    .k_done     (k_done),
    .k_err      (k_err),
    .k_cycles   (k_cycles),
    .st_req     (s_req),
    .st_we      (s_we),
    .st_addr    (s_addr),
    .st_wdata   (s_wdata),
    .st_ack     (s_ack),
    .st_rej     (s_rej),
    .st_rdata   (s_rdata)
  );

  prins_controller #(.CNT_W(CNT_W)) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (k_start),
    .start_pc   (k_start_pc),
    .param      (k_param),
    .prog_we    (prog_we),
    .prog_waddr (prog_waddr),
    .prog_wdata (prog_wdata),
    .buf_raddr  (buf_raddr),
    .buf_rdata  (buf_rdata),
    .busy       (k_busy),
    .done       (k_done),
    .err        (k_err),
    .run_cycles (k_cycles),
    .acmd       (acmd),
    .key        (key),
    .mask       (mask),
    .any        (any),
    .rd_data    (rd_data),
    .cnt_valid  (cnt_valid),
    .cnt        (cnt)
  );

  prins_storage_mgmt #(.NMOD(NMOD), .ROWS(ROWS)) u_stm (
    .clk        (clk),
    .rst_n      (rst_n),
    .prins_busy (k_busy),
    .req        (s_req),
    .we         (s_we),
    .addr       (s_addr),
    .wdata      (s_wdata),
    .ack        (s_ack),
    .rej        (s_rej),
    .rdata      (s_rdata),
    .st_we      (m_st_we),
    .st_addr    (m_st_addr),
    .st_wdata   (m_st_wdata),
    .st_rdata   (m_st_rdata)
  );

  // daisy chain: module 0 is fed from the cascade input, module m from module m-1
  assign m_chain_in = {m_chain_out[NMOD-2:0], cascade_tag_in};
  assign m_fm_in    = {m_fm_out[NMOD-2:0], cascade_fm_in};
  assign cascade_tag_out = m_chain_out[NMOD-1];
  assign cascade_fm_out  = m_fm_out[NMOD-1];

  for (genvar m = 0; m < NMOD; m++) begin : g_mod
    rcam_module #(.ROWS(ROWS)) u_mod (
      .clk       (clk),
      .rst_n     (rst_n),
      .cmd       (acmd),
      .key       (key),
      .mask      (mask),
      .chain_in  (m_chain_in[m]),
      .chain_out (m_chain_out[m]),
      .fm_in     (m_fm_in[m]),
      .fm_out    (m_fm_out[m]),
      .any       (m_any[m]),
      .rd_data   (m_rd_data[m]),
      .cnt_valid (m_cnt_valid[m]),
      .cnt       (m_cnt[m]),
      .st_we     (m_st_we[m]),
      .st_addr   (m_st_addr),
      .st_wdata  (m_st_wdata),
      .st_rdata  (m_st_rdata[m])
    );
  end

  // if_match over the device and read data of the device's top-most tagged row
  assign any = |m_any;
  always_comb begin
    rd_data = '0;
    for (int m = 0; m < NMOD; m++) begin
      if (m_any[m] && !m_fm_in[m]) rd_data |= m_rd_data[m];
    end
  end

  // second level of the tag counter: sum of the module counts
  prins_reduction_tree #(.N(NMOD), .IN_W(MCW)) u_sys_count (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (&m_cnt_valid),
    .in        (m_cnt),
    .out_valid (cnt_valid),
    .sum       (cnt)
  );

endmodule
