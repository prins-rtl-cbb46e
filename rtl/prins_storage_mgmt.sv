// prins_storage_mgmt: storage path of PRINS (plain row reads and writes by address).
//
// PRINS is storage as well as a processor: the host can read and write rows by address when
// no kernel is running. This block translates a logical row address into a module number and
// a row inside that module (module = addr / ROWS, row = addr % ROWS), performs the access on
// that module's storage port, and refuses any access while a kernel runs (the paper keeps
// the storage inaccessible to the host during PRINS operation) or beyond the last row.
// Interface: a request (req, we, addr, wdata) is taken in one cycle. A write reaches the
// crossbar at the same clock edge; a read captures the row at that edge. One cycle after the
// request, ack (accepted) or rej (refused) pulses, and rdata holds the row of an accepted read.
// The paper names translation, logical block mapping and wear leveling as duties of the
// storage management unit without describing them; only the fixed address translation and
// the busy interlock are built here.
module prins_storage_mgmt
  import prins_pkg::*;
#(
  parameter int unsigned NMOD = 9,
  parameter int unsigned ROWS = 256,
  localparam int unsigned RAW = $clog2(ROWS),
  localparam int unsigned LAW = $clog2(NMOD * ROWS)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        prins_busy,
  // host side
  input  logic                        req,
  input  logic                        we,
  input  logic [LAW-1:0]              addr,
  input  logic [ROW_W-1:0]            wdata,
  output logic                        ack,
  output logic                        rej,
  output logic [ROW_W-1:0]            rdata,
  // module side
  output logic [NMOD-1:0]             st_we,
  output logic [RAW-1:0]              st_addr,
  output logic [ROW_W-1:0]            st_wdata,
  input  logic [NMOD-1:0][ROW_W-1:0]  st_rdata
);

  localparam int unsigned MW = (NMOD > 1) ? $clog2(NMOD) : 1;

  logic [MW-1:0] mod_idx;
  logic          in_range, accept;

  assign mod_idx  = MW'(addr / LAW'(ROWS));
  assign st_addr  = RAW'(addr % LAW'(ROWS));
  assign st_wdata = wdata;
  assign in_range = (32'(addr) < NMOD * ROWS);
  assign accept   = req && in_range && !prins_busy;

  always_comb begin
    st_we = '0;
    if (accept && we) st_we[mod_idx] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ack   <= 1'b0;
      rej   <= 1'b0;
      rdata <= '0;
    end else begin
      ack <= accept;
      rej <= req && !accept;
      if (accept && !we) rdata <= st_rdata[mod_idx];
    end
  end

endmodule
