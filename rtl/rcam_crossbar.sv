// rcam_crossbar: the resistive CAM crossbar of one RCAM module, modelled as a register array.
//
// Each of the ROWS rows holds ROW_W bits and is one processing unit (PU). In silicon a bit is a
// pair of complementary memristors and the match line of a row is precharged and discharged
// by any mismatching unmasked cell; here that analog behaviour is reduced to its logic:
//   * compare: match[r] = 1 when every unmasked column of row r equals the key. Masked columns
//     (bit lines left floating) never mismatch, so an all-zero mask matches every row.
//     The match vector is combinational; the tag logic samples it at the clock edge.
//   * write:   when wr_en is high, every row whose wr_sel bit (its tag) is set takes the key
//     in the unmasked columns and keeps its other columns (one clock edge; the paper's
//     two-phase set/reset write is one cycle here).
//   * read:    rd_data is the OR of the rows selected by the one-hot rd_sel, ANDed with the
//     mask (combinational). The caller makes rd_sel one-hot (the first tagged row).
//   * storage port: st_we writes a whole row at st_addr; st_rdata is the row at st_addr
//     (combinational). This is the plain storage access path used by storage management.
// A compare-path write and a storage write in the same cycle both apply; if they hit the same
// row the storage write wins (own choice; the controller never issues both at once).
// Contents are not reset: the array is non-volatile storage.
module rcam_crossbar #(
  parameter int unsigned ROWS  = 256,
  parameter int unsigned ROW_W = prins_pkg::ROW_W,
  localparam int unsigned AW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                        clk,
  // associative path
  input  logic [ROW_W-1:0]            key,
  input  logic [ROW_W-1:0]            mask,
  output logic [ROWS-1:0]             match,
  input  logic                        wr_en,
  input  logic [ROWS-1:0]             wr_sel,
  input  logic [ROWS-1:0]             rd_sel,
  output logic [ROW_W-1:0]            rd_data,
  // storage path
  input  logic                        st_we,
  input  logic [AW-1:0]               st_addr,
  input  logic [ROW_W-1:0]            st_wdata,
  output logic [ROW_W-1:0]            st_rdata
);

  logic [ROW_W-1:0] mem [ROWS];

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      match[r] = ~|((mem[r] ^ key) & mask);
    end
  end

  always_comb begin
    rd_data = '0;
    for (int r = 0; r < ROWS; r++) begin
      rd_data |= mem[r] & {ROW_W{rd_sel[r]}};
    end
    rd_data &= mask;
  end

  assign st_rdata = mem[st_addr];

  always_ff @(posedge clk) begin
    for (int r = 0; r < ROWS; r++) begin
      if (st_we && st_addr == AW'(r)) begin
        mem[r] <= st_wdata;
      end else if (wr_en && wr_sel[r]) begin
        mem[r] <= (mem[r] & ~mask) | (key & mask);
      end
    end
  end

endmodule
