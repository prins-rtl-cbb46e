// prins_key_mask: the key and mask registers that drive the bit lines of every RCAM module.
//
// The key holds the data word that is compared against or written; the mask selects the bit
// columns that take part in compare, write and read. The controller changes them with one
// operation per cycle (prins_pkg::km_op_e):
//   KM_MCLR   mask <= 0 (key kept)
//   KM_SETF   key[lo+:len] <= val, mask[lo+:len] <= 1 (one field of a compare/write pattern)
//   KM_LOADR  key <= (key & ~mask) | (rd_data & mask)   (the read primitive: the masked field
//             of the read row lands in the key register)
// key and mask are register outputs. Both reset to zero (synchronous, active low).
// The paper places one key/mask pair on top of each crossbar; in this RTL a single pair sits
// in the controller and is broadcast to all modules, which is equivalent because every module
// always receives the same pattern. The field-wise update operations are this design's own.
module prins_key_mask
  import prins_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  km_op_e             op,
  input  logic [COL_AW-1:0]  lo,
  input  logic [LEN_W-1:0]   len,
  input  logic [REG_W-1:0]   val,
  input  logic [ROW_W-1:0]   rd_data,
  output logic [ROW_W-1:0]   key,
  output logic [ROW_W-1:0]   mask
);

  logic [ROW_W-1:0] fmask;
  assign fmask = field_mask(lo, len);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      key  <= '0;
      mask <= '0;
    end else begin
      unique case (op)
        KM_MCLR:  mask <= '0;
        KM_SETF: begin
          key  <= (key & ~fmask) | ((ROW_W'(val) << lo) & fmask);
          mask <= mask | fmask;
        end
        KM_LOADR: key <= (key & ~mask) | (rd_data & mask);
        default: ;
      endcase
    end
  end

endmodule
