// prins_pkg: types and constants shared by the PRINS (resistive-CAM processing-in-storage)
// RTL.
//
// PRINS stores one data element per row of a resistive CAM; every row is also a processing
// unit (PU). A controller broadcasts a key and a mask to all rows and issues associative
// primitives (compare, write, read, first_match, if_match), so arithmetic is done
// word-parallel and bit-serial inside the storage arrays.
//
// This package holds:
//   * the row width (256 bit columns, as in the RCAM map of the vector-addition example),
//   * the array command that the controller broadcasts to every RCAM module each cycle,
//   * the microcode instruction format executed by the controller.
// The primitive set (compare, write, read, if_match, first_match) follows the paper. The
// instruction encoding, the register file, the branch instructions, the tag shift and the
// count instruction are this design's own choices, as is the host register map.
package prins_pkg;

  // Bit columns per RCAM row (Fig. 6 prints columns 0..255).
  parameter int unsigned ROW_W = 256;
  localparam int unsigned COL_AW = $clog2(ROW_W);     // bit-column index width

  // Controller resources (own choices).
  parameter int unsigned PROG_DEPTH = 4096;           // microcode words
  localparam int unsigned PC_W      = $clog2(PROG_DEPTH);
  parameter int unsigned NREGS      = 4;               // general registers r0..r3
  localparam int unsigned RIDX_W    = $clog2(NREGS);
  parameter int unsigned REG_W      = 64;              // register / immediate width
  parameter int unsigned BUF_DEPTH  = 256;             // data buffer words (reduction results)
  localparam int unsigned BUF_AW    = $clog2(BUF_DEPTH);
  localparam int unsigned LEN_W     = $clog2(REG_W) + 1; // field length 1..64

  // ---------------------------------------------------------------------------------------
  // Array command broadcast from the controller to every RCAM module.
  // ---------------------------------------------------------------------------------------
  typedef enum logic [2:0] {
    ACMD_NONE    = 3'd0,
    ACMD_COMPARE = 3'd1,   // tag <= match (all rows)
    ACMD_WRITE   = 3'd2,   // tagged rows: masked columns <= key
    ACMD_FIRST   = 3'd3,   // first_match: keep only the top-most tag of the whole device
    ACMD_SHIFT   = 3'd4,   // daisy chain: every tag moves to the next row
    ACMD_COUNT   = 3'd5    // start the tag counter (reduction tree)
  } acmd_e;

  // ---------------------------------------------------------------------------------------
  // Microcode.
  // ---------------------------------------------------------------------------------------
  typedef enum logic [4:0] {
    OP_NOP    = 5'd0,
    OP_HALT   = 5'd1,   // kernel done
    OP_MCLR   = 5'd2,   // mask <= 0
    OP_SETK   = 5'd3,   // key[lo+:len] <= imm, mask[lo+:len] <= 1
    OP_SETKR  = 5'd4,   // key[lo+:len] <= r[rs], mask[lo+:len] <= 1
    OP_COMP   = 5'd5,   // compare
    OP_WRITE  = 5'd6,   // write
    OP_READ   = 5'd7,   // read: key <= masked field of the first tagged row
    OP_GETK   = 5'd8,   // r[rd] <= key[lo+:len]
    OP_FIRST  = 5'd9,   // first_match
    OP_SHIFT  = 5'd10,  // tag daisy-chain shift by one row
    OP_COUNT  = 5'd11,  // r[rd] <= r[rd] + (tag count << lo)
    OP_LDI    = 5'd12,  // r[rd] <= imm
    OP_ADDI   = 5'd13,  // r[rd] <= r[rd] + imm
    OP_BNE    = 5'd14,  // if (r[rd] != imm) pc <= tgt
    OP_BM     = 5'd15,  // if_match: if (any tag) pc <= tgt
    OP_BNM    = 5'd16,  // if_match: if (no tag)  pc <= tgt
    OP_STB    = 5'd17,  // buffer[r[rd] + imm] <= r[rs]
    OP_JMP    = 5'd18   // pc <= tgt
  } op_e;

  typedef struct packed {
    op_e                 op;
    logic [RIDX_W-1:0]   rd;
    logic [RIDX_W-1:0]   rs;
    logic [COL_AW-1:0]   lo;    // lowest bit column of a field, or shift amount for COUNT
    logic [LEN_W-1:0]    len;   // field length in bit columns (1..REG_W)
    logic [PC_W-1:0]     tgt;   // branch target
    logic [REG_W-1:0]    imm;
  } instr_t;

  localparam int unsigned INSTR_W = $bits(instr_t);

  // Key/mask register update requested by the controller.
  typedef enum logic [1:0] {
    KM_NONE  = 2'd0,
    KM_MCLR  = 2'd1,   // clear the mask
    KM_SETF  = 2'd2,   // set one field of key, enable it in the mask
    KM_LOADR = 2'd3    // load the masked columns of the read data into the key
  } km_op_e;

  // Field mask of len columns starting at lo (len = 0 gives an empty mask).
  function automatic logic [ROW_W-1:0] field_mask(input logic [COL_AW-1:0] lo,
                                                  input logic [LEN_W-1:0] len);
    logic [ROW_W-1:0] ones;
    ones = (len >= LEN_W'(REG_W)) ? ROW_W'({REG_W{1'b1}})
                                  : ((ROW_W'(1) << len) - ROW_W'(1));
    return ones << lo;
  endfunction

endpackage
