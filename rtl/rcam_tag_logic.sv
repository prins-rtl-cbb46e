// rcam_tag_logic: the tag column of one RCAM module (one tag latch per row).
//
// Following the tag logic of the paper, each row has a tag latch fed through a multiplexer
// either from its match-line sense amplifier (compare) or from the tag of the previous row
// (the bitwise daisy-chain interconnect). The tag drives the row's write enable. Two
// device-wide helpers are built on the tags:
//   * first_match keeps only the top-most set tag and resets the others. The "some tag
//     above is set" signal ripples down the rows and on to the next module through
//     fm_in/fm_out, so the top-most tag of the whole device survives.
//   * if_match: any = OR of all tags of this module (the wired-OR line of the paper);
//     the device ORs the modules' lines.
// Commands (prins_pkg::acmd_e), applied at the rising clock edge:
//   ACMD_COMPARE  tag[r] <= match[r]
//   ACMD_FIRST    tag[r] <= tag[r] & ~(fm_in | any tag above r)
//   ACMD_SHIFT    tag[0] <= chain_in, tag[r] <= tag[r-1]  ("from prev TAG" / "to next TAG")
//   others        tags hold
// first_sel is the combinational one-hot of the top-most local tag (read row select).
// The direction of the shift (towards higher row numbers) and the synchronous active-low
// reset that clears all tags are this design's choices.
module rcam_tag_logic
  import prins_pkg::*;
#(
  parameter int unsigned ROWS = 256
) (
  input  logic            clk,
  input  logic            rst_n,
  input  acmd_e           cmd,
  input  logic [ROWS-1:0] match,
  input  logic            chain_in,   // tag of the last row of the previous module
  input  logic            fm_in,      // a tag is set in an earlier module
  output logic [ROWS-1:0] tag,
  output logic [ROWS-1:0] first_sel,
  output logic            chain_out,
  output logic            fm_out,
  output logic            any
);

  logic [ROWS-1:0] above;   // above[r] = some tag set in rows 0..r-1 of this module

  always_comb begin
    logic seen;
    seen = 1'b0;
    for (int r = 0; r < ROWS; r++) begin
      above[r] = seen;
      seen     = seen | tag[r];
    end
  end

  assign first_sel = tag & ~above;
  assign any       = |tag;
  assign fm_out    = fm_in | any;
  assign chain_out = tag[ROWS-1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tag <= '0;
    end else begin
      unique case (cmd)
        ACMD_COMPARE: tag <= match;
        ACMD_FIRST:   tag <= tag & ~above & {ROWS{~fm_in}};
        ACMD_SHIFT:   tag <= {tag[ROWS-2:0], chain_in};
        default:      tag <= tag;
      endcase
    end
  end

endmodule
