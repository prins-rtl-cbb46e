// prins_reduction_tree: pipelined binary adder tree (the tag counter).
//
// Sums N inputs of IN_W bits in LEVELS = ceil(log2 N) adder levels, one register stage per
// level, so a result appears LEVELS clock cycles after in_valid and a new set of inputs can
// enter every cycle. Inside an RCAM module it counts the set tags (IN_W = 1); at device level
// a second instance adds up the module counts. The paper gives the function (a reduction
// tree that sums tag bits in logarithmic time); the one-register-per-level pipelining is this
// design's choice. Inputs beyond N in the last power of two are zero. N must be at least 2.
module prins_reduction_tree #(
  parameter int unsigned N    = 256,
  parameter int unsigned IN_W = 1,
  localparam int unsigned LEVELS = $clog2(N),
  localparam int unsigned NP     = 1 << LEVELS,
  localparam int unsigned OUT_W  = IN_W + LEVELS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic [N-1:0][IN_W-1:0]    in,
  output logic                      out_valid,
  output logic [OUT_W-1:0]          sum
);

  // Binary tree in heap order: node[1] is the root and node[k] adds its children 2k and
  // 2k+1; children numbered NP and above are the leaves (input i is child NP+i, zero beyond
  // N). Every internal node is a register, so a node of depth d holds the sum of the inputs
  // presented LEVELS-d cycles earlier.
  logic [NP-1:0][OUT_W-1:0]   leaf;
  logic [NP-1:1][OUT_W-1:0]   node;
  logic [LEVELS:0]            vld;

  always_comb begin
    for (int i = 0; i < NP; i++) begin
      leaf[i] = (i < N) ? OUT_W'(in[i]) : '0;
    end
  end

  for (genvar k = 1; k < NP; k++) begin : g_node
    if (2 * k >= NP) begin : g_bottom
      always_ff @(posedge clk) node[k] <= leaf[2*k-NP] + leaf[2*k+1-NP];
    end else begin : g_inner
      always_ff @(posedge clk) node[k] <= node[2*k] + node[2*k+1];
    end
  end

  assign vld[0] = in_valid;
  always_ff @(posedge clk) begin
    if (!rst_n) vld[LEVELS:1] <= '0;
    else        vld[LEVELS:1] <= vld[LEVELS-1:0];
  end

  assign sum       = node[1];
  assign out_valid = vld[LEVELS];

endmodule
