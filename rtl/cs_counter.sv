// cs_counter: carry-save population counter.
//
// Counts the ones among N input bits and returns the count as two W-bit rows
// whose sum (mod 2^W) is the count; no carry ever propagates along a row.
// With W = $clog2(N+1) the count always fits, so the rows can be consumed
// by further carry-save logic without a carry-propagate adder.
//
// Structure: the input is cut into groups of eight bits (the last one padded
// with zeros). Each group is counted by a cs_count8 cell, whose two 3-bit
// rows form a carry-save number. The groups are the leaves of a balanced
// binary tree whose nodes are 4:2 compressors, each made of two csa rows, so
// the depth grows with log(N). Empty leaves are zero and vanish in
// synthesis. Purely combinational.
//
// The eight-input cell and the principle (carry-save counting, redundant
// output, no internal carry propagation) follow the paper; how the cells are
// combined for other sizes is this design's choice.
module cs_counter #(
  parameter int unsigned N = 32,
  parameter int unsigned W = $clog2(N + 1)
) (
  input  logic [N-1:0] bits,
  output logic [W-1:0] row_a,
  output logic [W-1:0] row_b
);

  localparam int unsigned G  = (N + 7) / 8;                    // 8-bit groups
  localparam int unsigned PP = (G < 2) ? 1 : (1 << $clog2(G)); // tree leaves
  localparam int unsigned WT = (W > 3) ? W : 3;                // tree width

  logic [8*G-1:0] padded;
  assign padded = (8*G)'(bits);

  // Binary tree in heap order: node 1 is the root, node k has children 2k
  // and 2k+1, leaves are PP .. 2PP-1.
  logic [2*PP-1:1][WT-1:0] node_a, node_b;

  for (genvar l = 0; l < PP; l++) begin : g_leaf
    if (l < G) begin : g_cell
      logic [2:0] ra, rb;
      cs_count8 u_cell (.bits(padded[8*l +: 8]), .row_a(ra), .row_b(rb));
      assign node_a[PP + l] = WT'(ra);
      assign node_b[PP + l] = WT'(rb);
    end else begin : g_empty
      assign node_a[PP + l] = '0;
      assign node_b[PP + l] = '0;
    end
  end

  for (genvar k = 1; k < PP; k++) begin : g_node
    logic [WT-1:0] s1, c1;
    csa #(.W(WT)) u_csa0 (
      .x(node_a[2*k]), .y(node_b[2*k]), .z(node_a[2*k+1]), .cin(1'b0), .s(s1), .c(c1)
    );
    csa #(.W(WT)) u_csa1 (
      .x(s1), .y(c1), .z(node_b[2*k+1]), .cin(1'b0), .s(node_a[k]), .c(node_b[k])
    );
  end

  // Both rows are reduced mod 2^W; their sum stays exact because the count
  // is below 2^W.
  assign row_a = node_a[1][W-1:0];
  assign row_b = node_b[1][W-1:0];

endmodule
