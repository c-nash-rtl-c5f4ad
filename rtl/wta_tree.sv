// wta_tree: behavioural model of the winner-takes-all tree (analog, built
// from wta_cell).
//
// Finds the largest of D input currents with a binary tree of 2-input WTA
// cells: K = ceil(log2 D) levels and 2^K - 1 cells. Unused leaves (when D is
// not a power of two) are tied to zero current, which never wins. The tree is
// stored heap-style: node k (1..2^K-1) is a cell fed by nodes 2k and 2k+1,
// leaves are nodes 2^K..2^(K+1)-1, and node 1 is the output. With en low
// the tree is switched off (its inputs are disconnected), and the output
// current is zero; the controller does this in Phase 2. Latency is K cell
// delays.
module wta_tree #(
  parameter int unsigned D          = 8,
  parameter int unsigned CUR_W      = 13,
  parameter realtime     LATENCY_NS = 0.08
) (
  input  logic             en,
  input  logic [CUR_W-1:0] i_in [D],
  output logic [CUR_W-1:0] i_max
);

  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned K     = (D > 1) ? $clog2(D) : 1;
  localparam int unsigned P     = 1 << K;   // leaves
  localparam int unsigned CELLS = P - 1;    // 2^K - 1 WTA cells

  logic [CUR_W-1:0] node [1:2*P-1];

  for (genvar l = 0; l < P; l++) begin : g_leaf
    if (l < D) begin : g_used
      assign node[P + l] = en ? i_in[l] : '0;
    end else begin : g_pad
      assign node[P + l] = '0;
    end
  end

  for (genvar k = 1; k <= CELLS; k++) begin : g_cell
    wta_cell #(.CUR_W(CUR_W), .LATENCY_NS(LATENCY_NS)) u_cell (
      .i1(node[2*k]), .i2(node[2*k+1]), .i_max(node[k])
    );
  end

  assign i_max = node[1];

endmodule
