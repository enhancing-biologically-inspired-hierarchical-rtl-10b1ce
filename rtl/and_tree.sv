// Hierarchical AND tree of an AFeCAM array.
//
// A row of the array matches only when it matches in every one of the N_IN
// subarrays that hold slices of the word. The tree reduces the N_IN W-bit
// match vectors pairwise to one W-bit vector. It is built as a binary heap
// of 2*N_IN-1 nodes: node N_IN+i is input vector i, node k below N_IN is the
// two-input AND of nodes 2k and 2k+1, and node 1 is the result. Purely
// combinational; the depth is ceil(log2(N_IN)) AND levels (exactly log2 of
// N_IN when it is a power of two, as in the default 128).
module and_tree #(
  parameter int unsigned N_IN = 128,
  parameter int unsigned W    = 128
) (
  input  logic [N_IN-1:0][W-1:0] in_vec,
  output logic [W-1:0]           out_vec
);
  for (genvar k = 1; k < 2 * N_IN; k++) begin : g_node
    logic [W-1:0] v;
    if (k >= N_IN) begin : g_leaf
      assign v = in_vec[k - N_IN];
    end else begin : g_and
      assign v = g_node[2*k].v & g_node[2*k+1].v;
    end
  end

  assign out_vec = g_node[1].v;
endmodule
