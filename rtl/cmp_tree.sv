// cmp_tree: combinational binary comparator (maximum) tree.
//
// Reduces N signed W-bit inputs to their maximum through ceil(log2 N) levels
// of two-input comparators, one tree per pooling lane of the max-pooling
// engine. Unused leaves of the padded power-of-two tree hold the most
// negative value so they never win. Purely combinational.
module cmp_tree #(
  parameter int unsigned N = 4,
  parameter int unsigned W = 32
) (
  input  logic signed [W-1:0] in  [N],
  output logic signed [W-1:0] max
);
  localparam int unsigned NP = (N <= 1) ? 1 : (1 << $clog2(N));

  logic signed [W-1:0] node [2*NP-1];

  for (genvar i = 0; i < NP; i++) begin : g_leaf
    if (i < N) begin : g_in
      assign node[NP-1+i] = in[i];
    end else begin : g_pad
      assign node[NP-1+i] = {1'b1, {(W-1){1'b0}}};
    end
  end
  for (genvar i = 0; i < NP-1; i++) begin : g_node
    assign node[i] = (node[2*i+1] >= node[2*i+2]) ? node[2*i+1] : node[2*i+2];
  end

  assign max = node[0];
endmodule
