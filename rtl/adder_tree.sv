// adder_tree: combinational binary adder tree.
//
// Sums N signed inputs of IN_W bits into one OUT_W-bit result through
// ceil(log2 N) levels of two-input adders, the reduction used after the
// multipliers of each convolution PE. Inputs are sign-extended to OUT_W
// before the first level; unused leaves of the padded power-of-two tree are
// zero. Purely combinational, no handshake.
module adder_tree #(
  parameter int unsigned N     = 9,
  parameter int unsigned IN_W  = 16,
  parameter int unsigned OUT_W = 32
) (
  input  logic signed [IN_W-1:0]  in  [N],
  output logic signed [OUT_W-1:0] sum
);
  localparam int unsigned NP = (N <= 1) ? 1 : (1 << $clog2(N));

  // Heap-ordered tree: node i has children 2i+1 and 2i+2; leaves at NP-1...
  logic signed [OUT_W-1:0] node [2*NP-1];

  for (genvar i = 0; i < NP; i++) begin : g_leaf
    if (i < N) begin : g_in
      assign node[NP-1+i] = OUT_W'(in[i]);
    end else begin : g_pad
      assign node[NP-1+i] = '0;
    end
  end
  for (genvar i = 0; i < NP-1; i++) begin : g_node
    assign node[i] = node[2*i+1] + node[2*i+2];
  end

  assign sum = node[0];
endmodule
