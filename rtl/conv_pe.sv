// conv_pe: one convolution processing element.
//
// Holds K*K multipliers that multiply one input channel's KxK window by the
// matching KxK weights of this PE's output channel, and an adder tree that
// reduces the K*K products to one partial sum. The engine issues one input
// channel per cycle, so a PE consumes a new window every cycle (initiation
// interval 1). The structure (K*K multipliers per PE, adder tree per PE)
// follows the convolution engine of the design; the two-stage pipeline
// (registered products, then registered tree output) is this
// implementation's choice.
//
// Timing: psum/out_valid appear two cycles after in_valid. No stall input:
// the caller must be able to accept every result.
module conv_pe
  import armor_pkg::*;
#(
  parameter int unsigned K = 3
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  act_t win [K*K],
  input  wgt_t wgt [K*K],
  output logic out_valid,
  output acc_t psum
);
  localparam int unsigned PW = ACT_W + WGT_W;

  logic signed [PW-1:0] prod_q [K*K];
  logic                 v1;
  acc_t                 tree_sum;

  // Multiplier units (one per kernel tap).
  always_ff @(posedge clk) begin
    for (int i = 0; i < K*K; i++) prod_q[i] <= win[i] * wgt[i];
  end

  adder_tree #(.N(K*K), .IN_W(PW), .OUT_W(ACC_W)) u_tree (
    .in (prod_q),
    .sum(tree_sum)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
      psum      <= '0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
      psum      <= tree_sum;
    end
  end
endmodule
