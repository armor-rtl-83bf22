// mac_pe: one MAC unit of the GEMM systolic array.
//
// Output-stationary processing element: every cycle it multiplies the
// operand arriving from the left (activation) by the operand arriving from
// above (weight), adds the product to its local 32-bit accumulator, and
// passes both operands on, registered, to its right and lower neighbours.
// clear zeroes the accumulator. The multiplier-plus-adder MAC unit and the
// right/down operand flow follow the GEMM engine drawing of the design; the
// output-stationary dataflow is this implementation's choice.
module mac_pe
  import armor_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  act_t a_in,
  input  wgt_t b_in,
  output act_t a_out,
  output wgt_t b_out,
  output acc_t acc
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0;
      b_out <= '0;
      acc   <= '0;
    end else begin
      a_out <= a_in;
      b_out <= b_in;
      acc   <= clear ? '0 : acc + ACC_W'(a_in * b_in);
    end
  end
endmodule
