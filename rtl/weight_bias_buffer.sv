// weight_bias_buffer: on-chip weight and bias store of a convolution engine.
//
// Weights W[OC][IC][K][K] and biases B[OC] are preloaded by the host before
// inference and kept on chip. They are stored by fold, as Wbuf[FOLD][PE][IC]
// [K*K] and Bbuf[FOLD][PE], with output channel oc = fold*PE + pe, so that a
// single read for (fold, input channel) returns all PE x K x K weights the
// PEs need in that cycle (the array partitioning that sustains N_pe*K*K
// parallel multiplications). Weights of padding channels in a partial last
// fold are never written and their results are masked by the engine.
//
// Write port (one word per cycle): wr_bias selects the bias array; wr_oc,
// wr_ic and wr_kk give W[oc][ic][kk] (kk = kh*K+kw); the low 8 bits of
// wr_data are the weight, all 32 bits the bias. Read port (combinational):
// rd_fold and rd_ic select the PE x K*K weights and the PE biases.
module weight_bias_buffer
  import armor_pkg::*;
#(
  parameter int unsigned PE   = 8,
  parameter int unsigned OC   = 8,
  parameter int unsigned IC   = 1,
  parameter int unsigned KK   = 9,
  parameter int unsigned FOLD = (OC + PE - 1) / PE
) (
  input  logic clk,
  input  logic wr_en,
  input  logic wr_bias,
  input  logic [15:0] wr_oc,
  input  logic [15:0] wr_ic,
  input  logic [7:0]  wr_kk,
  input  logic [31:0] wr_data,
  input  logic [$clog2(FOLD+1)-1:0] rd_fold,
  input  logic [$clog2(IC+1)-1:0]   rd_ic,
  output wgt_t rd_w [PE][KK],
  output acc_t rd_b [PE]
);
  wgt_t wmem [FOLD*IC][PE][KK];
  acc_t bmem [FOLD][PE];

  wire [15:0] w_fold = wr_oc / 16'(PE);
  wire [15:0] w_pe   = wr_oc % 16'(PE);

  always_ff @(posedge clk) begin
    if (wr_en && wr_oc < 16'(OC)) begin
      if (wr_bias)
        bmem[w_fold][w_pe] <= acc_t'(wr_data);
      else if (wr_ic < 16'(IC) && wr_kk < 8'(KK))
        wmem[w_fold*IC + 32'(wr_ic)][w_pe][wr_kk] <= wgt_t'(wr_data[7:0]);
    end
  end

  assign rd_w = wmem[32'(rd_fold)*IC + 32'(rd_ic)];
  assign rd_b = bmem[rd_fold];
endmodule
