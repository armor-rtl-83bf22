// stream_fifo: inter-engine FIFO stream carrying one vector word per beat.
//
// Engines of the streaming accelerator are chained through these FIFOs so
// that a layer's outputs flow straight into the next layer without leaving
// the chip. One entry holds a whole vector (for example the N_pe parallel
// outputs of a convolution engine), so a full vector is written and read in a
// single cycle. The FIFO itself is a plain circular buffer of DEPTH words;
// its depth is this implementation's choice (the source gives none).
//
// Interface: valid/ready on both sides; a word moves when valid and ready are
// both high. in_ready is high whenever the FIFO is not full; out_valid is
// high whenever it is not empty. A word written in cycle t can be read in
// cycle t+1 (no fall-through). The assertion checks the producer's side of
// the handshake: a word offered and not taken stays offered and unchanged.
module stream_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic [AW:0]      count;

  wire do_wr = in_valid && in_ready;
  wire do_rd = out_valid && out_ready;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (do_rd) rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (do_wr ? 1'b1 : 1'b0) - (do_rd ? 1'b1 : 1'b0);
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= in_data;
  end

  // Producer rule: an offered word is held, unchanged, until it is taken.
  a_in_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && !in_ready) |=> (in_valid && $stable(in_data)))
    else $error("stream_fifo: producer dropped or changed a pending word");

endmodule
