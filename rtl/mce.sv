// mce: max-pooling compute engine with inline requantization.
//
// Consumes the PE-wide 32-bit output vectors of a convolution engine, one
// pixel per cycle in row-major order (one fold at a time), and produces
// INT8 vectors of the same width: every lane has its own comparator tree
// over a KM x KM window (stride SM), whose maximum is requantized with the
// layer's precomputed scale and zero point. Pooling before requantization
// is exact because requantization with a positive scale is monotonic.
// The parallel comparator trees, the per-lane requantization after pooling
// and the bypass for layers without pooling follow the design; the window
// store (a circular buffer of KM rows of W pixels, the last row completed
// by the incoming pixel) is this implementation's choice. Any stride
// SM <= KM is supported, so overlapping windows (e.g. 3x3 stride 2) work;
// pooling padding is not supported (P = 0).
//
// bypass = 1 skips the comparator trees: every input pixel is requantized
// and forwarded (a convolution layer with no pooling after it).
//
// Interface: in_valid/in_ready and out_valid/out_ready streams, a one-word
// output register (in_ready = !out_valid || out_ready), so the engine runs
// at one input pixel per cycle with an output one cycle after the pixel that
// completes a window. Rows/columns beyond the last full window are dropped.
// frame_done pulses when the last pixel of an H x W frame is accepted.
module mce
  import armor_pkg::*;
#(
  parameter int unsigned H  = 128,
  parameter int unsigned W  = 128,
  parameter int unsigned PE = 8,
  parameter int unsigned KM = 2,
  parameter int unsigned SM = KM
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                bypass,
  input  quant_t              quant,
  input  logic                in_valid,
  output logic                in_ready,
  input  acc_t [PE-1:0]       in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output act_t [PE-1:0]       out_data,
  output logic                frame_done
);
  localparam int unsigned OH = (H - KM) / SM + 1;
  localparam int unsigned OW = (W - KM) / SM + 1;

  acc_t win_buf [KM][W][PE];

  logic [15:0] h, w;
  logic [15:0] rslot;         // h mod KM: slot of the current row
  logic [15:0] nrow, ncol;     // row / column at which the next window ends
  logic [15:0] ph, pw;         // pooled windows done in this frame / row

  wire beat     = in_valid && in_ready;
  wire row_end  = (h == nrow) && (ph < 16'(OH));
  wire col_end  = (w == ncol) && (pw < 16'(OW));
  wire win_done = row_end && col_end;
  wire emit     = beat && (bypass || win_done);

  assign in_ready = !out_valid || out_ready;

  // ---------------- comparator trees + requantization ----------------
  acc_t tree_in  [PE][KM*KM];
  acc_t tree_max [PE];
  act_t q_out    [PE];

  always_comb begin
    for (int p = 0; p < PE; p++)
      for (int r = 0; r < KM; r++)
        for (int k = 0; k < KM; k++) begin
          if (r == KM-1 && k == KM-1)
            tree_in[p][r*KM+k] = in_data[p];
          else begin
            // row h-KM+1+r sits in slot (h+1+r) mod KM
            automatic int sl = int'(rslot) + 1 + r;
            if (sl >= int'(KM)) sl -= int'(KM);
            tree_in[p][r*KM+k] = win_buf[sl][32'(w) + k + 1 - KM][p];
          end
        end
  end

  for (genvar p = 0; p < PE; p++) begin : g_lane
    cmp_tree #(.N(KM*KM), .W(ACC_W)) u_cmp (.in(tree_in[p]), .max(tree_max[p]));
    requant u_rq (.x(bypass ? in_data[p] : tree_max[p]), .q(quant), .y(q_out[p]));
  end

  // ---------------- window store ----------------
  always_ff @(posedge clk) begin
    if (beat) begin
      for (int p = 0; p < PE; p++) win_buf[rslot][w][p] <= in_data[p];
    end
  end

  // ---------------- counters and output register ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h <= '0; w <= '0; rslot <= '0; ph <= '0; pw <= '0;
      nrow <= 16'(KM-1); ncol <= 16'(KM-1);
      out_valid  <= 1'b0;
      out_data   <= '0;
      frame_done <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (emit) begin
        out_valid <= 1'b1;
        for (int p = 0; p < PE; p++) out_data[p] <= q_out[p];
      end
      if (beat) begin
        if (w == 16'(W-1)) begin
          w <= '0; pw <= '0; ncol <= 16'(KM-1);
          if (h == 16'(H-1)) begin
            h <= '0; rslot <= '0; ph <= '0; nrow <= 16'(KM-1);
            frame_done <= 1'b1;
          end else begin
            h <= h + 1'b1;
            rslot <= (rslot == 16'(KM-1)) ? '0 : rslot + 1'b1;
            if (row_end) begin nrow <= nrow + 16'(SM); ph <= ph + 1'b1; end
          end
        end else begin
          w <= w + 1'b1;
          if (col_end) begin ncol <= ncol + 16'(SM); pw <= pw + 1'b1; end
        end
      end
    end
  end
endmodule
