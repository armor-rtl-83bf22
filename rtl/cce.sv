// cce: convolution compute engine (one convolution layer).
//
// Computes out[oc][oh][ow] = B[oc] + sum_{c,kh,kw} W[oc][c][kh][kw] *
// in[c][oh*S-P+kh][ow*S-P+kw] for an INT8 input feature map streamed in
// row-major order, one pixel with all IC channels per beat. PE parallel
// conv_pe instances each own one output channel and hold K*K multipliers,
// so N_pe*K*K multiplications happen per cycle; the input channel loop is
// pipelined with one channel per cycle. When OC > PE the output channels are
// processed in FOLD = ceil(OC/PE) passes (channel folding); lanes of a
// partial last fold are driven to zero.
//
// Operation follows the layer template of the design: a circular K-row line
// buffer (line_buffer) is first filled with the rows the first output row
// needs, then for every output row the engine computes all OW pixels and
// loads exactly S new rows (fewer at the bottom edge) before the next row.
// Each pass over a fold consumes the whole input frame again, so the
// producer must replay the frame FOLD times. Output channels of one fold
// are written as one PE-wide vector per output pixel, fold by fold
// (fold-major order); fmap_repack restores pixel-major order when needed.
//
// Interface: in_valid/in_ready and out_valid/out_ready streams; weight and
// bias preload port (see weight_bias_buffer). frame_done pulses after the
// last output of the last fold. Timing with an always-ready consumer: each
// output pixel takes IC+4 cycles (IC issue cycles, a 2-stage PE pipeline,
// one accumulate and one output cycle) and each input beat one cycle, so a
// frame takes FOLD*(IH*IW + OH*OW*(IC+4)) cycles. Loading and computing do
// not overlap, as in the template's sequential buffer-update loop.
module cce
  import armor_pkg::*;
#(
  parameter int unsigned IH = 128,
  parameter int unsigned IW = 128,
  parameter int unsigned IC = 1,
  parameter int unsigned OC = 8,
  parameter int unsigned K  = 3,
  parameter int unsigned S  = 1,
  parameter int unsigned P  = 1,
  parameter int unsigned PE = 8
) (
  input  logic clk,
  input  logic rst_n,
  // input activations: one pixel, IC channels
  input  logic                in_valid,
  output logic                in_ready,
  input  act_t [IC-1:0]       in_data,
  // output partial sums: one pixel, PE channels of the current fold
  output logic                out_valid,
  input  logic                out_ready,
  output acc_t [PE-1:0]       out_data,
  // weight / bias preload
  input  logic        wb_en,
  input  logic        wb_bias,
  input  logic [15:0] wb_oc,
  input  logic [15:0] wb_ic,
  input  logic [7:0]  wb_kk,
  input  logic [31:0] wb_data,
  // status
  output logic [$clog2(((OC+PE-1)/PE)+1)-1:0] fold,
  output logic        frame_done
);
  localparam int unsigned OH   = (IH + 2*P - K) / S + 1;
  localparam int unsigned OW   = (IW + 2*P - K) / S + 1;
  localparam int unsigned FOLD = (OC + PE - 1) / PE;
  localparam int unsigned KK   = K * K;
  localparam int unsigned CW   = $clog2(IC + 1);

  typedef enum logic [2:0] {S_LOAD, S_COMP, S_DRAIN, S_OUT, S_FLUSH} state_t;
  state_t state;

  logic [15:0] oh, ow, col, rows_loaded;
  logic [CW-1:0] c_issue;
  logic [CW:0]   acc_cnt;
  acc_t          sum [PE];

  // Last input row the output row `r` needs (clamped to the image).
  function automatic logic [15:0] need_hi(input logic [15:0] r);
    int v;
    v = int'(r) * int'(S) - int'(P) + int'(K) - 1;
    if (v > int'(IH) - 1) v = int'(IH) - 1;
    return 16'(v);
  endfunction

  // ---------------- line buffer ----------------
  act_t lb_wr_data [IC];
  act_t win [KK];
  logic lb_wr, lb_row_done, lb_frame_start;
  logic [$clog2(K+1)-1:0] lb_head;

  always_comb for (int c = 0; c < IC; c++) lb_wr_data[c] = in_data[c];

  line_buffer #(.K(K), .IH(IH), .IW(IW), .IC(IC)) u_lb (
    .clk, .rst_n,
    .frame_start(lb_frame_start),
    .wr_en(lb_wr),
    .wr_col(($clog2(IW+1))'(col)),
    .wr_data(lb_wr_data),
    .wr_row_done(lb_row_done),
    .rd_top(16'($signed(32'(oh) * S) - $signed(P))),
    .rd_left(16'($signed(32'(ow) * S) - $signed(P))),
    .rd_ch(($clog2(IC+1))'(c_issue)),
    .win(win),
    .head(lb_head)
  );

  // ---------------- weights / biases ----------------
  wgt_t rd_w [PE][KK];
  acc_t rd_b [PE];

  weight_bias_buffer #(.PE(PE), .OC(OC), .IC(IC), .KK(KK)) u_wb (
    .clk,
    .wr_en(wb_en), .wr_bias(wb_bias), .wr_oc(wb_oc), .wr_ic(wb_ic),
    .wr_kk(wb_kk), .wr_data(wb_data),
    .rd_fold(fold), .rd_ic(($clog2(IC+1))'(c_issue)),
    .rd_w(rd_w), .rd_b(rd_b)
  );

  // ---------------- PE array (window broadcast to every PE) ----------------
  logic pe_issue;
  logic [PE-1:0] pe_valid;
  acc_t psum [PE];

  for (genvar p = 0; p < PE; p++) begin : g_pe
    conv_pe #(.K(K)) u_pe (
      .clk, .rst_n,
      .in_valid(pe_issue),
      .win(win),
      .wgt(rd_w[p]),
      .out_valid(pe_valid[p]),
      .psum(psum[p])
    );
  end

  // ---------------- control ----------------
  wire beat      = in_valid && in_ready;
  wire row_end   = beat && (col == 16'(IW-1));
  wire last_fold = (32'(fold) == FOLD-1);

  assign in_ready       = (state == S_LOAD) || (state == S_FLUSH);
  assign lb_wr          = beat;
  assign lb_row_done    = row_end;
  assign pe_issue       = (state == S_COMP);
  assign out_valid      = (state == S_OUT);

  always_comb begin
    for (int p = 0; p < PE; p++)
      out_data[p] = (32'(fold) * PE + p < OC) ? sum[p] : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_LOAD;
      fold           <= '0;
      oh             <= '0;
      ow             <= '0;
      col            <= '0;
      rows_loaded    <= '0;
      c_issue        <= '0;
      acc_cnt        <= '0;
      frame_done     <= 1'b0;
      lb_frame_start <= 1'b0;
      for (int p = 0; p < PE; p++) sum[p] <= '0;
    end else begin
      frame_done     <= 1'b0;
      lb_frame_start <= 1'b0;

      // input beat bookkeeping (LOAD and FLUSH)
      if (beat) begin
        col <= row_end ? '0 : col + 1'b1;
        if (row_end) rows_loaded <= rows_loaded + 1'b1;
      end

      // accumulate PE results as they leave the PE pipeline
      if (pe_valid[0]) begin
        for (int p = 0; p < PE; p++) sum[p] <= sum[p] + psum[p];
        acc_cnt <= acc_cnt + 1'b1;
      end

      unique case (state)
        S_LOAD: begin
          if (row_end && (rows_loaded + 1'b1 > need_hi(oh))) begin
            state   <= S_COMP;
            c_issue <= '0;
            acc_cnt <= '0;
            for (int p = 0; p < PE; p++) sum[p] <= rd_b[p];
          end
        end
        S_COMP: begin
          if (32'(c_issue) == IC-1) state <= S_DRAIN;
          else c_issue <= c_issue + 1'b1;
        end
        S_DRAIN: begin
          if (32'(acc_cnt) == IC) state <= S_OUT;
        end
        S_OUT: begin
          if (out_ready) begin
            c_issue <= '0;
            acc_cnt <= '0;
            for (int p = 0; p < PE; p++) sum[p] <= rd_b[p];
            if (ow != 16'(OW-1)) begin
              ow    <= ow + 1'b1;
              state <= S_COMP;
            end else begin
              ow <= '0;
              if (oh != 16'(OH-1)) begin
                oh    <= oh + 1'b1;
                state <= (rows_loaded > need_hi(oh + 1'b1)) ? S_COMP : S_LOAD;
              end else begin
                oh    <= '0;
                state <= (rows_loaded == 16'(IH)) ? S_LOAD : S_FLUSH;
                if (rows_loaded == 16'(IH)) begin
                  rows_loaded    <= '0;
                  lb_frame_start <= 1'b1;
                  fold           <= last_fold ? '0 : fold + 1'b1;
                  frame_done     <= last_fold;
                end
              end
            end
          end
        end
        S_FLUSH: begin
          if (row_end && (rows_loaded + 1'b1 == 16'(IH))) begin
            state          <= S_LOAD;
            rows_loaded    <= '0;
            lb_frame_start <= 1'b1;
            fold           <= last_fold ? '0 : fold + 1'b1;
            frame_done     <= last_fold;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end
endmodule
