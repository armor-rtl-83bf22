// result_buffer: on-chip store of the classifier outputs.
//
// Collects the output vectors of the last engine (VEC 32-bit values per
// beat) into NRES entries that the host reads back after inference. start
// clears the entry counter and the done flag; done rises when NRES values
// have arrived (values of a final partial beat beyond NRES are dropped).
// The buffer is the design's result buffer; the read port and the done flag
// are this implementation's choices.
//
// Interface: in_valid/in_ready (always ready), rd_addr -> rd_data
// (combinational read), done.
module result_buffer
  import armor_pkg::*;
#(
  parameter int unsigned NRES = 10,
  parameter int unsigned VEC  = 10
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                      start,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  acc_t [VEC-1:0]            in_data,
  input  logic [$clog2(NRES+1)-1:0] rd_addr,
  output acc_t                      rd_data,
  output logic                      done
);
  acc_t mem [NRES];
  logic [31:0] cnt;

  assign in_ready = 1'b1;
  assign rd_data  = (32'(rd_addr) < NRES) ? mem[rd_addr] : '0;

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int i = 0; i < VEC; i++)
        if (cnt + i < NRES) mem[cnt + i] <= in_data[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; done <= 1'b0;
    end else if (start) begin
      cnt <= '0; done <= 1'b0;
    end else if (in_valid) begin
      cnt <= cnt + VEC;
      if (cnt + VEC >= NRES) done <= 1'b1;
    end
  end
endmodule
