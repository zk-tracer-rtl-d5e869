// dma_engine: writes the permutation trace to main memory.
// It takes one vector of LANES consecutive rows (perm, sum) from the PTU and
// emits one 64-bit write per row, {sum, perm} with each value zero-extended
// to 32 bits, at base + row*8. Rows at or beyond rows_total are padding of a
// short last batch and are skipped. A new vector is accepted once the
// previous one is written. clear restarts the row index.
// The paper names a DMA engine for this path; the format is this design's.
module dma_engine
  import zkt_pkg::*;
#(
  parameter int unsigned LANES = 17
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic [31:0]         base,
  input  logic [31:0]         rows_total,
  input  logic                in_valid,
  output logic                in_ready,
  input  fe_t [LANES-1:0]     in_perm,
  input  fe_t [LANES-1:0]     in_sum,
  output logic                m_valid,
  input  logic                m_ready,
  output logic [31:0]         m_addr,
  output logic [63:0]         m_data,
  output logic                idle,
  output logic [31:0]         rows_written
);
  localparam int unsigned LW = (LANES > 1) ? $clog2(LANES) : 1;
  fe_t [LANES-1:0] perm_q, sum_q;
  logic            busy;
  logic [LW-1:0]   l;
  logic [31:0]     vbase;      // row index of lane 0 of the held vector
  logic [31:0]     row;

  assign in_ready = !busy;
  assign row      = vbase + 32'(l);
  assign m_valid  = busy && (row < rows_total);
  assign m_addr   = base + (row << 3);
  assign m_data   = {1'b0, sum_q[l], 1'b0, perm_q[l]};
  assign idle     = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; l <= '0; vbase <= '0; perm_q <= '0; sum_q <= '0; rows_written <= '0;
    end else if (clear) begin
      busy <= 1'b0; l <= '0; vbase <= '0; rows_written <= '0;
    end else begin
      if (!busy) begin
        if (in_valid) begin busy <= 1'b1; l <= '0; perm_q <= in_perm; sum_q <= in_sum; end
      end else if (!m_valid || m_ready) begin
        if (m_valid) rows_written <= rows_written + 1;
        if (32'(l) == LANES - 1) begin
          busy <= 1'b0; vbase <= vbase + LANES;
        end else l <= l + 1'b1;
      end
    end
  end
endmodule
