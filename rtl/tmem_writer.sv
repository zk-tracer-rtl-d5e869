// tmem_writer: TMEM interface. Writes each main-trace row to main memory on
// a dedicated trace bus, one whole row (NCOLS 32-bit words, field elements
// zero-extended) per beat. The row of index i goes to base + i*NCOLS*4.
// Input and output use valid/ready; one register stage decouples them.
// clear restarts the row index at 0 (start of a task).
// The paper names this path; beat width and address layout are this design's.
module tmem_writer
  import zkt_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic [31:0]             base,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  row_t                    in_row,
  output logic                    m_valid,
  input  logic                    m_ready,
  output logic [31:0]             m_addr,
  output logic [NCOLS*32-1:0]     m_data,
  output logic [31:0]             rows_written
);
  logic [31:0] idx;
  assign in_ready = !m_valid || m_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0; m_addr <= '0; m_data <= '0; idx <= '0; rows_written <= '0;
    end else if (clear) begin
      m_valid <= 1'b0; idx <= '0; rows_written <= '0;
    end else begin
      if (m_valid && m_ready) rows_written <= rows_written + 1;
      if (in_ready) begin
        m_valid <= in_valid;
        if (in_valid) begin
          m_addr <= base + idx * (NCOLS * 4);
          for (int c = 0; c < NCOLS; c++) m_data[32*c +: 32] <= {1'b0, in_row[c]};
          idx <= idx + 1;
        end
      end
    end
  end
  assert property (@(posedge clk) disable iff (!rst_n) m_valid && !m_ready |=> m_valid && $stable(m_addr));
endmodule
