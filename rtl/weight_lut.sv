// weight_lut: on-chip table of the precomputed weights beta^j.
// One write port (from the exponentiation unit) and one synchronous read
// port (weight preload into the systolic arrays): rdata is valid the cycle
// after raddr. Written as a register array; an SRAM macro would replace it.
module weight_lut
  import zkt_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  fe_t                      wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output fe_t                      rdata
);
  fe_t mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
