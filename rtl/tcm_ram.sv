// tcm_ram: tightly-coupled memory of the MTU (used for both IMEM and DMEM).
// DEPTH 32-bit words. Core port: combinational read, byte-enabled write at
// the clock edge. Host port: word read/write used to load programs and data
// and to read results back; the core port wins a same-address conflict.
// Written as a register array in place of an SRAM macro.
module tcm_ram #(
  parameter int unsigned DEPTH = 4096
) (
  input  logic                     clk,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [3:0]               be,
  input  logic [31:0]              wdata,
  output logic [31:0]              rdata,
  input  logic                     h_we,
  input  logic [$clog2(DEPTH)-1:0] h_addr,
  input  logic [31:0]              h_wdata,
  output logic [31:0]              h_rdata
);
  logic [31:0] mem [DEPTH];
  assign rdata   = mem[addr];
  assign h_rdata = mem[h_addr];
  always_ff @(posedge clk) begin
    if (h_we) mem[h_addr] <= h_wdata;
    for (int b = 0; b < 4; b++)
      if (be[b]) mem[addr][8*b +: 8] <= wdata[8*b +: 8];
  end
endmodule
