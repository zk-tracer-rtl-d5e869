// mtu: Main Trace Unit. The five-stage core (rv_core) with its IMEM and DMEM
// (tcm_ram) and the Trace Collection Unit (tcu) attached to its retire port.
// The host loads IMEM and DMEM through the host ports while the core is not
// running; run starts the program at pc 0, halted reports its end. Trace rows
// leave on two valid/ready ports (TMEM path and trace buffer); the TCU
// freezes the core while a row waits for either.
module mtu
  import zkt_pkg::*;
#(
  parameter int unsigned IMEM_WORDS = 4096,
  parameter int unsigned DMEM_WORDS = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        run,
  input  logic        clear,
  output logic        halted,
  // host access to IMEM / DMEM (sel: 0 IMEM, 1 DMEM)
  input  logic        h_we,
  input  logic        h_sel,
  input  logic [31:0] h_addr,
  input  logic [31:0] h_wdata,
  output logic [31:0] h_rdata,
  // trace outputs
  output row_t        row,
  output logic        tmem_valid,
  input  logic        tmem_ready,
  output logic        tbuf_valid,
  input  logic        tbuf_ready,
  output logic        trace_en,
  output logic [31:0] rows_captured,
  output logic [31:0] freeze_cycles
);
  localparam int unsigned IAW = $clog2(IMEM_WORDS);
  localparam int unsigned DAW = $clog2(DMEM_WORDS);
  logic [IAW-1:0] ia;
  logic [DAW-1:0] da;
  logic [31:0]    ird, dwd, drd, ih_rd, dh_rd;
  logic [3:0]     dbe;
  logic           freeze, rv, ron, roff, row_valid;
  raw_row_t       rrow;

  rv_core #(.IAW(IAW), .DAW(DAW)) u_core (
    .clk, .rst_n, .run, .freeze, .halted,
    .imem_addr(ia), .imem_rdata(ird),
    .dmem_addr(da), .dmem_be(dbe), .dmem_wdata(dwd), .dmem_rdata(drd),
    .ret_valid(rv), .ret_trace_on(ron), .ret_trace_off(roff), .ret_row(rrow));

  tcm_ram #(.DEPTH(IMEM_WORDS)) u_imem (
    .clk, .addr(ia), .be(4'b0), .wdata('0), .rdata(ird),
    .h_we(h_we && !h_sel), .h_addr(IAW'(h_addr >> 2)), .h_wdata, .h_rdata(ih_rd));
  tcm_ram #(.DEPTH(DMEM_WORDS)) u_dmem (
    .clk, .addr(da), .be(dbe), .wdata(dwd), .rdata(drd),
    .h_we(h_we && h_sel), .h_addr(DAW'(h_addr >> 2)), .h_wdata, .h_rdata(dh_rd));
  assign h_rdata = h_sel ? dh_rd : ih_rd;

  tcu u_tcu (
    .clk, .rst_n, .clear,
    .ret_valid(rv), .ret_trace_on(ron), .ret_trace_off(roff), .ret_row(rrow),
    .freeze, .trace_en, .row_valid, .row,
    .tmem_ready, .tbuf_ready, .tmem_valid, .tbuf_valid,
    .rows_captured, .freeze_cycles);
endmodule
