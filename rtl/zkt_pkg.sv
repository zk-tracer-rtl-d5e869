// zkt_pkg: constants and types shared across the trace accelerator.
// The trace lives in the BabyBear prime field p = 2^31 - 2^27 + 1; every
// field element is carried as a 31-bit word below p. Montgomery arithmetic
// uses R = 2^32. The constants below are derived from p:
//   BARRETT_M = floor(2^62 / p), MONT_NPRIME = -p^-1 mod 2^32,
//   MONT_R2   = 2^64 mod p,      MONT_ONE    = 2^32 mod p.
// The main-trace row format (eight columns) is this design's own choice.
package zkt_pkg;
  localparam int unsigned FW = 31;                       // field element width
  typedef logic [FW-1:0] fe_t;
  localparam fe_t           P           = 31'h7800_0001;
  localparam logic [31:0]   BARRETT_M   = 32'h8888_8887;
  localparam logic [31:0]   MONT_NPRIME = 32'h77FF_FFFF;
  localparam fe_t           MONT_R2     = 31'h45DD_DDE3;
  localparam fe_t           MONT_ONE    = 31'h0FFF_FFFE;

  // Main-trace row: one entry per traced instruction.
  localparam int unsigned NCOLS = 8;
  typedef enum logic [2:0] {
    COL_PC = 3'd0, COL_INSTR = 3'd1, COL_RS1 = 3'd2, COL_RS2 = 3'd3,
    COL_ALU = 3'd4, COL_MADDR = 3'd5, COL_MDATA = 3'd6, COL_RD = 3'd7
  } col_e;
  typedef logic [NCOLS-1:0][31:0] raw_row_t;   // captured 32-bit words
  typedef fe_t  [NCOLS-1:0]       row_t;       // after FastModRed

  // Custom instructions (custom-0 major opcode).
  localparam logic [6:0] OPC_CUSTOM0 = 7'b0001011;
  localparam logic [2:0] F3_TRACE_ON  = 3'd0;
  localparam logic [2:0] F3_TRACE_OFF = 3'd1;
endpackage
