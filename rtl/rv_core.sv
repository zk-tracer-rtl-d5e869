// rv_core: five-stage in-order RV32IM core of the Main Trace Unit, extended
// with the trace_on / trace_off instructions.
//
// Stages IF, ID, EX, MEM, WB. Operands are forwarded from EX/MEM and MEM/WB
// into EX; a load followed by a dependent instruction stalls ID for one
// cycle; branches and jumps resolve in EX and flush the two younger stages.
// The register file writes in WB and is bypassed to ID in the same cycle.
// IMEM and DMEM are read combinationally (word addressed); stores write at
// the clock edge in MEM.
// M-extension instructions (funct7 0000001 on the OP opcode) run in
// rv_muldiv: multiplies take one EX cycle like any ALU operation; a divide
// or remainder holds IF, ID and EX for 34 cycles while MEM receives bubbles.
// Custom instructions use the custom-0 major opcode (0001011): funct3 0 is
// trace_on, funct3 1 is trace_off; they do nothing else in the core. EBREAK
// or ECALL ends the program: fetch stops when it is decoded and halted rises
// when it retires. run must be high for the core to leave reset state at
// pc 0; freeze holds every stage (used when the trace path is full).
// Every retiring instruction is reported on the ret_* snoop port with the
// values the trace collection unit records: pc, instruction, both source
// operands as used in EX, ALU result, memory address and data, and the value
// written to rd (zero where not applicable).
// The paper bases this core on SCR1 (an RV32IMC design) and only states its
// pipeline depth and in-order issue; the microarchitecture and the custom
// encodings are this design's. The compressed (C) extension, CSRs and
// interrupts are not implemented.
module rv_core
  import zkt_pkg::*;
#(
  parameter int unsigned IAW = 12,
  parameter int unsigned DAW = 12
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            run,
  input  logic            freeze,
  output logic            halted,
  output logic [IAW-1:0]  imem_addr,
  input  logic [31:0]     imem_rdata,
  output logic [DAW-1:0]  dmem_addr,
  output logic [3:0]      dmem_be,
  output logic [31:0]     dmem_wdata,
  input  logic [31:0]     dmem_rdata,
  output logic            ret_valid,
  output logic            ret_trace_on,
  output logic            ret_trace_off,
  output raw_row_t        ret_row
);
  typedef enum logic [3:0] {A_ADD, A_SUB, A_SLL, A_SLT, A_SLTU, A_XOR, A_SRL,
                            A_SRA, A_OR, A_AND, A_PASSB} alu_e;
  typedef struct packed {
    logic        valid;
    logic [31:0] pc, instr, imm;
    logic [4:0]  rs1, rs2, rd;
    logic        we, ld, st, br, jal, jalr, a_pc, b_imm, ton, toff, halt, md;
    logic [2:0]  f3;
    alu_e        op;
    logic [31:0] v1, v2;
  } idex_t;
  typedef struct packed {
    logic        valid;
    logic [31:0] pc, instr, a, b, alu, sdata;
    logic [4:0]  rd;
    logic        we, ld, st, ton, toff, halt;
    logic [2:0]  f3;
  } exmem_t;
  typedef struct packed {
    logic        valid;
    logic [31:0] pc, instr, a, b, alu, maddr, mdata, wval;
    logic [4:0]  rd;
    logic        we, ton, toff, halt;
  } memwb_t;

  logic [31:0] rf [32];
  logic [31:0] pc;
  logic        ifid_v, halting, started;
  logic [31:0] ifid_pc, ifid_ir;
  idex_t       ex;
  exmem_t      mem;
  memwb_t      wb;

  // ---------------- IF ----------------
  assign imem_addr = IAW'(pc >> 2);

  // ---------------- ID: decode ----------------
  idex_t d;
  logic  ld_use, redirect;
  logic [31:0] target;
  always_comb begin
    logic [31:0] ir;
    logic [6:0]  opc;
    ir  = ifid_ir;
    opc = ir[6:0];
    d = '0;
    d.valid = ifid_v;
    d.pc = ifid_pc; d.instr = ir;
    d.rs1 = ir[19:15]; d.rs2 = ir[24:20]; d.rd = ir[11:7]; d.f3 = ir[14:12];
    d.op = A_ADD;
    unique case (opc)
      7'b0110111: begin d.we = 1; d.b_imm = 1; d.op = A_PASSB; d.imm = {ir[31:12], 12'b0}; end
      7'b0010111: begin d.we = 1; d.a_pc = 1; d.b_imm = 1; d.imm = {ir[31:12], 12'b0}; end
      7'b1101111: begin d.we = 1; d.jal = 1;
                        d.imm = {{12{ir[31]}}, ir[19:12], ir[20], ir[30:21], 1'b0}; end
      7'b1100111: begin d.we = 1; d.jalr = 1; d.imm = {{20{ir[31]}}, ir[31:20]}; end
      7'b1100011: begin d.br = 1;
                        d.imm = {{20{ir[31]}}, ir[7], ir[30:25], ir[11:8], 1'b0}; end
      7'b0000011: begin d.we = 1; d.ld = 1; d.b_imm = 1; d.imm = {{20{ir[31]}}, ir[31:20]}; end
      7'b0100011: begin d.st = 1; d.b_imm = 1; d.imm = {{20{ir[31]}}, ir[31:25], ir[11:7]}; end
      7'b0010011, 7'b0110011: begin
        d.we = 1; d.b_imm = (opc == 7'b0010011);
        d.imm = {{20{ir[31]}}, ir[31:20]};
        unique case (ir[14:12])
          3'd0: d.op = (opc == 7'b0110011 && ir[30]) ? A_SUB : A_ADD;
          3'd1: d.op = A_SLL;
          3'd2: d.op = A_SLT;
          3'd3: d.op = A_SLTU;
          3'd4: d.op = A_XOR;
          3'd5: d.op = ir[30] ? A_SRA : A_SRL;
          3'd6: d.op = A_OR;
          default: d.op = A_AND;
        endcase
        d.md = (opc == 7'b0110011) && (ir[31:25] == 7'b0000001);   // M extension
      end
      7'b1110011: d.halt = (ir[14:12] == 3'd0);
      OPC_CUSTOM0: begin d.ton = (ir[14:12] == F3_TRACE_ON); d.toff = (ir[14:12] == F3_TRACE_OFF); end
      default: ;   // FENCE and unknown opcodes retire as no-ops
    endcase
    if (d.rd == 5'd0) d.we = 1'b0;
    // register read with write-back bypass
    d.v1 = (wb.valid && wb.we && wb.rd == d.rs1) ? wb.wval : rf[d.rs1];
    d.v2 = (wb.valid && wb.we && wb.rd == d.rs2) ? wb.wval : rf[d.rs2];
    if (d.rs1 == 5'd0) d.v1 = '0;
    if (d.rs2 == 5'd0) d.v2 = '0;
    ld_use = ifid_v && ex.valid && ex.ld && ex.rd != 5'd0 &&
             (ex.rd == d.rs1 || ex.rd == d.rs2);
  end

  // ---------------- EX ----------------
  logic [31:0] fa, fb, opa, opb, alu, md_y;
  logic        take, md_stall;
  rv_muldiv u_md (
    .clk, .rst_n, .valid(ex.valid && ex.md), .f3(ex.f3), .a(fa), .b(fb),
    .advance(!freeze && !md_stall), .stall(md_stall), .y(md_y));
  always_comb begin
    fa = ex.v1; fb = ex.v2;
    if (wb.valid && wb.we && wb.rd == ex.rs1 && ex.rs1 != 0) fa = wb.wval;
    if (wb.valid && wb.we && wb.rd == ex.rs2 && ex.rs2 != 0) fb = wb.wval;
    if (mem.valid && mem.we && !mem.ld && mem.rd == ex.rs1 && ex.rs1 != 0) fa = mem.alu;
    if (mem.valid && mem.we && !mem.ld && mem.rd == ex.rs2 && ex.rs2 != 0) fb = mem.alu;
    opa = ex.a_pc ? ex.pc : fa;
    opb = ex.b_imm ? ex.imm : fb;
    unique case (ex.op)
      A_SUB:   alu = opa - opb;
      A_SLL:   alu = opa << opb[4:0];
      A_SLT:   alu = {31'b0, $signed(opa) < $signed(opb)};
      A_SLTU:  alu = {31'b0, opa < opb};
      A_XOR:   alu = opa ^ opb;
      A_SRL:   alu = opa >> opb[4:0];
      A_SRA:   alu = 32'($signed(opa) >>> opb[4:0]);
      A_OR:    alu = opa | opb;
      A_AND:   alu = opa & opb;
      A_PASSB: alu = opb;
      default: alu = opa + opb;
    endcase
    if (ex.jal || ex.jalr) alu = ex.pc + 32'd4;
    if (ex.md) alu = md_y;
    unique case (ex.f3)
      3'd0: take = (fa == fb);
      3'd1: take = (fa != fb);
      3'd4: take = ($signed(fa) <  $signed(fb));
      3'd5: take = ($signed(fa) >= $signed(fb));
      3'd6: take = (fa <  fb);
      3'd7: take = (fa >= fb);
      default: take = 1'b0;
    endcase
    redirect = ex.valid && (ex.jal || ex.jalr || (ex.br && take));
    target   = ex.jalr ? ((fa + ex.imm) & ~32'd1) : (ex.pc + ex.imm);
  end

  // ---------------- MEM ----------------
  logic [31:0] ldata, sdata_sh;
  logic [3:0]  be;
  always_comb begin
    logic [1:0]  off;
    logic [31:0] w;
    off = mem.alu[1:0];
    w   = dmem_rdata >> (8 * off);
    unique case (mem.f3)
      3'd0: ldata = {{24{w[7]}},  w[7:0]};
      3'd1: ldata = {{16{w[15]}}, w[15:0]};
      3'd4: ldata = {24'b0, w[7:0]};
      3'd5: ldata = {16'b0, w[15:0]};
      default: ldata = dmem_rdata;
    endcase
    sdata_sh = mem.sdata << (8 * off);
    unique case (mem.f3[1:0])
      2'd0: be = 4'b0001 << off;
      2'd1: be = 4'b0011 << off;
      default: be = 4'b1111;
    endcase
  end
  assign dmem_addr  = DAW'(mem.alu >> 2);
  assign dmem_wdata = sdata_sh;
  assign dmem_be    = (mem.valid && mem.st && !freeze) ? be : 4'b0;

  // ---------------- WB / retire ----------------
  assign ret_valid     = wb.valid && !freeze;
  assign ret_trace_on  = wb.ton;
  assign ret_trace_off = wb.toff;
  always_comb begin
    ret_row = '0;
    ret_row[COL_PC]    = wb.pc;
    ret_row[COL_INSTR] = wb.instr;
    ret_row[COL_RS1]   = wb.a;
    ret_row[COL_RS2]   = wb.b;
    ret_row[COL_ALU]   = wb.alu;
    ret_row[COL_MADDR] = wb.maddr;
    ret_row[COL_MDATA] = wb.mdata;
    ret_row[COL_RD]    = wb.we ? wb.wval : '0;
  end

  // ---------------- register file write (WB) ----------------
  always_ff @(posedge clk) begin
    if (!freeze && wb.valid && wb.we) rf[wb.rd] <= wb.wval;
  end

  // ---------------- pipeline registers ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc <= '0; ifid_v <= 1'b0; ifid_pc <= '0; ifid_ir <= '0;
      ex <= '0; mem <= '0; wb <= '0; halted <= 1'b0; halting <= 1'b0; started <= 1'b0;
    end else if (!freeze) begin
      if (run) started <= 1'b1;
      // WB
      if (wb.valid && wb.halt) halted <= 1'b1;
      // MEM -> WB
      wb.valid <= mem.valid;
      wb.pc <= mem.pc; wb.instr <= mem.instr; wb.a <= mem.a; wb.b <= mem.b;
      wb.alu <= mem.alu; wb.rd <= mem.rd; wb.we <= mem.we;
      wb.ton <= mem.ton; wb.toff <= mem.toff; wb.halt <= mem.halt;
      wb.maddr <= (mem.ld || mem.st) ? mem.alu : '0;
      wb.mdata <= mem.ld ? ldata : (mem.st ? mem.sdata : '0);
      wb.wval  <= mem.ld ? ldata : mem.alu;
      // EX -> MEM
      mem.valid <= ex.valid && !md_stall;   // bubble while a divide runs
      mem.pc <= ex.pc; mem.instr <= ex.instr; mem.a <= fa; mem.b <= fb;
      mem.alu <= alu; mem.sdata <= fb; mem.rd <= ex.rd; mem.we <= ex.we;
      mem.ld <= ex.ld; mem.st <= ex.st; mem.ton <= ex.ton; mem.toff <= ex.toff;
      mem.halt <= ex.halt; mem.f3 <= ex.f3;
      // ID -> EX (everything before MEM holds while a divide runs)
      if (md_stall) ;
      else if (redirect || ld_use) ex <= '0;
      else ex <= d;
      // IF -> ID, PC
      if (md_stall) ;
      else if (redirect) begin
        ifid_v <= 1'b0; pc <= target; halting <= 1'b0;
      end else if (!ld_use) begin
        if (ifid_v && d.halt) halting <= 1'b1;
        if ((run || started) && !halting && !(ifid_v && d.halt) && !halted) begin
          ifid_v <= 1'b1; ifid_pc <= pc; ifid_ir <= imem_rdata; pc <= pc + 32'd4;
        end else ifid_v <= 1'b0;
      end
    end
  end
endmodule
