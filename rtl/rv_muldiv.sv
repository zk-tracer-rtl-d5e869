// rv_muldiv: RISC-V M-extension unit in the EX stage of the MTU core.
// Multiplies (MUL, MULH, MULHSU, MULHU) are combinational: both operands are
// extended to 33 bits (sign or zero per funct3) and the 66-bit product gives
// the low or high word, so a multiply costs no extra cycle.
// Divides (DIV, DIVU, REM, REMU) use a radix-2 restoring divider on the
// operand magnitudes, one quotient bit per clock. The first cycle of a
// divide in EX latches the operands, 32 cycles of shift-and-subtract follow,
// then the signs are fixed and the result is held in `y` until the pipeline
// moves on (`advance`). `stall` is high from the first cycle until the
// result is ready, so a divide occupies EX for 34 cycles. Division by zero
// and the overflow case (-2^31 / -1) give the results the ISA defines
// (all ones / the dividend; -2^31 / 0).
// Interface: `valid` marks an M instruction in EX with funct3 `f3` and
// forwarded operands `a`, `b`; `advance` is high when EX hands its
// instruction to MEM. `y` is valid whenever `stall` is low.
// The paper bases the MTU on an RV32IMC core without describing its
// multiplier; the single-cycle multiply and the iterative divider are this
// design's choice.
module rv_muldiv (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        valid,
  input  logic [2:0]  f3,
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic        advance,
  output logic        stall,
  output logic [31:0] y
);
  // ---------------- multiply ----------------
  logic signed [32:0] ma, mb;
  logic signed [65:0] prod;
  always_comb begin
    ma   = {(f3 == 3'd1 || f3 == 3'd2) & a[31], a};   // MULH, MULHSU: a signed
    mb   = {(f3 == 3'd1) & b[31], b};                  // MULH: b signed
    prod = ma * mb;
  end

  // ---------------- divide ----------------
  typedef enum logic [1:0] {D_IDLE, D_RUN, D_DONE} dst_e;
  dst_e        dst;
  logic [5:0]  cnt;
  logic [31:0] quo, dvs, dres;
  logic [32:0] rem;
  logic        neg_q, neg_r, by_zero, is_rem;
  logic [31:0] a_in;
  logic        is_div, sgn;
  assign is_div = valid && f3[2];
  assign sgn    = !f3[0];                                 // DIV, REM signed
  assign stall  = is_div && dst != D_DONE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dst <= D_IDLE; cnt <= '0; quo <= '0; dvs <= '0; rem <= '0;
      neg_q <= 1'b0; neg_r <= 1'b0; by_zero <= 1'b0; is_rem <= 1'b0; a_in <= '0;
    end else begin
      unique case (dst)
        D_IDLE: if (is_div) begin
          quo     <= (sgn && a[31]) ? -a : a;
          dvs     <= (sgn && b[31]) ? -b : b;
          rem     <= '0;
          neg_q   <= sgn && (a[31] ^ b[31]);
          neg_r   <= sgn && a[31];
          by_zero <= (b == '0);
          is_rem  <= f3[1];
          a_in    <= a;
          cnt     <= 6'd32;
          dst     <= D_RUN;
        end
        D_RUN: begin
          logic [32:0] sh, df;
          sh = {rem[31:0], quo[31]};
          df = sh - {1'b0, dvs};
          if (!df[32]) begin rem <= df; quo <= {quo[30:0], 1'b1}; end
          else begin rem <= sh; quo <= {quo[30:0], 1'b0}; end
          cnt <= cnt - 1'b1;
          if (cnt == 6'd1) dst <= D_DONE;
        end
        D_DONE: begin
          if (advance) dst <= D_IDLE;
        end
        default: dst <= D_IDLE;
      endcase
    end
  end

  always_comb begin
    if (by_zero)     dres = is_rem ? a_in : '1;
    else if (is_rem) dres = neg_r ? -rem[31:0] : rem[31:0];
    else             dres = neg_q ? -quo : quo;
  end

  always_comb begin
    unique case (f3)
      3'd0:    y = prod[31:0];
      3'd1,
      3'd2,
      3'd3:    y = prod[63:32];
      default: y = dres;
    endcase
  end

  assert property (@(posedge clk) disable iff (!rst_n) dst == D_DONE && advance |-> is_div);
endmodule
