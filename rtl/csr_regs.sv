// csr_regs: host-visible control and status registers and the task sequencer.
//
// Register map (word offsets in bytes, 32-bit registers):
//   0x00 CTRL        write 1 to bit 0: start a task (ignored while busy)
//   0x04 STATUS      bit 0 busy, bit 1 done (write 1 to clear; clears irq)
//   0x08 TRACE_BASE  main-memory base of the main trace (TMEM path)
//   0x0C PERM_BASE   main-memory base of the permutation trace (DMA path)
//   0x10 NUM_COLS    trace columns folded into the permutation (1..8)
//   0x14 IRQ_EN      bit 0: raise irq when a task is done
//   0x18 ROWS        main-trace rows captured in the last task (read only)
//   0x1C BETA, 0x20 GAMMA  challenges used in the last task (read only)
// The bus is a simple one-cycle request: h_req with h_we, h_addr, h_wdata;
// h_rdata is valid in the same cycle.
//
// Sequencer: after start it takes two samples from the random number source
// (trng_valid/trng_data), reduces them to field elements as beta and gamma,
// starts the PTU and runs the MTU. When the core has halted and every trace
// row has left the TCU and the TMEM path, it raises flush so the PTU
// finishes the last batch; once the PTU reports done and the DMA engine is
// idle it sets done and, if enabled, the interrupt.
// The paper lists CSRs, start command, TRNG challenges and the completion
// interrupt; the register map and sequencing are this design's.
module csr_regs
  import zkt_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        h_req,
  input  logic        h_we,
  input  logic [7:0]  h_addr,
  input  logic [31:0] h_wdata,
  output logic [31:0] h_rdata,
  input  logic        trng_valid,
  input  logic [31:0] trng_data,
  output logic        trng_req,
  // control of the datapath
  output logic        task_clear,
  output logic        ptu_start,
  output logic        mtu_run,
  output logic        flush,
  output fe_t         beta,
  output fe_t         gamma,
  output logic [31:0] trace_base,
  output logic [31:0] perm_base,
  output logic [3:0]  num_cols,
  input  logic        mtu_halted,
  input  logic        trace_drained,
  input  logic        ptu_done,
  input  logic        dma_idle,
  input  logic [31:0] rows,
  output logic        busy,
  output logic        irq
);
  typedef enum logic [2:0] {T_IDLE, T_BETA, T_GAMMA, T_RUN, T_FLUSH, T_DMA} tstate_e;
  tstate_e ts;
  logic    done_q, irq_en;
  fe_t     rnd;
  fast_mod_red u_red (.x(trng_data), .y(rnd));

  assign busy     = (ts != T_IDLE);
  assign trng_req = (ts == T_BETA) || (ts == T_GAMMA);
  assign irq      = done_q && irq_en;
  assign flush    = (ts == T_FLUSH);

  always_comb begin
    unique case (h_addr)
      8'h00: h_rdata = '0;
      8'h04: h_rdata = {30'b0, done_q, busy};
      8'h08: h_rdata = trace_base;
      8'h0C: h_rdata = perm_base;
      8'h10: h_rdata = {28'b0, num_cols};
      8'h14: h_rdata = {31'b0, irq_en};
      8'h18: h_rdata = rows;
      8'h1C: h_rdata = {1'b0, beta};
      8'h20: h_rdata = {1'b0, gamma};
      default: h_rdata = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts <= T_IDLE; done_q <= 1'b0; irq_en <= 1'b0; beta <= '0; gamma <= '0;
      trace_base <= '0; perm_base <= '0; num_cols <= 4'd8;
      task_clear <= 1'b0; ptu_start <= 1'b0; mtu_run <= 1'b0;
    end else begin
      task_clear <= 1'b0; ptu_start <= 1'b0;
      if (h_req && h_we) begin
        unique case (h_addr)
          8'h00: if (h_wdata[0] && ts == T_IDLE) begin
                   ts <= T_BETA; done_q <= 1'b0; task_clear <= 1'b1;
                 end
          8'h04: if (h_wdata[1]) done_q <= 1'b0;
          8'h08: if (ts == T_IDLE) trace_base <= h_wdata;
          8'h0C: if (ts == T_IDLE) perm_base <= h_wdata;
          8'h10: if (ts == T_IDLE) num_cols <= (h_wdata[3:0] == 0 || h_wdata[3:0] > 4'(NCOLS))
                                               ? 4'(NCOLS) : h_wdata[3:0];
          8'h14: irq_en <= h_wdata[0];
          default: ;
        endcase
      end
      unique case (ts)
        T_BETA:  if (trng_valid) begin beta  <= rnd; ts <= T_GAMMA; end
        T_GAMMA: if (trng_valid) begin
                   gamma <= rnd; ts <= T_RUN; ptu_start <= 1'b1; mtu_run <= 1'b1;
                 end
        T_RUN:   if (mtu_halted && trace_drained) ts <= T_FLUSH;
        T_FLUSH: if (ptu_done) ts <= T_DMA;
        T_DMA:   if (dma_idle) begin ts <= T_IDLE; done_q <= 1'b1; end
        default: ;
      endcase
    end
  end
endmodule
