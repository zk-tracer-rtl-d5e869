// zk_tracer: top level of the trace-generation accelerator.
// The Main Trace Unit runs the guest program and emits one main-trace row
// per traced instruction. Each row is written to main memory through the
// TMEM writer and, at the same time, pushed into the on-chip trace buffer.
// The Permutation Trace Unit reads rows from the buffer, computes the
// permutation column and its running sum and hands them to the DMA engine,
// which writes them to main memory. The CSR block lets the host configure
// and start a task and raises irq at the end.
// External parts are ports: the host bus (CSRs and IMEM/DMEM loading), the
// random number source (trng_*), and the two main-memory write ports (TMEM
// rows, 8 x 32 bits per beat; DMA pairs, 64 bits per beat).
module zk_tracer
  import zkt_pkg::*;
#(
  parameter int unsigned LANES      = 17,
  parameter int unsigned NPE        = 8,
  parameter int unsigned BATCH      = 16,
  parameter int unsigned MAX_COLS   = 64,
  parameter int unsigned TB_DEPTH   = 512,
  parameter int unsigned IMEM_WORDS = 4096,
  parameter int unsigned DMEM_WORDS = 4096
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host: CSRs
  input  logic                  csr_req,
  input  logic                  csr_we,
  input  logic [7:0]            csr_addr,
  input  logic [31:0]           csr_wdata,
  output logic [31:0]           csr_rdata,
  output logic                  irq,
  // host: IMEM / DMEM
  input  logic                  mem_we,
  input  logic                  mem_sel,
  input  logic [31:0]           mem_addr,
  input  logic [31:0]           mem_wdata,
  output logic [31:0]           mem_rdata,
  // random number source
  output logic                  trng_req,
  input  logic                  trng_valid,
  input  logic [31:0]           trng_data,
  // main memory: main trace (TMEM)
  output logic                  tmem_valid,
  input  logic                  tmem_ready,
  output logic [31:0]           tmem_addr,
  output logic [NCOLS*32-1:0]   tmem_data,
  // main memory: permutation trace (DMA)
  output logic                  dma_valid,
  input  logic                  dma_ready,
  output logic [31:0]           dma_addr,
  output logic [63:0]           dma_data
);
  localparam int unsigned CW = $clog2(TB_DEPTH+1);

  logic task_clear, ptu_start, mtu_run, flush, halted, busy;
  fe_t  beta, gamma;
  logic [31:0] trace_base, perm_base, rows_captured, freeze_cycles, rows_total;
  logic [3:0]  num_cols;
  logic        ptu_done, ptu_busy, dma_idle, trace_en;

  // MTU -> TMEM writer / trace buffer
  row_t row;
  logic mt_valid, mt_ready, mb_valid, mb_ready;
  mtu #(.IMEM_WORDS(IMEM_WORDS), .DMEM_WORDS(DMEM_WORDS)) u_mtu (
    .clk, .rst_n, .run(mtu_run), .clear(task_clear), .halted,
    .h_we(mem_we), .h_sel(mem_sel), .h_addr(mem_addr), .h_wdata(mem_wdata), .h_rdata(mem_rdata),
    .row, .tmem_valid(mt_valid), .tmem_ready(mt_ready),
    .tbuf_valid(mb_valid), .tbuf_ready(mb_ready),
    .trace_en, .rows_captured, .freeze_cycles);

  logic [31:0] tmem_rows;
  tmem_writer u_tmem (
    .clk, .rst_n, .clear(task_clear), .base(trace_base),
    .in_valid(mt_valid), .in_ready(mt_ready), .in_row(row),
    .m_valid(tmem_valid), .m_ready(tmem_ready), .m_addr(tmem_addr), .m_data(tmem_data),
    .rows_written(tmem_rows));

  logic [CW-1:0]            tb_count, tb_release_n;
  logic [$clog2(TB_DEPTH)-1:0] tb_roff;
  row_t                     tb_rdata;
  logic                     tb_release;
  trace_buffer #(.DEPTH(TB_DEPTH)) u_tbuf (
    .clk, .rst_n, .wr_valid(mb_valid), .wr_ready(mb_ready), .wr_row(row),
    .count(tb_count), .roff(tb_roff), .rdata(tb_rdata),
    .release_en(tb_release), .release_n(tb_release_n));

  // PTU -> DMA
  logic p_valid, p_ready;
  fe_t [LANES-1:0] p_perm, p_sum;
  ptu #(.LANES(LANES), .NPE(NPE), .BATCH(BATCH), .MAX_COLS(MAX_COLS), .TB_DEPTH(TB_DEPTH)) u_ptu (
    .clk, .rst_n, .start(ptu_start), .beta, .gamma,
    .ncols(($clog2(NCOLS+1))'(num_cols)), .flush,
    .tb_count, .tb_roff, .tb_rdata, .tb_release, .tb_release_n,
    .out_valid(p_valid), .out_ready(p_ready), .out_perm(p_perm), .out_sum(p_sum),
    .rows_total, .busy(ptu_busy), .done(ptu_done));

  logic [31:0] dma_rows;
  dma_engine #(.LANES(LANES)) u_dma (
    .clk, .rst_n, .clear(task_clear), .base(perm_base), .rows_total,
    .in_valid(p_valid), .in_ready(p_ready), .in_perm(p_perm), .in_sum(p_sum),
    .m_valid(dma_valid), .m_ready(dma_ready), .m_addr(dma_addr), .m_data(dma_data),
    .idle(dma_idle), .rows_written(dma_rows));

  // every captured row has left the TCU and been written by the TMEM path
  logic trace_drained;
  assign trace_drained = (tmem_rows == rows_captured) && !mt_valid && !mb_valid;

  csr_regs u_csr (
    .clk, .rst_n, .h_req(csr_req), .h_we(csr_we), .h_addr(csr_addr), .h_wdata(csr_wdata),
    .h_rdata(csr_rdata), .trng_valid, .trng_data, .trng_req,
    .task_clear, .ptu_start, .mtu_run, .flush, .beta, .gamma,
    .trace_base, .perm_base, .num_cols,
    .mtu_halted(halted), .trace_drained, .ptu_done, .dma_idle,
    .rows(rows_captured), .busy, .irq);
endmodule
