// tb_csr_regs: register write/read-back, start sequencing (two random
// samples reduced mod p into beta and gamma, ptu_start and mtu_run), the
// wait for the core and trace path, flush, the wait for PTU done and DMA
// idle, the done bit, the interrupt and its acknowledge, and that
// configuration writes are ignored while busy.
module tb_csr_regs;
  import zkt_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, h_req = 0, h_we = 0;
  logic [7:0] h_addr = '0;
  logic [31:0] h_wdata = '0, h_rdata, trng_data = '0, trace_base, perm_base, rows = 32'd77;
  logic trng_valid = 0, trng_req, task_clear, ptu_start, mtu_run, flush, busy, irq;
  logic mtu_halted = 0, trace_drained = 0, ptu_done = 0, dma_idle = 1;
  fe_t beta, gamma;
  logic [3:0] num_cols;
  always #5 clk = ~clk;
  csr_regs dut (.*);
  task automatic chk(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask
  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); h_req = 1; h_we = 1; h_addr = a; h_wdata = d;
    @(negedge clk); h_req = 0; h_we = 0;
  endtask
  logic [31:0] R [9];
  task automatic rd_all();
    for (int i = 0; i < 9; i++) begin h_addr = 8'(4 * i); #1; R[i] = h_rdata; end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int n_start = 0, n_clear = 0;
  always @(posedge clk) begin
    if (ptu_start) n_start++;
    if (task_clear) n_clear++;
  end
  initial begin
    logic [31:0] s1, s2;
    repeat (2) @(negedge clk); rst_n = 1;
    wr(8'h08, 32'h1000_0000); wr(8'h0C, 32'h2000_0000); wr(8'h10, 32'd6); wr(8'h14, 32'd1);
    rd_all();
    chk(R[2] == 32'h1000_0000 && trace_base == 32'h1000_0000, "TRACE_BASE");
    rd_all();
    chk(R[3] == 32'h2000_0000 && perm_base == 32'h2000_0000, "PERM_BASE");
    rd_all();
    chk(R[4] == 32'd6 && num_cols == 4'd6, "NUM_COLS");
    wr(8'h10, 32'd0); chk(num_cols == 4'(NCOLS), "NUM_COLS 0 -> all");
    wr(8'h10, 32'd6);
    rd_all();
    chk(R[6] == 32'd77, "ROWS");
    wr(8'h00, 32'd1);
    rd_all();
    chk(busy && R[1] == 32'd1 && trng_req && n_clear == 1, "busy after start");
    wr(8'h08, 32'hDEAD_0000); chk(trace_base == 32'h1000_0000, "locked while busy");
    s1 = 32'hFFFF_FFF0; s2 = $urandom;
    @(negedge clk); trng_valid = 1; trng_data = s1;
    @(negedge clk); trng_data = s2;
    @(negedge clk); trng_valid = 0;
    chk(64'(beta) == 64'(s1) % RP && 64'(gamma) == 64'(s2) % RP, "challenges");
    rd_all();
    chk(R[7] == {1'b0, beta} && R[8] == {1'b0, gamma}, "challenge registers");
    chk(n_start == 1 && mtu_run && !trng_req, "ptu started, mtu running");
    repeat (5) @(negedge clk);
    mtu_halted = 1; @(negedge clk);
    chk(!flush, "no flush before trace drained");
    trace_drained = 1; @(negedge clk); @(negedge clk);
    chk(flush, "flush");
    dma_idle = 0;
    ptu_done = 1; @(negedge clk); ptu_done = 0;
    repeat (3) @(negedge clk);
    chk(busy && !irq, "waits for dma");
    dma_idle = 1; @(negedge clk); @(negedge clk);
    rd_all();
    chk(!busy && R[1] == 32'd2 && irq, "done + irq");
    wr(8'h04, 32'd2);
    rd_all();
    chk(!irq && R[1] == 32'd0, "irq acknowledged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
