// tb_mtu: loads the shared test program through the host port, runs it with
// randomly stalling trace sinks and checks: the same rows arrive at both
// sinks in the same order, their count is the number of traced
// instructions, every row's instruction column is the program word at its
// pc column (mod p), the DMEM results read back through the host port, and
// that the core was frozen at least once by a full sink.
module tb_mtu;
  import zkt_pkg::*;
  import tb_ref_pkg::*;
  localparam int N_IT = 12;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, run = 0, clear = 0, halted;
  logic h_we = 0, h_sel = 0;
  logic [31:0] h_addr = '0, h_wdata = '0, h_rdata, rows_captured, freeze_cycles;
  row_t row;
  logic tmem_valid, tmem_ready = 0, tbuf_valid, tbuf_ready = 0, trace_en;
  always #5 clk = ~clk;
  mtu #(.IMEM_WORDS(256), .DMEM_WORDS(256)) dut (.*);
  task automatic chk(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  typedef fe_t [NCOLS-1:0] r_t;
  r_t qa [$];
  int nb = 0;
  always @(posedge clk) if (rst_n) begin
    if (tmem_valid && tmem_ready) begin
      r_t r; r = row; qa.push_back(r);
      chk(64'(r[COL_INSTR]) == 64'(prog_word(int'(r[COL_PC]) / 4, N_IT)) % RP, "instr column");
    end
    if (tbuf_valid && tbuf_ready) begin
      r_t r; r = row;
      if (qa.size() > nb) chk(r == qa[nb], "same row at both sinks");
      else begin
        // buffer sink took it first; compare when the memory sink does
      end
      nb++;
    end
  end
  initial begin
    logic [31:0] tot;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 256; k++) begin
      @(negedge clk); h_we = 1; h_sel = 0; h_addr = 32'(4 * k); h_wdata = prog_word(k, N_IT);
      @(negedge clk); h_sel = 1; h_wdata = 0;
    end
    @(negedge clk); h_we = 0; run = 1;
    while (!halted) begin
      tmem_ready = ($urandom % 3) == 0;
      tbuf_ready = ($urandom % 2) == 0;
      @(negedge clk);
    end
    tmem_ready = 1; tbuf_ready = 1;
    repeat (5) @(negedge clk);
    chk(qa.size() == prog_rows(N_IT) && nb == prog_rows(N_IT) &&
        rows_captured == 32'(prog_rows(N_IT)), $sformatf("rows %0d/%0d", qa.size(), nb));
    tot = 0;
    h_sel = 1;
    for (int k = 0; k < N_IT; k++) begin
      h_addr = 32'h200 + 32'(4 * k); #1;
      chk(h_rdata == fib(k), "fib in DMEM");
      tot += fib(k);
    end
    h_addr = 32'h100; #1;
    chk(h_rdata == tot, "total in DMEM");
    chk(freeze_cycles > 0, "core frozen by full sink");
    chk(!trace_en, "tracing off at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
