// tb_mmac_array: runs batches of rows through the systolic array with
// random weights: single pass with all PEs, single pass with some PEs
// disabled, and a two-pass wide table using partial-sum feedback through
// the Output Buffer. The drained totals are compared with
// gamma + sum_j w_j*A_j computed by reference arithmetic, and the latency of
// a pass (ncols cycles + 1) is checked.
module tb_mmac_array;
  import zkt_pkg::*;
  import tb_ref_pkg::*;
  localparam int NPE = 4, OB = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic w_load = 0, first_pass = 1, in_valid = 0, drain = 0, out_valid, busy;
  logic [1:0] w_sel = '0;
  logic [2:0] ncols = 3'(NPE);
  logic [3:0] count;
  fe_t w_data = '0, gamma = '0, out_data;
  fe_t [NPE-1:0] in_row = '0;
  always #5 clk = ~clk;
  mmac_array #(.NPE(NPE), .OBUF_DEPTH(OB)) dut (.*);
  task automatic chk(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  fe_t A [OB][2*NPE];
  fe_t W [2*NPE];

  // one batch of OB rows, table width tcols (<= 2*NPE)
  task automatic run_batch(int tcols);
    int passes, cyc;
    longint unsigned e;
    passes = (tcols + NPE - 1) / NPE;
    gamma = rnd_fe();
    for (int j = 0; j < 2*NPE; j++) W[j] = rnd_fe();
    for (int r = 0; r < OB; r++) for (int j = 0; j < 2*NPE; j++) A[r][j] = rnd_fe();
    for (int p = 0; p < passes; p++) begin
      int pc;
      pc = (tcols - p*NPE >= NPE) ? NPE : tcols - p*NPE;
      for (int k = 0; k < pc; k++) begin
        @(negedge clk); w_load = 1; w_sel = 2'(k); w_data = W[p*NPE + k];
      end
      @(negedge clk); w_load = 0; ncols = 3'(pc); first_pass = (p == 0);
      for (int r = 0; r < OB; r++) begin
        in_valid = 1;
        for (int k = 0; k < NPE; k++) in_row[k] = (k < pc) ? A[r][p*NPE + k] : rnd_fe();
        @(negedge clk);
      end
      in_valid = 0;
      cyc = 0;
      while (busy) begin @(negedge clk); cyc++; end
      chk(count == 4'(OB), "buffer holds one total per row");
      chk(cyc == pc, $sformatf("pass drain latency %0d vs %0d", cyc, pc));
    end
    // drain: one total per cycle, in row order
    drain = 1;
    for (int r = 0; r < OB; r++) begin
      @(negedge clk);
      if (r == OB - 1) drain = 0;
      e = 64'(gamma);
      for (int j = 0; j < tcols; j++) e = r_add(e, r_mul(64'(W[j]), 64'(A[r][j])));
      chk(out_valid && 64'(out_data) == e, $sformatf("row %0d total %h exp %h", r, out_data, e));
    end
    @(negedge clk);
    chk(count == 0, "buffer empty after drain");
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run_batch(NPE);          // all PEs
    run_batch(NPE - 2);      // gated PEs
    run_batch(NPE + 3);      // two passes, feedback
    run_batch(2 * NPE);      // two full passes
    run_batch(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
