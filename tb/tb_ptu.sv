// tb_ptu: the Permutation Trace Unit at reduced size (3 lanes, 4 PEs,
// batches of 4 rows per lane) fed from a trace buffer that the testbench
// fills with random rows at a random rate. Task 1 uses 6 of 8 columns (two
// passes: partial-sum feedback and disabled PEs) and 30 rows (two full
// batches and one padded batch); task 2 uses 3 columns and exactly one
// batch. Every real row's perm and running sum are compared with
// 1/(gamma + sum_j beta^j A_ij) and its prefix sum from reference
// arithmetic; padding rows must be marked by rows_total.
module tb_ptu;
  import zkt_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 3, NPE = 4, B = 4, TBD = 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, flush = 0;
  fe_t beta = '0, gamma = '0;
  logic [3:0] ncols = '0;
  logic [5:0] tb_count, tb_release_n;
  logic [4:0] tb_roff;
  row_t tb_rdata, wr_row = '0;
  logic tb_release, out_valid, out_ready = 1, busy, done, wr_valid = 0, wr_ready;
  fe_t [L-1:0] out_perm, out_sum;
  logic [31:0] rows_total;
  always #5 clk = ~clk;
  trace_buffer #(.DEPTH(TBD)) u_buf (
    .clk, .rst_n, .wr_valid, .wr_ready, .wr_row, .count(tb_count), .roff(tb_roff),
    .rdata(tb_rdata), .release_en(tb_release), .release_n(tb_release_n));
  ptu #(.LANES(L), .NPE(NPE), .BATCH(B), .MAX_COLS(16), .TB_DEPTH(TBD)) dut (
    .clk, .rst_n, .start, .beta, .gamma, .ncols, .flush,
    .tb_count, .tb_roff, .tb_rdata, .tb_release, .tb_release_n,
    .out_valid, .out_ready, .out_perm, .out_sum, .rows_total, .busy, .done);
  task automatic chk(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  row_t rows [$];
  int got;
  longint unsigned rsum;
  int n_rows;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    for (int l = 0; l < L; l++) begin
      if (got < n_rows) begin
        longint unsigned den, pe;
        den = 64'(gamma);
        for (int j = 0; j < int'(ncols); j++)
          den = r_add(den, r_mul(r_pow(64'(beta), 64'(j)), 64'(rows[got][j])));
        pe = r_inv(den);
        rsum = r_add(rsum, pe);
        chk(64'(out_perm[l]) == pe && 64'(out_sum[l]) == rsum,
            $sformatf("row %0d perm %h exp %h", got, out_perm[l], pe));
      end
      got++;
    end
  end
  task automatic run_task(int nc, int nr);
    int sent;
    rows.delete(); got = 0; rsum = 0; n_rows = nr;
    @(negedge clk); beta = rnd_fe(); gamma = rnd_fe(); ncols = 4'(nc); start = 1;
    @(negedge clk); start = 0;
    sent = 0;
    while (sent < nr) begin
      row_t r;
      for (int c = 0; c < NCOLS; c++) r[c] = rnd_fe();
      wr_valid = ($urandom % 2) != 0; wr_row = r;
      out_ready = ($urandom % 4) != 0;
      #1;
      if (wr_valid && wr_ready) begin rows.push_back(r); sent++; end
      @(negedge clk);
    end
    wr_valid = 0; out_ready = 1; flush = 1;
    while (!done) @(negedge clk);
    flush = 0;
    chk(rows_total == 32'(nr), $sformatf("rows_total %0d", rows_total));
    chk(got >= nr && got % L == 0, $sformatf("rows out %0d", got));
    chk(tb_count == 0, "buffer empty");
  endtask
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run_task(6, 30);
    run_task(3, L * B);
    run_task(8, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
