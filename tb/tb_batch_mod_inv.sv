// tb_batch_mod_inv: feeds batches of random nonzero elements (with an
// occasional stalled out_ready) and checks that the outputs, in input
// order, are the inverses computed by reference; checks the batch latency
// (N load + <=130 inversion + N backward + 4 cycles before the first
// output) and that a batch holding 0 yields zeros.
module tb_batch_mod_inv;
  import zkt_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 1;
  fe_t in_data = '0, out_data;
  always #5 clk = ~clk;
  batch_mod_inv #(.N(N)) dut (.*);
  task automatic chk(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic run(bit with_zero);
    fe_t D [N];
    int cyc, k;
    for (int i = 0; i < N; i++) D[i] = (i == 0) ? 31'(RP - 1) : ((rnd_fe() | 31'd1));
    if (with_zero) D[3] = '0;
    while (!in_ready) @(negedge clk);
    for (int i = 0; i < N; i++) begin
      in_valid = 1; in_data = D[i]; @(negedge clk);
    end
    in_valid = 0; cyc = 0;
    while (!out_valid) begin @(negedge clk); cyc++; end
    chk(cyc <= 130 + N + 4, $sformatf("latency %0d", cyc));
    k = 0;
    while (k < N) begin
      out_ready = ($urandom % 4) != 0;
      #1;
      if (out_valid && out_ready) begin
        chk(64'(out_data) == (with_zero ? 0 : r_inv(64'(D[k]))),
            $sformatf("out %0d = %h", k, out_data));
        k++;
      end
      @(negedge clk);
    end
    out_ready = 1;
  endtask
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (10) run(0);
    run(1);
    run(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
