// tb_prefix_adder_tree: streams random vectors (with random back-pressure)
// through the tree and checks every output lane against a running sum kept
// by reference arithmetic; checks the one-cycle latency and the clear input.
module tb_prefix_adder_tree;
  import zkt_pkg::*;
  import tb_ref_pkg::*;
  localparam int W = 17;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, in_ready, out_valid, out_ready = 1;
  fe_t [W-1:0] x = '0, perm, sum;
  always #5 clk = ~clk;
  prefix_adder_tree #(.W(W)) dut (.*);
  task automatic chk(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  typedef fe_t [W-1:0] vec_t;
  vec_t q_x [$];
  longint unsigned run_sum;
  // checker: every accepted output vector
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    fe_t [W-1:0] v;
    v = q_x.pop_front();
    for (int k = 0; k < W; k++) begin
      run_sum = r_add(run_sum, 64'(v[k]));
      chk(64'(sum[k]) == run_sum && perm[k] == v[k], $sformatf("lane %0d sum %h exp %h perm %h v %h", k, sum[k], run_sum, perm[k], v[k]));
    end
  end
  initial begin
    run_sum = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // latency: a single vector appears one cycle later
    for (int k = 0; k < W; k++) x[k] = 31'(RP - 1 - k);
    in_valid = 1; #1 q_x.push_back(x);
    @(negedge clk); in_valid = 0;
    chk(out_valid, "one-cycle latency");
    @(negedge clk);
    repeat (300) begin
      for (int k = 0; k < W; k++) x[k] = rnd_fe();
      in_valid = ($urandom % 3) != 0;
      out_ready = ($urandom % 4) != 0;
      #1;
      if (in_valid && in_ready) q_x.push_back(x);
      @(negedge clk);
    end
    in_valid = 0; out_ready = 1;
    repeat (3) @(negedge clk);
    // clear restarts the sum
    clear = 1; @(negedge clk); clear = 0; run_sum = 0;
    for (int k = 0; k < W; k++) x[k] = rnd_fe();
    in_valid = 1; #1 q_x.push_back(x); @(negedge clk); in_valid = 0;
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
