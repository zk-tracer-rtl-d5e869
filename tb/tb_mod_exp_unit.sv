// tb_mod_exp_unit: starts the weight precomputation for several beta values
// and column counts, captures every table write and compares it with
// beta^j computed by reference square-and-multiply; checks that each index
// is written once, in order, and that the run ends within the expected
// number of cycles (at most 2*log2(MAX_COLS)+2 products per weight).
module tb_mod_exp_unit;
  import zkt_pkg::*;
  import tb_ref_pkg::*;
  localparam int MC = 64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, busy, done, lut_we;
  logic [6:0] ncols = '0;
  logic [5:0] lut_waddr;
  fe_t beta = '0, lut_wdata;
  always #5 clk = ~clk;
  mod_exp_unit #(.MAX_COLS(MC)) dut (.*);
  task automatic chk(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic run(fe_t b, int n);
    int nxt, cyc;
    @(negedge clk); beta = b; ncols = 7'(n); start = 1;
    @(negedge clk); start = 0;
    nxt = 0; cyc = 0;
    while (!done) begin
      if (lut_we) begin
        chk(int'(lut_waddr) == nxt, "write order");
        chk(64'(lut_wdata) == r_pow(64'(b), 64'(nxt)),
            $sformatf("beta^%0d = %h exp %h", nxt, lut_wdata, r_pow(64'(b), 64'(nxt))));
        nxt++;
      end
      @(negedge clk); cyc++;
    end
    if (lut_we) begin
      chk(64'(lut_wdata) == r_pow(64'(b), 64'(nxt)), "last weight"); nxt++;
    end
    chk(nxt == n, $sformatf("wrote %0d of %0d", nxt, n));
    chk(cyc <= 2 + n * (2 * 6 + 2), $sformatf("cycles %0d", cyc));
  endtask
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run(31'd3, 8);
    run(31'(RP - 1), 5);
    run(rnd_fe(), 64);
    run(rnd_fe(), 17);
    run(31'd0, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
