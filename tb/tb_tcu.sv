// tb_tcu: drives the retire port with random rows and trace_on/trace_off
// markers while the two sinks accept at random. Checks that only rows
// between trace_on and trace_off are captured, each appears exactly once at
// both sinks in order, every column equals the raw word mod p, and that
// freeze is raised exactly while the held row has not been taken by both.
module tb_tcu;
  import zkt_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, ret_valid = 0, ret_trace_on = 0, ret_trace_off = 0;
  logic freeze, trace_en, row_valid, tmem_ready = 0, tbuf_ready = 0, tmem_valid, tbuf_valid;
  raw_row_t ret_row = '0;
  row_t row;
  logic [31:0] rows_captured, freeze_cycles;
  always #5 clk = ~clk;
  tcu dut (.*);
  task automatic chk(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  typedef fe_t [NCOLS-1:0] r_t;
  r_t qm [$], qb [$];
  int nm = 0, nb = 0, nexp = 0;
  always @(posedge clk) if (rst_n) begin
    if (tmem_valid && tmem_ready) begin chk(row == qm.pop_front(), "tmem row"); nm++; end
    if (tbuf_valid && tbuf_ready) begin chk(row == qb.pop_front(), "tbuf row"); nb++; end
  end
  initial begin
    bit en;
    en = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (3000) begin
      int k;
      k = $urandom % 10;
      ret_valid = ($urandom % 4) != 0;
      ret_trace_on = (k == 0); ret_trace_off = (k == 1);
      for (int c = 0; c < NCOLS; c++) ret_row[c] = $urandom;
      tmem_ready = ($urandom % 3) != 0;
      tbuf_ready = ($urandom % 2) != 0;
      #1;
      if (ret_valid && !freeze) begin
        if (en && !ret_trace_on && !ret_trace_off) begin
          r_t e;
          for (int c = 0; c < NCOLS; c++) e[c] = 31'(64'(ret_row[c]) % RP);
          qm.push_back(e); qb.push_back(e); nexp++;
        end
        if (ret_trace_on) en = 1;
        if (ret_trace_off) en = 0;
      end
      chk(freeze == (row_valid && !((!tmem_valid || tmem_ready) && (!tbuf_valid || tbuf_ready))),
          "freeze rule");
      @(negedge clk);
    end
    ret_valid = 0; tmem_ready = 1; tbuf_ready = 1;
    repeat (3) @(negedge clk);
    chk(nm == nexp && nb == nexp && rows_captured == 32'(nexp), $sformatf("rows %0d %0d %0d", nm, nb, nexp));
    chk(freeze_cycles > 0, "freeze happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
