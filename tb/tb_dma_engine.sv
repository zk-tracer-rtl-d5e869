// tb_dma_engine: hands vectors of (perm, sum) to the engine with random
// memory back-pressure and checks every beat: address base + row*8, data
// {sum, perm}, rows in order, and that rows at or beyond rows_total are not
// written.
module tb_dma_engine;
  import zkt_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 5;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, in_ready, m_valid, m_ready = 0, idle;
  logic [31:0] base = 32'h4000, rows_total = 32'd23, m_addr, rows_written;
  logic [63:0] m_data;
  fe_t [L-1:0] in_perm = '0, in_sum = '0;
  always #5 clk = ~clk;
  dma_engine #(.LANES(L)) dut (.*);
  task automatic chk(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  fe_t ep [$], es [$];
  int got = 0;
  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    fe_t p, s;
    p = ep.pop_front(); s = es.pop_front();
    chk(m_addr == base + 32'(got) * 8 && m_data == {1'b0, s, 1'b0, p},
        $sformatf("beat %0d", got));
    got++;
  end
  initial begin
    int v;
    repeat (2) @(negedge clk); rst_n = 1;
    v = 0;
    while (v < 5) begin     // 25 row slots, 23 real rows
      in_valid = ($urandom % 2) != 0;
      for (int l = 0; l < L; l++) begin in_perm[l] = rnd_fe(); in_sum[l] = rnd_fe(); end
      m_ready = ($urandom % 3) != 0;
      #1;
      if (in_valid && in_ready) begin
        for (int l = 0; l < L; l++) if (v * L + l < 23) begin
          ep.push_back(in_perm[l]); es.push_back(in_sum[l]);
        end
        v++;
      end
      @(negedge clk);
    end
    in_valid = 0; m_ready = 1;
    while (!idle) @(negedge clk);
    chk(got == 23 && rows_written == 23, $sformatf("rows %0d", got));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
