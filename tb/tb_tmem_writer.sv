// tb_tmem_writer: offers random rows with random valid and memory ready and
// checks each memory beat: address base + i*32, data the zero-extended row,
// rows in order, no row lost or duplicated, and the clear input.
module tb_tmem_writer;
  import zkt_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, in_ready, m_valid, m_ready = 0;
  logic [31:0] base = 32'h8000_1000, m_addr, rows_written;
  row_t in_row = '0;
  logic [NCOLS*32-1:0] m_data;
  always #5 clk = ~clk;
  tmem_writer dut (.*);
  task automatic chk(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  typedef fe_t [NCOLS-1:0] r_t;
  r_t q [$];
  int got = 0;
  always @(posedge clk) if (rst_n && m_valid && m_ready) begin
    r_t e;
    e = q.pop_front();
    chk(m_addr == base + 32'(got) * 32, "address");
    for (int c = 0; c < NCOLS; c++) chk(m_data[32*c +: 32] == {1'b0, e[c]}, "data");
    got++;
  end
  initial begin
    int sent;
    repeat (2) @(negedge clk); rst_n = 1;
    sent = 0;
    while (sent < 200) begin
      in_valid = ($urandom % 3) != 0;
      for (int c = 0; c < NCOLS; c++) in_row[c] = rnd_fe();
      m_ready = ($urandom % 3) != 0;
      #1;
      if (in_valid && in_ready) begin q.push_back(in_row); sent++; end
      @(negedge clk);
    end
    in_valid = 0; m_ready = 1;
    repeat (4) @(negedge clk);
    chk(got == 200 && rows_written == 200, $sformatf("got %0d", got));
    clear = 1; @(negedge clk); clear = 0; got = 0;
    in_valid = 1; in_row[0] = 31'd7; #1 q.push_back(in_row); @(negedge clk); in_valid = 0;
    repeat (3) @(negedge clk);
    chk(got == 1 && rows_written == 1, "after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
