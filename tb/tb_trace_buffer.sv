// tb_trace_buffer: writes random rows, reads them back by offset, releases
// rows in chunks and checks count, full (wr_ready low at DEPTH rows),
// wrap-around and that reads after a release start at the new oldest row.
module tb_trace_buffer;
  import zkt_pkg::*;
  import tb_ref_pkg::*;
  localparam int D = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, wr_valid = 0, wr_ready, release_en = 0;
  row_t wr_row = '0, rdata;
  logic [4:0] count, release_n = '0;
  logic [3:0] roff = '0;
  always #5 clk = ~clk;
  trace_buffer #(.DEPTH(D)) dut (.*);
  task automatic chk(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  row_t model [$];
  function automatic row_t rnd_row();
    row_t r;
    for (int c = 0; c < NCOLS; c++) r[c] = rnd_fe();
    return r;
  endfunction
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      int nw, nr;
      nw = $urandom % (D + 4);
      for (int i = 0; i < nw; i++) begin
        wr_valid = 1; wr_row = rnd_row(); #1;
        if (model.size() >= D) chk(!wr_ready, "full");
        if (wr_ready) model.push_back(wr_row);
        @(negedge clk);
      end
      wr_valid = 0;
      chk(int'(count) == model.size(), $sformatf("count %0d vs %0d nw %0d", count, model.size(), nw));
      for (int i = 0; i < model.size(); i++) begin
        roff = 4'(i); #1;
        chk(rdata == model[i], $sformatf("read offset %0d r%0d got %h exp %h", i, round, rdata[0], model[i][0]));
      end
      nr = (model.size() == 0) ? 0 : $urandom % (model.size() + 1);
      @(negedge clk);
      release_en = 1; release_n = 5'(nr); @(negedge clk); release_en = 0;
      repeat (nr) void'(model.pop_front());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
