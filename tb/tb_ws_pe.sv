// tb_ws_pe: preloads a weight, streams random data and partial sums and
// checks the registered outputs (psum_out = psum_in + w*x, forwarded data,
// valid) one cycle later; also checks that en=0 holds the outputs.
module tb_ws_pe;
  import zkt_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 1, w_load = 0, in_valid = 0, out_valid;
  fe_t w_in = '0, in_data = '0, psum_in = '0, fwd_data, psum_out;
  always #5 clk = ~clk;
  ws_pe dut (.*);
  task automatic chk(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    fe_t w, x, ps, hold;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 4; k++) begin
      w = (k == 0) ? 31'(RP - 1) : rnd_fe();
      @(negedge clk); w_load = 1; w_in = w;
      @(negedge clk); w_load = 0;
      repeat (200) begin
        x = rnd_fe(); ps = rnd_fe();
        in_valid = 1; in_data = x; psum_in = ps;
        @(negedge clk);
        chk(64'(psum_out) == r_add(64'(ps), r_mul(64'(w), 64'(x))), "psum");
        chk(fwd_data == x && out_valid, "forward/valid");
      end
    end
    // disabled PE holds its outputs
    hold = psum_out; en = 0; in_data = rnd_fe(); psum_in = rnd_fe(); in_valid = 0;
    repeat (3) @(negedge clk);
    chk(psum_out == hold && out_valid, "hold while disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
