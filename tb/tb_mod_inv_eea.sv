// tb_mod_inv_eea: inverts edge and random elements; checks a*y = 1 (mod p)
// against a Fermat-power reference, that 0 maps to 0, and that every
// inversion finishes within 4*31 cycles.
module tb_mod_inv_eea;
  import zkt_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  fe_t a, y;
  always #5 clk = ~clk;
  mod_inv_eea dut (.clk, .rst_n, .start, .a, .busy, .done, .y);
  task automatic try(fe_t v);
    int cyc;
    @(negedge clk); a = v; start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 2;
    if (64'(y) != (v == 0 ? 0 : r_inv(64'(v)))) begin
      failures++; $display("FAIL a=%h y=%h", v, y);
    end
    if (cyc > 124) begin failures++; $display("FAIL slow a=%h cycles=%0d", v, cyc); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    a = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    try(1); try(2); try(0); try(31'(RP - 1)); try(31'h4000_0000); try(31'h7FFF_FFF);
    repeat (500) try(rnd_fe());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
