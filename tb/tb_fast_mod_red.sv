// tb_fast_mod_red: drives edge values and random 32-bit words through the
// reduction and compares with x % p computed in 64-bit arithmetic.
module tb_fast_mod_red;
  import zkt_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [31:0] x;
  fe_t y;
  fast_mod_red dut (.x, .y);
  task automatic try(logic [31:0] v);
    x = v; #1;
    checks++;
    if (64'(y) != 64'(v) % RP) begin
      failures++; $display("FAIL x=%h y=%h exp=%h", v, y, 64'(v) % RP);
    end
  endtask
  initial begin
    #100000; failures++; $display("watchdog"); 
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    try(0); try(1); try(32'(RP) - 1); try(32'(RP)); try(32'(RP) + 1); try(32'h7FFF_FFFF);
    try(32'h8000_0000); try(32'(2 * RP) - 1); try(32'(2 * RP)); try(32'hFFFF_FFFF);
    repeat (2000) try($urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
