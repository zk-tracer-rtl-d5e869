// tb_barrett_mod_mul: applies edge and random field elements and compares the result
// with a reference computed by 64-bit integer arithmetic modulo p.
module tb_barrett_mod_mul;
  import zkt_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  fe_t a, b, y;
  longint unsigned rinv;
  barrett_mod_mul dut (.a, .b, .y);
  task automatic try(fe_t va, fe_t vb);
    longint unsigned e;
    a = va; b = vb; #1;
    e = r_mul(64'(a), 64'(b));
    checks++;
    if (64'(y) != e) begin
      failures++; $display("FAIL a=%h b=%h y=%h exp=%h", va, vb, y, e);
    end
  endtask
  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    rinv = r_rinv();
    try(0, 0); try(0, 1); try(1, 1); try(31'(RP - 1), 31'(RP - 1)); try(31'(RP - 1), 1);
    try(31'(RP - 1), 2); try(31'h4000_0000, 31'h3800_0001); try(31'(RP / 2), 31'(RP / 2 + 1));
    repeat (3000) try(rnd_fe(), rnd_fe());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
