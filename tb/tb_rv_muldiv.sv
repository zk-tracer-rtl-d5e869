// tb_rv_muldiv: checks the M-extension unit on its own. Random and corner
// operands (zero, one, -1, -2^31, division by zero, the -2^31 / -1
// overflow) go through all eight operations; results are compared with
// 64-bit reference arithmetic. Multiplies must never stall; a divide must
// stall for exactly 33 cycles and hold its result until advance.
module tb_rv_muldiv;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, valid = 0, advance = 0, stall;
  logic [2:0]  f3 = '0;
  logic [31:0] a = '0, b = '0, y;
  always #5 clk = ~clk;
  rv_muldiv dut (.*);
  task automatic chk(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic [31:0] pick();
    case ($urandom % 8)
      0: return 32'd0;
      1: return 32'd1;
      2: return 32'hFFFF_FFFF;
      3: return 32'h8000_0000;
      4: return 32'($urandom % 16);
      default: return $urandom;
    endcase
  endfunction
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int cyc;
      @(negedge clk);
      valid = 1; f3 = 3'($urandom); a = pick(); b = pick(); advance = 0;
      cyc = 0;
      #1;
      while (stall) begin @(negedge clk); cyc++; #1; end
      chk(y == r_mop(f3, a, b), $sformatf("f3 %0d a %h b %h got %h exp %h", f3, a, b, y, r_mop(f3, a, b)));
      chk(f3[2] ? cyc == 33 : cyc == 0, $sformatf("stall cycles %0d for f3 %0d", cyc, f3));
      if (f3[2]) begin   // result held while the pipeline does not advance
        @(negedge clk); #1;
        chk(!stall && y == r_mop(f3, a, b), "held result");
      end
      advance = 1;
      @(negedge clk); valid = 0; advance = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
