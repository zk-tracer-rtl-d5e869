// tb_weight_lut: writes random weights to every entry and reads them back
// (one-cycle read latency), including a read of an entry in the cycle it
// is rewritten (old value expected).
module tb_weight_lut;
  import zkt_pkg::*;
  import tb_ref_pkg::*;
  localparam int D = 64;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0;
  logic [5:0] waddr = '0, raddr = '0;
  fe_t wdata = '0, rdata;
  fe_t ref_mem [D];
  always #5 clk = ~clk;
  weight_lut #(.DEPTH(D)) dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < D; i++) begin
      @(negedge clk); we = 1; waddr = 6'(i); wdata = rnd_fe(); ref_mem[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = D - 1; i >= 0; i--) begin
      raddr = 6'(i); @(negedge clk);
      checks++; if (rdata != ref_mem[i]) begin failures++; $display("FAIL %0d", i); end
    end
    raddr = 6'd5; we = 1; waddr = 6'd5; wdata = ~ref_mem[5] & 31'h3FFF_FFFF;
    @(negedge clk); we = 0;
    checks++; if (rdata != ref_mem[5]) begin failures++; $display("FAIL read-during-write"); end
    @(negedge clk);
    checks++; if (rdata != (~ref_mem[5] & 31'h3FFF_FFFF)) begin failures++; $display("FAIL new value"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
