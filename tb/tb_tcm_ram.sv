// tb_tcm_ram: fills the memory through the host port, reads it back on
// both ports, and checks byte-enabled writes from the core port.
module tb_tcm_ram;
  int checks = 0, failures = 0;
  localparam int D = 64;
  logic clk = 0, h_we = 0;
  logic [5:0] addr = '0, h_addr = '0;
  logic [3:0] be = '0;
  logic [31:0] wdata = '0, rdata, h_wdata = '0, h_rdata;
  logic [31:0] m [D];
  always #5 clk = ~clk;
  tcm_ram #(.DEPTH(D)) dut (.*);
  task automatic chk(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < D; i++) begin
      @(negedge clk); h_we = 1; h_addr = 6'(i); h_wdata = $urandom; m[i] = h_wdata;
    end
    @(negedge clk); h_we = 0;
    for (int i = 0; i < D; i++) begin
      addr = 6'(i); h_addr = 6'(D - 1 - i); #1;
      chk(rdata == m[i] && h_rdata == m[D-1-i], "read");
    end
    repeat (200) begin
      @(negedge clk);
      addr = 6'($urandom % D); be = 4'($urandom); wdata = $urandom;
      for (int b = 0; b < 4; b++) if (be[b]) m[addr][8*b +: 8] = wdata[8*b +: 8];
      @(negedge clk); be = 0; #1;
      chk(rdata == m[addr], "byte write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
