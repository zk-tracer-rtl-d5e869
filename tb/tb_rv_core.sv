// tb_rv_core: runs the shared test program (Fibonacci loop with store,
// dependent load, call/return, branch and trace_on/trace_off) on the core
// with behavioural memories. Checks the stored Fibonacci values and the
// accumulated total in DMEM, that the retire port reports each instruction
// word at its pc, the number of instructions retired between trace_on and
// trace_off, the store address/data in retired rows, the halt, a freeze
// window that must not change the result, and the cycle count of the loop.
// A second program, after a reset, runs all eight M-extension instructions
// on 16 operand pairs (random and corner values) with load-use and
// forwarding hazards around them, and checks every stored result against
// reference arithmetic and the cycle count including the divider stalls.
module tb_rv_core;
  import zkt_pkg::*;
  import tb_ref_pkg::*;
  localparam int N_IT = 10;
  localparam int NM   = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, run = 0, freeze = 0, halted;
  logic [11:0] imem_addr, dmem_addr;
  logic [31:0] imem_rdata, dmem_rdata, dmem_wdata;
  logic [3:0]  dmem_be;
  logic ret_valid, ret_trace_on, ret_trace_off;
  raw_row_t ret_row;
  logic [31:0] imem [4096];
  logic [31:0] dmem [4096];
  always #5 clk = ~clk;
  rv_core dut (.*);
  assign imem_rdata = imem[imem_addr];
  assign dmem_rdata = dmem[dmem_addr];
  always @(posedge clk)
    for (int b = 0; b < 4; b++) if (dmem_be[b]) dmem[dmem_addr][8*b +: 8] <= dmem_wdata[8*b +: 8];
  task automatic chk(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int traced = 0, retired = 0, stores = 0;
  bit tr = 0;
  always @(posedge clk) if (rst_n && ret_valid) begin
    retired++;
    if (ret_row[COL_INSTR] != imem[ret_row[COL_PC] >> 2]) begin
      failures++; $display("FAIL instr at pc %h", ret_row[COL_PC]);
    end
    if (ret_trace_off) tr = 0;
    else if (ret_trace_on) tr = 1;
    else if (tr) begin
      traced++;
      if (ret_row[COL_INSTR][6:0] == 7'b0100011) begin
        checks++;
        if (ret_row[COL_MADDR] != 32'h200 + 4 * stores || ret_row[COL_MDATA] != fib(stores)) begin
          failures++; $display("FAIL store row %0d", stores);
        end
        stores++;
      end
    end
  end
  initial begin
    int cyc;
    logic [31:0] tot;
    for (int i = 0; i < 4096; i++) begin imem[i] = 32'h13; dmem[i] = '0; end
    for (int k = 0; k < PROG_LEN; k++) imem[k] = prog_word(k, N_IT);
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); run = 1;
    cyc = 0;
    while (!halted) begin
      @(negedge clk); cyc++;
      freeze = (cyc >= 40 && cyc < 47);
    end
    freeze = 0;
    tot = 0;
    for (int k = 0; k < N_IT; k++) begin
      chk(dmem[(32'h200 >> 2) + k] == fib(k), $sformatf("fib %0d", k));
      tot += fib(k);
    end
    chk(dmem[32'h100 >> 2] == tot, "total");
    chk(traced == prog_rows(N_IT), $sformatf("traced %0d", traced));
    chk(stores == N_IT, "stores in trace");
    chk(retired == 11 + prog_rows(N_IT), $sformatf("retired %0d", retired));
    // 12 instructions, 1 load-use bubble, 3 redirects x 2 per iteration
    chk(cyc <= 19 * N_IT + 7 + 30, $sformatf("cycles %0d", cyc));
    // ---- M extension ----
    rst_n = 0; run = 0;
    for (int i = 0; i < 4096; i++) begin imem[i] = 32'h13; dmem[i] = '0; end
    for (int k = 0; k < MPROG_LEN; k++) imem[k] = mprog_word(k, NM);
    for (int i = 0; i < NM; i++) begin
      dmem[(32'h400 >> 2) + 2 * i]     = (i == 0) ? 32'h8000_0000 : (i == 1) ? 32'd7 : $urandom;
      dmem[(32'h400 >> 2) + 2 * i + 1] = (i == 0) ? 32'hFFFF_FFFF : (i == 1) ? 32'd0 :
                                         (i % 3 == 2) ? 32'(int'($urandom % 9) - 4) : $urandom;
    end
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); run = 1;
    cyc = 0;
    while (!halted) begin @(negedge clk); cyc++; end
    for (int i = 0; i < NM; i++) begin
      logic [31:0] x, z;
      x = dmem[(32'h400 >> 2) + 2 * i]; z = dmem[(32'h400 >> 2) + 2 * i + 1];
      for (int f = 0; f < 8; f++) begin
        logic [31:0] e;
        e = r_mop(3'(f), x, z);
        if (f == 7) e = e + e;
        chk(dmem[(32'h600 >> 2) + 8 * i + f] == e,
            $sformatf("M op %0d pair %0d: %h %h got %h exp %h", f, i, x, z, dmem[(32'h600 >> 2) + 8 * i + f], e));
      end
    end
    // 23 instructions, 4 divides of 33 stall cycles, 1 load-use bubble and
    // one taken branch (2 cycles) per pair
    chk(cyc >= NM * (23 + 4 * 33 + 1 + 2) && cyc <= NM * (23 + 4 * 33 + 1 + 2) + 30, $sformatf("M program cycles %0d", cyc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
