// tb_zk_tracer_sha256: workload run of the whole accelerator at default
// parameters: SHA-256 compression of N_IT chained 64-byte blocks (the SHA256
// kind of guest program), all 8 columns folded.
// The host loads a SHA-256 compression loop over 3
// 64-byte blocks (traced from the first block to the last)
// into IMEM and the initial state, round
// constants and message blocks into DMEM, programs the CSRs and starts a task;
// the random source supplies two samples. Both memory ports are always
// ready.
// Checks: the final hash state, read back from DMEM,
// against a reference SHA-256 (itself checked on the message "abc"); the
// main-trace rows in memory against the program words at their pc column;
// every permutation-trace pair against reference arithmetic on those rows;
// the done status and the interrupt. Rate: this program keeps the core
// at close to one instruction per cycle, above what the PTU takes in, so
// the core may be frozen, but for under a fifth of the run.
// Mechanisms counted (each must occur): instructions outside
// trace_on/trace_off skipped, batch inversions.
module tb_zk_tracer_sha256;
  import zkt_pkg::*;
  import tb_ref_pkg::*;
  localparam int N_IT = 3;
  localparam int NC   = 8;
  localparam int L    = 17;
  sha_st_t h0, hr;
  sha_blk_t blk [N_IT];
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic csr_req = 0, csr_we = 0, irq, mem_we = 0, mem_sel = 0;
  logic [7:0]  csr_addr = '0;
  logic [31:0] csr_wdata = '0, csr_rdata, mem_addr = '0, mem_wdata = '0, mem_rdata;
  logic trng_req, trng_valid = 0;
  logic [31:0] trng_data = '0;
  logic tmem_valid, tmem_ready = 0, dma_valid, dma_ready = 0;
  logic [31:0] tmem_addr, dma_addr;
  logic [NCOLS*32-1:0] tmem_data;
  logic [63:0] dma_data;
  always #5 clk = ~clk;
  zk_tracer dut (.*);
  task automatic chk(bit ok, string m);
    checks++; if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  localparam logic [31:0] TBASE = 32'h1000_0000, PBASE = 32'h2000_0000;
  // memory models
  logic [NCOLS*32-1:0] mt [int];
  logic [63:0]         mp [int];
  always @(posedge clk) if (rst_n) begin
    if (tmem_valid && tmem_ready) mt[int'((tmem_addr - TBASE) / (NCOLS * 4))] = tmem_data;
    if (dma_valid && dma_ready)   mp[int'((dma_addr - PBASE) / 8)] = dma_data;
    trng_valid <= trng_req && ($urandom % 2 == 0);
    trng_data  <= $urandom;
  end
  // mechanism counters
  int n_freeze = 0, n_tbfull = 0, n_skip = 0, n_feedback = 0, n_gated = 0, n_pad = 0, n_inv = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_mtu.u_tcu.freeze) n_freeze++;
    if (dut.mb_valid && !dut.mb_ready) n_tbfull++;
    if (dut.u_mtu.u_core.ret_valid && !dut.u_mtu.u_tcu.trace_en) n_skip++;
    if (dut.u_ptu.row_valid && dut.u_ptu.pass != 0) n_feedback++;
    if (dut.u_ptu.row_valid && 32'(dut.u_ptu.pass_cols) < 8) n_gated++;
    if (dut.u_ptu.st == 3 && 32'(dut.u_ptu.nrows) < L * 16) n_pad++;
    if (dut.u_ptu.g_lane[0].u_inv.inv_start) n_inv++;
  end
  task automatic csr_wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk); csr_req = 1; csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk); csr_req = 0; csr_we = 0;
  endtask
  initial begin
    int nrows, cyc;
    longint unsigned beta, gamma, rs;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int k = 0; k < SPROG_LEN + 1; k++) begin
      @(negedge clk); mem_we = 1; mem_sel = 0; mem_addr = 32'(4 * k); mem_wdata = sprog_word(k, N_IT);
    end
    h0 = '{32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
           32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};
    // block 0 is the padded message "abc"; the others are random
    for (int b = 0; b < N_IT; b++)
      for (int i = 0; i < 16; i++)
        blk[b][i] = (b > 0) ? $urandom : (i == 0) ? 32'h61626380 : (i == 15) ? 32'h18 : '0;
    // reference check of the reference itself: SHA-256("abc")
    hr = sha_compress(h0, blk[0]);
    chk(hr == '{32'hba7816bf, 32'h8f01cfea, 32'h414140de, 32'h5dae2223,
                32'hb00361a3, 32'h96177a9c, 32'hb410ff61, 32'hf20015ad}, "reference SHA-256(abc)");
    hr = h0;
    for (int b = 0; b < N_IT; b++) hr = sha_compress(hr, blk[b]);
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); mem_we = 1; mem_sel = 1; mem_addr = 32'h100 + 32'(4 * i); mem_wdata = h0[i];
    end
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); mem_we = 1; mem_sel = 1; mem_addr = 32'h300 + 32'(4 * i); mem_wdata = sha_k(i);
    end
    for (int b = 0; b < N_IT; b++)
      for (int i = 0; i < 16; i++) begin
        @(negedge clk); mem_we = 1; mem_sel = 1; mem_addr = 32'h400 + 32'(64 * b + 4 * i); mem_wdata = blk[b][i];
      end
    @(negedge clk); mem_we = 0;
    csr_wr(8'h08, TBASE); csr_wr(8'h0C, PBASE); csr_wr(8'h10, NC); csr_wr(8'h14, 1);
    csr_wr(8'h00, 1);
    cyc = 0;
    while (!irq) begin
      tmem_ready = 1'b1;
      dma_ready  = 1'b1;
      @(negedge clk); cyc++;
    end
    $display("task took %0d cycles", cyc);
    csr_addr = 8'h04; #1 chk(csr_rdata == 32'd2, "status done");
    csr_addr = 8'h1C; #1 beta = 64'(csr_rdata);
    csr_addr = 8'h20; #1 gamma = 64'(csr_rdata);
    csr_addr = 8'h18; #1 nrows = int'(csr_rdata);
    chk(mt.num() == nrows, $sformatf("main-trace rows in memory %0d", mt.num()));
    chk(mp.num() == nrows, $sformatf("permutation rows in memory %0d", mp.num()));
    rs = 0;
    for (int i = 0; i < nrows; i++) begin
      logic [NCOLS*32-1:0] r;
      longint unsigned den, pe;
      r = mt.exists(i) ? mt[i] : '0;
      chk(64'(r[32*COL_INSTR +: 32]) == 64'(sprog_word(int'(r[32*COL_PC +: 32]) / 4, N_IT)) % RP,
          $sformatf("instr column row %0d", i));
      den = gamma;
      for (int j = 0; j < NC; j++)
        den = r_add(den, r_mul(r_pow(beta, 64'(j)), 64'(r[32*j +: 32])));
      pe = r_inv(den);
      rs = r_add(rs, pe);
      chk(mp.exists(i) && 64'(mp[i][31:0]) == pe && 64'(mp[i][63:32]) == rs,
          $sformatf("perm row %0d", i));
    end
    csr_wr(8'h04, 2);
    chk(!irq, "irq acknowledged");
    $display("mechanisms: freeze=%0d tbuf_full=%0d skipped=%0d feedback=%0d gated=%0d pad=%0d inversions=%0d",
             n_freeze, n_tbfull, n_skip, n_feedback, n_gated, n_pad, n_inv);
    for (int i = 0; i < 8; i++) begin
      mem_sel = 1; mem_addr = 32'h100 + 32'(4 * i); #1;
      chk(mem_rdata == hr[i], $sformatf("H[%0d] got %h want %h", i, mem_rdata, hr[i]));
    end
    chk(nrows > 0, "rows traced");
    // rates: this program never stalls the core (no divides, few taken
    // branches), so rows arrive at close to one per cycle, which is the PTU's
    // input rate less its per-batch overhead; the core may be frozen, but
    // for well under a fifth of the run
    chk(n_freeze * 5 < cyc, $sformatf("core frozen %0d of %0d cycles", n_freeze, cyc));
    chk(n_skip > 0, "untraced instructions");
    chk(n_inv > 0, "batch inversion");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
