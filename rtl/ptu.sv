// ptu: Permutation Trace Unit. For every main-trace row A_i it produces
//   perm_i = 1 / (gamma + sum_j beta^j * A_ij)   and   sum_i = perm_0 + ... + perm_i
// as a four-stage pipeline: weight precomputation (mod_exp_unit into
// weight_lut), LANES parallel compute units each made of an MMAC systolic
// array and a batch modular inverse, and a parallel prefix adder tree.
//
// Operation. start (with beta, gamma, ncols) first fills the weight table.
// Rows are then taken from the trace buffer in batches of LANES*BATCH rows;
// row r of a batch goes to lane r mod LANES. For each pass of up to NPE
// columns the pass's weights are preloaded into every array (broadcast,
// one PE per cycle) and the batch is streamed, one row per cycle. After the
// last pass every array drains its BATCH denominators into its batch
// inverse (all lanes together, once all inverse units are ready), and the
// batch is released from the trace buffer. The inverse units' outputs are
// joined into LANES-wide vectors of consecutive rows, summed by the prefix
// tree and handed to the DMA engine. While one batch is being inverted the
// next one already streams through the arrays.
// End of trace: when flush is high a short final batch is padded with zero
// rows; rows_total counts the real rows so the DMA can drop the padding.
// done pulses once flush is high, the buffer is empty and the last vector
// has left the prefix tree.
// The stage order, lane count (17) and arithmetic follow the paper; batching,
// round-robin row distribution, padding and the handshakes are this design's.
module ptu
  import zkt_pkg::*;
#(
  parameter int unsigned LANES    = 17,
  parameter int unsigned NPE      = 8,
  parameter int unsigned BATCH    = 16,
  parameter int unsigned MAX_COLS = 64,
  parameter int unsigned TB_DEPTH = 512
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  fe_t                            beta,
  input  fe_t                            gamma,
  input  logic [$clog2(NCOLS+1)-1:0]     ncols,
  input  logic                           flush,
  // trace buffer read side
  input  logic [$clog2(TB_DEPTH+1)-1:0]  tb_count,
  output logic [$clog2(TB_DEPTH)-1:0]    tb_roff,
  input  row_t                           tb_rdata,
  output logic                           tb_release,
  output logic [$clog2(TB_DEPTH+1)-1:0]  tb_release_n,
  // result vectors to the DMA engine
  output logic                           out_valid,
  input  logic                           out_ready,
  output fe_t [LANES-1:0]                out_perm,
  output fe_t [LANES-1:0]                out_sum,
  output logic [31:0]                    rows_total,
  output logic                           busy,
  output logic                           done
);
  localparam int unsigned BROWS  = LANES * BATCH;
  localparam int unsigned CW     = $clog2(TB_DEPTH+1);
  localparam int unsigned PW     = $clog2(NPE+1);
  localparam int unsigned LW     = (LANES > 1) ? $clog2(LANES) : 1;
  localparam int unsigned MAXP   = (NCOLS + NPE - 1) / NPE;

  // ---------------- weight precomputation ----------------
  logic exp_start, exp_busy, exp_done, lut_we;
  logic [$clog2(MAX_COLS)-1:0] lut_waddr, lut_raddr;
  fe_t  lut_wdata, lut_rdata;
  mod_exp_unit #(.MAX_COLS(MAX_COLS)) u_exp (
    .clk, .rst_n, .start(exp_start), .beta,
    .ncols(($clog2(MAX_COLS+1))'(ncols)),
    .busy(exp_busy), .done(exp_done),
    .lut_we, .lut_waddr, .lut_wdata);
  weight_lut #(.DEPTH(MAX_COLS)) u_lut (
    .clk, .we(lut_we), .waddr(lut_waddr), .wdata(lut_wdata),
    .raddr(lut_raddr), .rdata(lut_rdata));

  // ---------------- controller ----------------
  typedef enum logic [3:0] {S_IDLE, S_EXP, S_WAITB, S_WLOAD, S_STREAM,
                            S_PWAIT, S_DWAIT, S_DRAIN, S_FIN} state_e;
  state_e st;
  fe_t    gamma_q;
  logic [$clog2(NCOLS+1)-1:0] ncols_q;
  logic [CW-1:0]  nrows;          // real rows in the current batch
  logic [$clog2(BROWS+1)-1:0] r;  // row slot within the batch
  logic [LW-1:0]  lane;           // r mod LANES
  logic [$clog2(MAXP+1)-1:0] pass;
  logic [PW:0]    wk;             // weight preload counter
  logic           wv;             // lut read issued last cycle
  logic [PW-1:0]  wsel_q;
  logic [$clog2(BATCH+1)-1:0] dcnt;
  logic [PW-1:0]  pass_cols;

  always_comb begin
    int rem;
    rem = int'(ncols_q) - int'(pass) * int'(NPE);
    pass_cols = (rem >= int'(NPE)) ? PW'(NPE) : (rem > 0 ? PW'(rem) : '0);
  end
  logic last_pass;
  assign last_pass = (32'(pass) + 1) * NPE >= 32'(ncols_q);

  // per-lane signals
  logic [LANES-1:0] arr_busy, arr_ovalid, inv_iready, inv_ovalid;
  fe_t  [LANES-1:0] arr_odata, inv_odata;
  fe_t  [NPE-1:0]   row_slice;
  logic             row_valid, drain;
  logic             tree_iready, tree_ovalid;

  always_comb begin
    for (int k = 0; k < NPE; k++) begin
      int c;
      c = int'(pass) * int'(NPE) + k;
      row_slice[k] = (c < int'(ncols_q) && c < int'(NCOLS) && 32'(r) < 32'(nrows))
                     ? tb_rdata[c % NCOLS] : '0;
    end
  end
  assign tb_roff   = ($clog2(TB_DEPTH))'(r);
  assign row_valid = (st == S_STREAM);
  assign drain     = (st == S_DRAIN);
  assign exp_start = (st == S_IDLE) && start;
  assign lut_raddr = ($clog2(MAX_COLS))'(32'(pass) * NPE + 32'(wk));

  logic [$clog2(BATCH+1)-1:0] out_cnt;
  logic [1:0] inflight;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; gamma_q <= '0; ncols_q <= '0; nrows <= '0; r <= '0; lane <= '0;
      pass <= '0; wk <= '0; wv <= 1'b0; wsel_q <= '0; dcnt <= '0;
      tb_release <= 1'b0; tb_release_n <= '0; rows_total <= '0; done <= 1'b0;
    end else begin
      tb_release <= 1'b0; done <= 1'b0;
      wv <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          gamma_q <= gamma; ncols_q <= ncols; rows_total <= '0; st <= S_EXP;
        end
        S_EXP: if (exp_done) st <= S_WAITB;
        S_WAITB: if (!tb_release) begin   // count reflects the last release
          if (32'(tb_count) >= BROWS || (flush && tb_count != 0)) begin
            nrows <= (32'(tb_count) >= BROWS) ? CW'(BROWS) : tb_count;
            rows_total <= rows_total + ((32'(tb_count) >= BROWS) ? BROWS : 32'(tb_count));
            pass <= '0; wk <= '0; st <= S_WLOAD;
          end else if (flush && tb_count == 0) st <= S_FIN;
        end
        S_WLOAD: begin
          // lut read issued for wk, written to PE wsel_q one cycle later
          if (32'(wk) < 32'(pass_cols)) begin
            wv <= 1'b1; wsel_q <= PW'(wk); wk <= wk + 1'b1;
          end else if (!wv) begin
            r <= '0; lane <= '0; st <= S_STREAM;
          end
        end
        S_STREAM: begin
          if (32'(r) == BROWS - 1) st <= S_PWAIT;
          r    <= r + 1'b1;
          lane <= (32'(lane) == LANES - 1) ? '0 : lane + 1'b1;
        end
        S_PWAIT: if (arr_busy == '0) begin
          if (last_pass) st <= S_DWAIT;
          else begin pass <= pass + 1'b1; wk <= '0; st <= S_WLOAD; end
        end
        S_DWAIT: if (&inv_iready && inflight == 0) begin dcnt <= '0; st <= S_DRAIN; end
        S_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (32'(dcnt) == BATCH - 1) begin
            tb_release <= 1'b1; tb_release_n <= nrows; st <= S_WAITB;
          end
        end
        S_FIN: if (inflight == 0 && !tree_ovalid) begin done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end

  // ---------------- compute units ----------------
  logic join_fire;
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    mmac_array #(.NPE(NPE), .OBUF_DEPTH(BATCH)) u_arr (
      .clk, .rst_n,
      .w_load(wv), .w_sel(($clog2(NPE))'(wsel_q)), .w_data(lut_rdata),
      .ncols(pass_cols), .first_pass(pass == 0), .gamma(gamma_q),
      .in_valid(row_valid && lane == LW'(l)), .in_row(row_slice),
      .drain(drain), .out_valid(arr_ovalid[l]), .out_data(arr_odata[l]),
      .count(), .busy(arr_busy[l]));
    batch_mod_inv #(.N(BATCH)) u_inv (
      .clk, .rst_n,
      .in_valid(arr_ovalid[l]), .in_ready(inv_iready[l]), .in_data(arr_odata[l]),
      .out_valid(inv_ovalid[l]), .out_ready(join_fire), .out_data(inv_odata[l]));
  end

  // ---------------- join + prefix tree ----------------
  assign join_fire = (&inv_ovalid) && tree_iready;

  // batches between the start of a drain and their last output vector
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin inflight <= '0; out_cnt <= '0; end
    else begin
      logic inc, dec;
      inc = (st == S_DRAIN) && (dcnt == 0);
      dec = join_fire && (32'(out_cnt) == BATCH - 1);
      if (join_fire) out_cnt <= dec ? '0 : out_cnt + 1'b1;
      inflight <= inflight + (inc ? 2'd1 : 2'd0) - (dec ? 2'd1 : 2'd0);
    end
  end

  prefix_adder_tree #(.W(LANES)) u_tree (
    .clk, .rst_n, .clear(exp_start),
    .in_valid(join_fire), .in_ready(tree_iready), .x(inv_odata),
    .out_valid(tree_ovalid), .out_ready, .perm(out_perm), .sum(out_sum));
  assign out_valid = tree_ovalid;
  assign busy = (st != S_IDLE);

  assert property (@(posedge clk) disable iff (!rst_n) inflight != 2'd3);
endmodule
