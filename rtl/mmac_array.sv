// mmac_array: one-dimensional weight-stationary systolic array computing,
// for each streamed row A, the denominator  gamma + sum_j w_j * A_j  (mod p).
//
// Structure: NPE ws_pe elements in a chain. Column j of a row is delayed j
// cycles by input skew registers so it meets the partial sum in PE j. The
// chain result passes an adder (mod_add), an Output Buffer (FIFO of
// OBUF_DEPTH entries) and a DMUX that either feeds the buffer head back to
// the adder or sends it out.
//
// Wide tables are processed in passes of at most NPE columns: the controller
// loads the pass's weights (w_load/w_sel/w_data), sets first_pass and
// ncols, then streams the same rows again. On the first pass gamma enters
// PE0 as the initial partial sum and the adder adds 0; on later passes the
// adder adds the buffer head, which is popped (feedback), and the new total
// is pushed. After the last pass, drain pops one buffered total per cycle to
// out_data (DMUX to output). PEs with index >= ncols are disabled (clock-
// gating enable) and the result is tapped after PE ncols-1, so the latency
// of a pass is ncols cycles plus one for the adder/buffer write.
// Config inputs must only change while busy is low.
// Chain, adder, Output Buffer, DMUX and feedback follow the paper's systolic
// array figure; where gamma enters, the skew registers and the tap are this
// design's choices. The PEs' forwarded-input outputs are not needed by a
// single array and are left open.
module mmac_array
  import zkt_pkg::*;
#(
  parameter int unsigned NPE        = 8,
  parameter int unsigned OBUF_DEPTH = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // weight preload
  input  logic                      w_load,
  input  logic [$clog2(NPE)-1:0]    w_sel,
  input  fe_t                       w_data,
  // pass configuration
  input  logic [$clog2(NPE+1)-1:0]  ncols,
  input  logic                      first_pass,
  input  fe_t                       gamma,
  // row stream
  input  logic                      in_valid,
  input  fe_t [NPE-1:0]             in_row,
  // output buffer drain (DMUX to output)
  input  logic                      drain,
  output logic                      out_valid,
  output fe_t                       out_data,
  output logic [$clog2(OBUF_DEPTH+1)-1:0] count,
  output logic                      busy
);
  // ---------------- input skew ----------------
  fe_t  [NPE-1:0]           pe_in;
  logic [NPE-1:0]           pe_vin, pe_vout, pe_en;
  fe_t  [NPE-1:0]           pe_psum_out;
  fe_t  [NPE-1:0][NPE-1:0]  skew;     // skew[j][d]

  always_ff @(posedge clk) begin
    for (int j = 1; j < NPE; j++) begin
      skew[j][0] <= in_row[j];
      for (int d = 1; d < NPE; d++) skew[j][d] <= skew[j][d-1];
    end
  end

  always_comb begin
    pe_in[0] = in_row[0];
    for (int j = 1; j < NPE; j++) pe_in[j] = skew[j][j-1];
    for (int j = 0; j < NPE; j++) pe_en[j] = (j < int'(ncols));
  end

  // ---------------- PE chain ----------------
  for (genvar j = 0; j < NPE; j++) begin : g_pe
    fe_t psum_i;
    if (j == 0) begin : g_first
      assign psum_i    = first_pass ? gamma : '0;
      assign pe_vin[j] = in_valid;
    end else begin : g_next
      assign psum_i    = pe_psum_out[j-1];
      assign pe_vin[j] = pe_vout[j-1];
    end
    ws_pe u_pe (
      .clk, .rst_n, .en(pe_en[j]),
      .w_load(w_load && (w_sel == j)), .w_in(w_data),
      .in_valid(pe_vin[j]), .in_data(pe_in[j]), .psum_in(psum_i),
      .out_valid(pe_vout[j]), .fwd_data(), .psum_out(pe_psum_out[j])
    );
  end

  // tap after the last active PE
  logic tap_valid;
  fe_t  tap_psum;
  always_comb begin
    tap_valid = 1'b0;
    tap_psum  = '0;
    for (int j = 0; j < NPE; j++)
      if (j == int'(ncols) - 1) begin
        tap_valid = pe_vout[j];
        tap_psum  = pe_psum_out[j];
      end
  end

  // ---------------- adder, Output Buffer, DMUX ----------------
  localparam int unsigned AW = (OBUF_DEPTH > 1) ? $clog2(OBUF_DEPTH) : 1;
  fe_t           obuf [OBUF_DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  fe_t           head, feedback, total;
  logic          push, pop;

  assign head     = obuf[rd_ptr];
  assign feedback = first_pass ? '0 : head;      // DMUX output fed back
  mod_add u_acc (.a(tap_psum), .b(feedback), .y(total));

  assign push = tap_valid;
  assign pop  = (tap_valid && !first_pass) || (drain && count != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0; wr_ptr <= '0; count <= '0;
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= drain && count != 0 && !tap_valid;
      out_data  <= head;
      if (push) begin
        obuf[wr_ptr] <= total;
        wr_ptr <= (wr_ptr == AW'(OBUF_DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      end
      if (pop) rd_ptr <= (rd_ptr == AW'(OBUF_DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + ($bits(count))'(push) - ($bits(count))'(pop);
    end
  end

  assign busy = in_valid || (|(pe_vout & pe_en));

  // Draining and accumulating never overlap; the buffer never overflows.
  assert property (@(posedge clk) disable iff (!rst_n) !(drain && tap_valid));
  assert property (@(posedge clk) disable iff (!rst_n)
                   !(push && !pop && count == ($bits(count))'(OBUF_DEPTH)));
endmodule
