// prefix_adder_tree: running sum of the permutation column, W rows per cycle.
// A vector x[0..W-1] (consecutive rows) enters with in_valid; a Kogge-Stone
// tree of mod_add units forms the inclusive prefix sums of the vector in
// ceil(log2 W) levels, the running total of all earlier vectors is added to
// every lane, and the results (and the inputs, passed along) are registered:
//   sum[k] = carry + x[0] + ... + x[k],  carry <= sum[W-1].
// clear resets the running total (start of a column). One cycle of latency,
// one vector per cycle; in_ready follows out_ready (registered stage).
// The paper only names a parallel prefix adder tree; the Kogge-Stone form
// and the handshake are this design's choices.
module prefix_adder_tree
  import zkt_pkg::*;
#(
  parameter int unsigned W = 17
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          in_valid,
  output logic          in_ready,
  input  fe_t [W-1:0]   x,
  output logic          out_valid,
  input  logic          out_ready,
  output fe_t [W-1:0]   perm,
  output fe_t [W-1:0]   sum
);
  localparam int unsigned L = (W > 1) ? $clog2(W) : 1;
  fe_t [L:0][W-1:0] lvl;
  fe_t [W-1:0]      tot;
  fe_t              carry;

  assign lvl[0] = x;
  for (genvar l = 0; l < L; l++) begin : g_lvl
    for (genvar k = 0; k < W; k++) begin : g_k
      if (k >= (1 << l)) begin : g_add
        mod_add u_a (.a(lvl[l][k]), .b(lvl[l][k - (1 << l)]), .y(lvl[l+1][k]));
      end else begin : g_pass
        assign lvl[l+1][k] = lvl[l][k];
      end
    end
  end
  for (genvar k = 0; k < W; k++) begin : g_tot
    mod_add u_c (.a(lvl[L][k]), .b(carry), .y(tot[k]));
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; carry <= '0; perm <= '0; sum <= '0;
    end else begin
      if (in_ready) out_valid <= in_valid;
      if (in_valid && in_ready) begin
        perm  <= x;
        sum   <= tot;
        carry <= tot[W-1];
      end
      if (clear) carry <= '0;
    end
  end
endmodule
