// mod_add: modular addition without a magnitude comparator.
// s = a + b (K+1 bits) and t = s + (2^K - p) are formed in parallel; the
// carry out of bit K of either sum means s >= p, and the OR of those two
// carries selects t (= s - p mod 2^K) over s. Combinational; inputs < p.
// Structure follows the paper's modular-adder figure; K defaults to 31.
module mod_add
  import zkt_pkg::*;
#(
  parameter int unsigned K = 31
) (
  input  fe_t a,
  input  fe_t b,
  output fe_t y
);
  localparam logic [K:0] CORR = (K+1)'((64'd1 << K) - 64'(P));
  logic [K:0] s, t;
  logic       sel;
  always_comb begin
    s   = (K+1)'(a) + (K+1)'(b);
    t   = {1'b0, s[K-1:0]} + CORR;
    sel = s[K] | t[K];
    y   = sel ? FW'(t[K-1:0]) : FW'(s[K-1:0]);
  end
endmodule
