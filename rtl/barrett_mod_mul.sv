// barrett_mod_mul: a*b mod p by Barrett reduction, combinational.
// x = a*b (62 bits); q = (x*m) >> 62 with m = floor(2^62/p); r = x - q*p,
// computed as x + q*(-p) in the low bits. Since q underestimates x/p by at
// most one, r < 2p and a single conditional subtraction (r >= p) finishes.
// The multiply / shift / multiply-by-(-p) / add / select chain is the
// paper's; the shift amount 62 and the constant m are this design's choice.
module barrett_mod_mul
  import zkt_pkg::*;
(
  input  fe_t a,
  input  fe_t b,
  output fe_t y
);
  logic [61:0] x;
  logic [93:0] xm;
  logic [31:0] q;
  logic [32:0] r;      // r < 2p < 2^32
  logic [33:0] rp;
  always_comb begin
    x  = 62'(a) * 62'(b);
    xm = 94'(x) * 94'(BARRETT_M);
    q  = xm[93:62];
    r  = 33'(x - 62'(q) * 62'(P));
    rp = {1'b0, r} - 34'(P);
    y  = rp[33] ? FW'(r) : FW'(rp);
  end
endmodule
