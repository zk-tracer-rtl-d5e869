// mont_mul: Montgomery product a*b*2^-32 mod p, combinational (REDC).
// t = a*b; u = (t mod 2^32) * (-p^-1) mod 2^32; r = (t + u*p) / 2^32 < 2p,
// then one conditional subtraction. to-Mont of x is mont_mul(x, 2^64 mod p)
// and to-Norm is mont_mul(x, 1). The paper asks for Montgomery arithmetic in
// the exponentiation and batch-inverse units; R = 2^32 is this design's pick.
module mont_mul
  import zkt_pkg::*;
(
  input  fe_t a,
  input  fe_t b,
  output fe_t y
);
  logic [61:0] t;
  logic [31:0] u;
  logic [63:0] s;
  logic [32:0] r;
  logic [33:0] rp;
  always_comb begin
    t  = 62'(a) * 62'(b);
    u  = 32'(t[31:0] * MONT_NPRIME);
    s  = 64'(t) + 64'(u) * 64'(P);
    r  = 33'(s[63:32]);
    rp = {1'b0, r} - 34'(P);
    y  = rp[33] ? FW'(r) : FW'(rp);
  end
endmodule
