// fast_mod_red: reduces a raw 32-bit word to a BabyBear element (x mod p).
// Because 2^31 = 2^27 - 1 (mod p), x = hi*2^31 + lo folds to
// lo + hi*(2^27 - 1) with a single addition; the sum is below 2p, so one
// conditional subtraction of p finishes the job. Purely combinational.
// The single-addition fold is the paper's idea; the final conditional
// subtraction is this design's completion of it.
module fast_mod_red
  import zkt_pkg::*;
(
  input  logic [31:0] x,
  output fe_t         y
);
  logic [31:0] t;
  logic [32:0] d;
  always_comb begin
    t = {1'b0, x[30:0]} + (x[31] ? 32'h07FF_FFFF : 32'h0);
    d = {1'b0, t} - {2'b0, P};
    y = d[32] ? t[30:0] : d[30:0];
  end
endmodule
