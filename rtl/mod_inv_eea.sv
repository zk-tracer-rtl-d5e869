// mod_inv_eea: single field inversion y = a^-1 mod p by the binary extended
// Euclidean algorithm, one step per clock.
// State (u, v, x1, x2) starts at (a, p, 1, 0) and keeps u = x1*a, v = x2*a
// (mod p). Each step halves an even u or v (halving x1/x2 mod p alongside)
// or subtracts the smaller odd value from the larger. It stops when u or v
// reaches 1; at most about 2*31 steps for 31-bit operands.
// Interface: pulse start with a valid; done pulses for one cycle with y.
// a = 0 returns 0. The paper names the extended Euclidean algorithm; the
// binary, division-free variant is this design's choice.
module mod_inv_eea
  import zkt_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fe_t  a,
  output logic busy,
  output logic done,
  output fe_t  y
);
  logic [31:0] u, v;
  fe_t         x1, x2;

  function automatic fe_t half(input fe_t x);
    logic [31:0] s;
    s = x[0] ? (32'(x) + 32'(P)) : 32'(x);
    return FW'(s >> 1);
  endfunction

  function automatic fe_t msub(input fe_t x, input fe_t z);
    logic [31:0] d;
    d = 32'(x) - 32'(z);
    return (x >= z) ? FW'(d) : FW'(d + 32'(P));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; y <= '0;
      u <= '0; v <= '0; x1 <= '0; x2 <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        if (a == '0) begin
          y <= '0; done <= 1'b1;
        end else begin
          busy <= 1'b1;
          u <= 32'(a); v <= 32'(P); x1 <= FW'(1); x2 <= '0;
        end
      end else if (busy) begin
        if (u == 32'd1) begin
          y <= x1; done <= 1'b1; busy <= 1'b0;
        end else if (v == 32'd1) begin
          y <= x2; done <= 1'b1; busy <= 1'b0;
        end else if (!u[0]) begin
          u <= u >> 1; x1 <= half(x1);
        end else if (!v[0]) begin
          v <= v >> 1; x2 <= half(x2);
        end else if (u >= v) begin
          u <= u - v; x1 <= msub(x1, x2);
        end else begin
          v <= v - u; x2 <= msub(x2, x1);
        end
      end
    end
  end
endmodule
