// ws_pe: weight-stationary processing element of the MMAC systolic array.
// A weight is preloaded once (w_load) and held. Each valid input datum is
// multiplied by the weight (Barrett) and added (mod_add) to the partial sum
// arriving from the previous PE; the new partial sum and the input datum
// (the "forwarded input") are registered, so a PE adds one cycle of latency.
// en=0 holds every register (the clock-gated state of an unused PE).
// The PE structure is the paper's; registering both outputs is this design's.
module ws_pe
  import zkt_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic w_load,
  input  fe_t  w_in,
  input  logic in_valid,
  input  fe_t  in_data,
  input  fe_t  psum_in,
  output logic out_valid,
  output fe_t  fwd_data,
  output fe_t  psum_out
);
  fe_t weight, prod, sum;
  barrett_mod_mul u_mul (.a(in_data), .b(weight), .y(prod));
  mod_add         u_add (.a(prod),    .b(psum_in), .y(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      weight <= '0; out_valid <= 1'b0; fwd_data <= '0; psum_out <= '0;
    end else begin
      if (w_load) weight <= w_in;
      if (en) begin
        out_valid <= in_valid;
        fwd_data  <= in_data;
        psum_out  <= sum;
      end
    end
  end
endmodule
