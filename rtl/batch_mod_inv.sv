// batch_mod_inv: inverts a batch of N nonzero field elements with a single
// field inversion and 3(N-1) Montgomery multiplications (Montgomery's trick).
//
//  LOAD  (N cycles) each input D[i] is converted to Montgomery form into the
//        data buffer; the prefix buffer gets P[i] = D[0]*...*D[i].
//  INV   P[N-1] is converted to normal form, inverted by mod_inv_eea and
//        converted back: acc = (D[0]*...*D[N-1])^-1.
//  BACK  (N cycles) for i = N-1 down to 1: R[i] = acc*P[i-1], acc = acc*D[i];
//        R[0] = acc. R[i] overwrites P[i], which is no longer needed.
//  OUT   R[0..N-1] are converted to normal form and streamed in input order
//        with a valid/ready handshake.
// in_ready is high only in LOAD. An input of 0 makes the whole batch 0.
// Dataflow (to-Mont, buffers, multiplier, to-Norm / Mod.Inv / to-Mont path)
// follows the paper's batch inverse figure; the text's count of 3(N-1)
// multiplications fixes the backward pass used here.
module batch_mod_inv
  import zkt_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  fe_t  in_data,
  output logic out_valid,
  input  logic out_ready,
  output fe_t  out_data
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  typedef enum logic [2:0] {S_LOAD, S_NORM, S_INV, S_WAIT, S_MONT, S_BACK, S_OUT} state_e;
  state_e  st;
  fe_t     dbuf [N];
  fe_t     pbuf [N];
  logic [IW-1:0] idx;
  fe_t     acc, prev;

  // three Montgomery multipliers
  fe_t m1a, m1b, m1y, m2a, m2b, m2y, m3a, m3b, m3y;
  mont_mul u_m1 (.a(m1a), .b(m1b), .y(m1y));
  mont_mul u_m2 (.a(m2a), .b(m2b), .y(m2y));
  mont_mul u_m3 (.a(m3a), .b(m3b), .y(m3y));

  logic inv_start, inv_done, inv_busy;
  fe_t  inv_y;
  mod_inv_eea u_inv (.clk, .rst_n, .start(inv_start), .a(acc),
                     .busy(inv_busy), .done(inv_done), .y(inv_y));

  always_comb begin
    m1a = in_data; m1b = MONT_R2;            // to Mont
    m2a = prev;    m2b = m1y;                // prefix product
    m3a = acc;     m3b = dbuf[idx];          // acc update
    case (st)
      S_NORM: begin m1a = pbuf[N-1]; m1b = FW'(1); end
      S_MONT: begin m3a = acc;       m3b = MONT_R2; end
      S_BACK: begin m2a = acc; m2b = pbuf[(idx == 0) ? '0 : idx - 1'b1]; end
      S_OUT:  begin m1a = pbuf[idx]; m1b = FW'(1); end
      default: ;
    endcase
  end

  assign in_ready  = (st == S_LOAD);
  assign inv_start = (st == S_INV);
  assign out_valid = (st == S_OUT);
  assign out_data  = m1y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_LOAD; idx <= '0; acc <= '0; prev <= '0;
    end else begin
      case (st)
        S_LOAD: if (in_valid) begin
          dbuf[idx] <= m1y;
          pbuf[idx] <= (idx == 0) ? m1y : m2y;
          prev      <= (idx == 0) ? m1y : m2y;
          if (idx == IW'(N-1)) st <= S_NORM;
          else idx <= idx + 1'b1;
        end
        S_NORM: begin acc <= m1y; st <= S_INV; end
        S_INV:  st <= S_WAIT;
        S_WAIT: if (inv_done) begin acc <= inv_y; st <= S_MONT; end
        S_MONT: begin acc <= m3y; idx <= IW'(N-1); st <= S_BACK; end
        S_BACK: begin
          if (idx == 0) begin
            pbuf[0] <= acc; st <= S_OUT;
          end else begin
            pbuf[idx] <= m2y; acc <= m3y; idx <= idx - 1'b1;
          end
        end
        S_OUT: if (out_ready) begin
          if (idx == IW'(N-1)) begin idx <= '0; st <= S_LOAD; end
          else idx <= idx + 1'b1;
        end
        default: st <= S_LOAD;
      endcase
    end
  end
endmodule
