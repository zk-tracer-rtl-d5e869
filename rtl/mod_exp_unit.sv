// mod_exp_unit: precomputes the weights beta^0 .. beta^(ncols-1) and writes
// them to the weight table, once per task rather than once per row.
// Each power beta^j is formed by left-to-right square-and-multiply over the
// bits of j in the Montgomery domain, with one shared Montgomery multiplier
// (one product per cycle): beta is converted to Montgomery form once, the
// accumulator starts at R mod p, every bit costs a square plus a multiply
// when the bit is 1, and the result is converted back before it is written.
// Interface: pulse start with beta and ncols stable; lut_we/lut_waddr/
// lut_wdata write one weight per power; done pulses after the last write.
// Square-and-multiply with Montgomery arithmetic is the paper's; running it
// separately for each j with one multiplier is this design's choice.
module mod_exp_unit
  import zkt_pkg::*;
#(
  parameter int unsigned MAX_COLS = 64
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  fe_t                          beta,
  input  logic [$clog2(MAX_COLS+1)-1:0] ncols,
  output logic                         busy,
  output logic                         done,
  output logic                         lut_we,
  output logic [$clog2(MAX_COLS)-1:0]  lut_waddr,
  output fe_t                          lut_wdata
);
  localparam int unsigned JW = $clog2(MAX_COLS);
  typedef enum logic [2:0] {S_IDLE, S_TOMONT, S_SQ, S_MUL, S_NORM} state_e;
  state_e   st;
  fe_t      bm, acc, ma, mb, mp;
  logic [JW-1:0]          j;
  logic [$clog2(JW+1)-1:0] bitk;   // bits of j still to process

  mont_mul u_mm (.a(ma), .b(mb), .y(mp));
  always_comb begin
    ma = acc; mb = acc;
    case (st)
      S_TOMONT: begin ma = beta; mb = MONT_R2; end
      S_SQ:     begin ma = acc;  mb = acc;     end
      S_MUL:    begin ma = acc;  mb = bm;      end
      S_NORM:   begin ma = acc;  mb = FW'(1);  end
      default:  ;
    endcase
  end

  logic jbit;
  always_comb jbit = (bitk != 0) ? j[bitk-1] : 1'b0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; busy <= 1'b0; done <= 1'b0; lut_we <= 1'b0;
      lut_waddr <= '0; lut_wdata <= '0; bm <= '0; acc <= '0; j <= '0; bitk <= '0;
    end else begin
      done <= 1'b0; lut_we <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          busy <= 1'b1; j <= '0; st <= S_TOMONT;
        end
        S_TOMONT: begin
          bm <= mp; acc <= MONT_ONE; bitk <= ($bits(bitk))'(JW); st <= S_SQ;
        end
        S_SQ: begin
          if (bitk == 0) st <= S_NORM;
          else begin
            acc <= mp;
            st  <= jbit ? S_MUL : S_SQ;
            if (!jbit) bitk <= bitk - 1'b1;
          end
        end
        S_MUL: begin
          acc <= mp; bitk <= bitk - 1'b1; st <= S_SQ;
        end
        S_NORM: begin
          lut_we <= 1'b1; lut_waddr <= j; lut_wdata <= mp;
          if (32'(j) + 1 >= 32'(ncols)) begin
            st <= S_IDLE; busy <= 1'b0; done <= 1'b1;
          end else begin
            j <= j + 1'b1; acc <= MONT_ONE; bitk <= ($bits(bitk))'(JW); st <= S_SQ;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
