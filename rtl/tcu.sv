// tcu: Trace Collection Unit. Watches the core's retire snoop port and turns
// each traced instruction into one main-trace row.
// trace_on enables capture from the next instruction on, trace_off disables
// it; neither is recorded itself. The eight captured 32-bit words pass a
// bank of fast_mod_red units in the same cycle and the row is held in an
// output register that is offered to two sinks at once: the TMEM write path
// (main memory) and the on-chip trace buffer. Each sink takes the row with a
// valid/ready handshake; the register frees when both have taken it.
// While an offered row has not been taken by both sinks, freeze is raised
// and the core holds still, so no row is ever lost.
// Capture, on-the-fly reduction and duplication are the paper's; freezing the
// core on a full sink is this design's choice.
module tcu
  import zkt_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        ret_valid,
  input  logic        ret_trace_on,
  input  logic        ret_trace_off,
  input  raw_row_t    ret_row,
  output logic        freeze,
  output logic        trace_en,
  output logic        row_valid,
  output row_t        row,
  input  logic        tmem_ready,
  input  logic        tbuf_ready,
  output logic        tmem_valid,
  output logic        tbuf_valid,
  output logic [31:0] rows_captured,
  output logic [31:0] freeze_cycles
);
  row_t red;
  for (genvar c = 0; c < NCOLS; c++) begin : g_red
    fast_mod_red u_red (.x(ret_row[c]), .y(red[c]));
  end

  logic sent_m, sent_b, take_m, take_b, free;
  assign tmem_valid = row_valid && !sent_m;
  assign tbuf_valid = row_valid && !sent_b;
  assign take_m = tmem_valid && tmem_ready;
  assign take_b = tbuf_valid && tbuf_ready;
  assign free   = !row_valid || ((sent_m || take_m) && (sent_b || take_b));
  assign freeze = !free;

  logic capture;
  assign capture = ret_valid && trace_en && !ret_trace_on && !ret_trace_off;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trace_en <= 1'b0; row_valid <= 1'b0; row <= '0; sent_m <= 1'b0; sent_b <= 1'b0;
      rows_captured <= '0; freeze_cycles <= '0;
    end else if (clear) begin
      trace_en <= 1'b0; rows_captured <= '0; freeze_cycles <= '0;
    end else begin
      if (freeze) freeze_cycles <= freeze_cycles + 1;
      if (free && ret_valid && ret_trace_on)  trace_en <= 1'b1;
      if (free && ret_valid && ret_trace_off) trace_en <= 1'b0;
      if (free) begin
        row_valid <= capture;
        sent_m <= 1'b0; sent_b <= 1'b0;
        if (capture) begin row <= red; rows_captured <= rows_captured + 1; end
      end else begin
        if (take_m) sent_m <= 1'b1;
        if (take_b) sent_b <= 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) freeze |-> row_valid);
endmodule
