// trace_buffer: on-chip buffer of main-trace rows between the MTU and PTU.
// A circular buffer of DEPTH rows. The write side accepts one row per cycle
// while not full. The read side sees count rows from the oldest one; it
// reads any of them by offset (combinational), so the PTU can read a batch
// once per pass, and frees the oldest release_n rows with release.
// The paper gives the buffer's role; random read with explicit release is
// this design's choice.
module trace_buffer
  import zkt_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_valid,
  output logic                       wr_ready,
  input  row_t                       wr_row,
  output logic [$clog2(DEPTH+1)-1:0] count,
  input  logic [$clog2(DEPTH)-1:0]   roff,
  output row_t                       rdata,
  input  logic                       release_en,
  input  logic [$clog2(DEPTH+1)-1:0] release_n
);
  localparam int unsigned AW = $clog2(DEPTH);
  row_t          mem [DEPTH];
  logic [AW-1:0] head, tail;
  logic          push;

  logic [$clog2(DEPTH+1)-1:0] count_nxt;
  always_comb begin
    count_nxt = count;
    if (push)       count_nxt = count_nxt + 1'b1;
    if (release_en) count_nxt = count_nxt - release_n;
  end
  assign wr_ready = (32'(count) < DEPTH);
  assign push     = wr_valid && wr_ready;
  assign rdata    = mem[AW'((32'(head) + 32'(roff)) % DEPTH)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head <= '0; tail <= '0; count <= '0;
    end else begin
      if (push) begin
        mem[tail] <= wr_row;
        tail <= AW'((32'(tail) + 1) % DEPTH);
      end
      if (release_en) head <= AW'((32'(head) + 32'(release_n)) % DEPTH);
      count <= count_nxt;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) release_en |-> release_n <= count);
endmodule
