// sync_fifo: in-order queue of typed entries. Used for the pre-issue queue
// and for the memory and arithmetic issue queues (32 entries each).
//
// push_i writes data_i when !full_o; the oldest entry is presented on
// data_o whenever !empty_o and is removed by pop_i. Push and pop may happen
// together. Latency: an entry written in one cycle is visible at the head
// in the next. count_o gives the occupancy. flush_i empties the queue.
//
// Origin: From the published design: 32-entry in-order memory and arithmetic
// queues. Own choice: one generic FIFO for all queues (the pre-issue queue
// depth is assumed).
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       flush_i,
  input  logic                       push_i,
  input  T                           data_i,
  output logic                       full_o,
  input  logic                       pop_i,
  output T                           data_o,
  output logic                       empty_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                           mem_q [DEPTH];
  logic [PW-1:0]              rd_q, wr_q;
  logic [$clog2(DEPTH+1)-1:0] count_q;

  assign data_o  = mem_q[rd_q];
  assign empty_o = (count_q == '0);
  assign full_o  = (count_q == ($clog2(DEPTH+1))'(DEPTH));
  assign count_o = count_q;

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push_i && !full_o) mem_q[wr_q] <= data_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q <= '0; wr_q <= '0; count_q <= '0;
    end else if (flush_i) begin
      rd_q <= '0; wr_q <= '0; count_q <= '0;
    end else begin
      if (push_i && !full_o) wr_q <= inc(wr_q);
      if (pop_i && !empty_o) rd_q <= inc(rd_q);
      count_q <= count_q + ($clog2(DEPTH+1))'(push_i && !full_o)
                         - ($clog2(DEPTH+1))'(pop_i && !empty_o);
    end
  end

  a_no_push_full: assert property (@(posedge clk) disable iff (!rst_n) push_i |-> !full_o);
  a_no_pop_empty: assert property (@(posedge clk) disable iff (!rst_n) pop_i |-> !empty_o);
endmodule
