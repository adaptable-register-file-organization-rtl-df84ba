// free_list: circular list of free register numbers, with HEAD and TAIL
// pointers. It serves as the free register list (FRL) of virtual vector
// registers and as the physical free register list (PFRL).
//
// pop_o takes the entry at HEAD (head_o, valid when !empty_o); push_i
// appends push_val_i at TAIL. Both may happen in the same cycle; a value
// pushed becomes visible at HEAD in a later cycle only. After reset the list
// holds INIT_BASE .. INIT_BASE+INIT_COUNT-1 in order (the FRL starts with
// VVRs 32..63, the PFRL with physical registers 0..63). reload_i refills it
// with 0 .. reload_count_i-1, used when the MVL setting changes the number of
// physical registers. Pushing into a full list or popping an empty one is a
// usage error and is flagged by assertions.
//
// Origin: From the published design: the FRL/PFRL as head/tail lists of free
// registers. Own choices: the ring implementation and the reload operation
// used at an MVL change.
module free_list #(
  parameter int unsigned DEPTH      = 64,
  parameter int unsigned W          = 6,
  parameter int unsigned INIT_BASE  = 0,
  parameter int unsigned INIT_COUNT = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       pop_i,
  output logic [W-1:0]               head_o,
  output logic                       empty_o,
  input  logic                       push_i,
  input  logic [W-1:0]               push_val_i,
  input  logic                       reload_i,
  input  logic [$clog2(DEPTH+1)-1:0] reload_count_i,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned PW = $clog2(DEPTH);

  logic [W-1:0]               mem_q [DEPTH];
  logic [PW-1:0]              head_q, tail_q;
  logic [$clog2(DEPTH+1)-1:0] count_q;

  assign head_o  = mem_q[head_q];
  assign empty_o = (count_q == '0);
  assign count_o = count_q;

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) mem_q[i] <= W'(INIT_BASE + i);
      head_q  <= '0;
      tail_q  <= PW'(INIT_COUNT % DEPTH);
      count_q <= ($clog2(DEPTH+1))'(INIT_COUNT);
    end else if (reload_i) begin
      for (int i = 0; i < DEPTH; i++) mem_q[i] <= W'(i);
      head_q  <= '0;
      tail_q  <= PW'(reload_count_i % DEPTH);
      count_q <= reload_count_i;
    end else begin
      if (push_i) begin
        mem_q[tail_q] <= push_val_i;
        tail_q        <= inc(tail_q);
      end
      if (pop_i) head_q <= inc(head_q);
      count_q <= count_q + ($clog2(DEPTH+1))'(push_i) - ($clog2(DEPTH+1))'(pop_i);
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop_i |-> !empty_o);
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n)
                                   push_i && !pop_i |-> count_q < ($clog2(DEPTH+1))'(DEPTH));
endmodule
