// issue_logic: the issue stage's scoreboard over physical registers and the
// issue decision at the heads of the arithmetic and memory queues.
//
// A physical register is handed from owner to owner (a VVR written by an
// instruction, or a VVR brought back by a swap-load), so every reference to
// it carries a generation bit: alloc_i flips the register's generation when
// the pre-issue stage gives it a new owner, and readers and the writer of
// that owner carry the new bit. Per register the scoreboard keeps
//   done_gen    generation whose value has been written,
//   rd_cnt[g]   readers of generation g that have not finished reading
//               (instructions and swap-stores, added at dispatch).
// A reader may issue when done_gen equals its generation (the value is
// there). A writer of generation g may issue when rd_cnt[!g] is zero: every
// reader of the previous owner, including the swap-store that saved it to
// the memory register file, has read it. This is how a swap-store tells the
// new owner of its register that it has executed, and how a swap-load waits
// for all consumers of the register's previous content. Every instruction
// waits only on older ones, so the in-order queues cannot deadlock.
// written_o[p] (done_gen == current generation) says the register holds its
// final value; the pre-issue stage only re-owns registers in that state,
// which keeps one generation bit enough.
// Completions (done_t) and read releases from both units update the state at
// the clock edge; issue decisions are combinational.
//
// Origin: From the published design: the two issue rules (a swap-store lets
// the new owner write; a swap-load waits for the old owner's readers). Own
// choice: the generation-bit scoreboard that enforces them.
module issue_logic
  import ava_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  // pre-issue stage
  input  logic      alloc_i,
  input  preg_t     alloc_preg_i,
  input  logic      rd_add_en_i   [3],
  input  preg_t     rd_add_preg_i [3],
  input  logic      rd_add_gen_i  [3],
  output logic [MAX_PREG-1:0] alloc_gen_o,
  output logic [MAX_PREG-1:0] written_o,
  // queue heads
  input  logic      ar_head_valid_i,
  input  arith_op_t ar_head_i,
  input  logic      ar_unit_ready_i,
  output logic      ar_issue_o,
  input  logic      mem_head_valid_i,
  input  mem_op_t   mem_head_i,
  input  logic      mem_unit_ready_i,
  output logic      mem_issue_o,
  // completions
  input  done_t     ar_done_i,
  input  logic      ar_rel_en_i   [3],
  input  preg_t     ar_rel_preg_i [3],
  input  logic      ar_rel_gen_i  [3],
  input  done_t     mem_done_i,
  input  logic      mem_rel_en_i,
  input  preg_t     mem_rel_preg_i,
  input  logic      mem_rel_gen_i
);
  localparam int unsigned CW = 8;

  logic [MAX_PREG-1:0] alloc_gen_q, done_gen_q;
  logic [CW-1:0]       rd_cnt_q [MAX_PREG][2];

  assign alloc_gen_o = alloc_gen_q;
  assign written_o   = ~(alloc_gen_q ^ done_gen_q);

  function automatic logic can_read(preg_t p, logic g);
    return done_gen_q[p] == g;
  endfunction
  function automatic logic can_write(preg_t p, logic g);
    return rd_cnt_q[p][!g] == '0;
  endfunction

  always_comb begin
    logic ok;
    ok = can_write(ar_head_i.pdst, ar_head_i.dgen);
    for (int k = 0; k < 3; k++)
      if (ar_head_i.src_en[k] && !can_read(ar_head_i.psrc[k], ar_head_i.sgen[k])) ok = 1'b0;
    ar_issue_o = ar_head_valid_i && ar_unit_ready_i && ok;

    if (mem_head_i.kind == M_LOAD || mem_head_i.kind == M_SWLOAD)
      ok = can_write(mem_head_i.preg, mem_head_i.gen);
    else
      ok = can_read(mem_head_i.preg, mem_head_i.gen);
    mem_issue_o = mem_head_valid_i && mem_unit_ready_i && ok;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      alloc_gen_q <= '0;
      done_gen_q  <= '0;
      for (int p = 0; p < MAX_PREG; p++) begin
        rd_cnt_q[p][0] <= '0;
        rd_cnt_q[p][1] <= '0;
      end
    end else begin
      if (alloc_i) alloc_gen_q[alloc_preg_i] <= !alloc_gen_q[alloc_preg_i];
      if (ar_done_i.valid && ar_done_i.has_dst)   done_gen_q[ar_done_i.preg]  <= ar_done_i.gen;
      if (mem_done_i.valid && mem_done_i.has_dst) done_gen_q[mem_done_i.preg] <= mem_done_i.gen;
      for (int p = 0; p < MAX_PREG; p++) begin
        for (int g = 0; g < 2; g++) begin
          logic [CW-1:0] c;
          c = rd_cnt_q[p][g];
          for (int k = 0; k < 3; k++) begin
            if (rd_add_en_i[k] && rd_add_preg_i[k] == preg_t'(p) && rd_add_gen_i[k] == 1'(g)) c = c + 1'b1;
            if (ar_rel_en_i[k] && ar_rel_preg_i[k] == preg_t'(p) && ar_rel_gen_i[k] == 1'(g)) c = c - 1'b1;
          end
          if (mem_rel_en_i && mem_rel_preg_i == preg_t'(p) && mem_rel_gen_i == 1'(g)) c = c - 1'b1;
          rd_cnt_q[p][g] <= c;
        end
      end
    end
  end

  a_two_writers: assert property (@(posedge clk) disable iff (!rst_n)
    ar_done_i.valid && ar_done_i.has_dst && mem_done_i.valid && mem_done_i.has_dst
    |-> ar_done_i.preg != mem_done_i.preg);
endmodule
