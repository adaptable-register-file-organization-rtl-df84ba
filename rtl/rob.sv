// rob: reorder buffer of the vector unit. Every renamed instruction takes
// an entry at rename time (alloc_i; its index is alloc_idx_o) holding its old
// destination VVR and its source VVRs. The execution units mark entries
// executed (two ports, one per unit). When the oldest entry is executed it
// commits in that cycle: commit_o pulses with the entry, so that the old
// destination VVR goes back to the free register list and the access
// counters of the source VVRs are decremented. One commit per cycle.
//
// Origin: From the published design: in-order commit that frees the old
// destination and drives the commit-time counter updates. Own choices: depth
// 32 and one commit per cycle.
module rob
  import ava_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       alloc_i,
  input  logic       alloc_has_dst_i,
  input  vvr_t       alloc_old_dst_i,
  input  logic [2:0] alloc_src_en_i,
  input  vvr_t [2:0] alloc_src_i,
  output rob_idx_t   alloc_idx_o,
  output logic       full_o,
  output logic       empty_o,
  input  logic       exec_en_i  [2],
  input  rob_idx_t   exec_idx_i [2],
  output logic       commit_o,
  output logic       commit_has_dst_o,
  output vvr_t       commit_old_dst_o,
  output logic [2:0] commit_src_en_o,
  output vvr_t [2:0] commit_src_o
);
  typedef struct packed {
    logic       has_dst;
    vvr_t       old_dst;
    logic [2:0] src_en;
    vvr_t [2:0] src;
  } rob_entry_t;

  rob_entry_t              ent_q [ROB_DEPTH];
  logic [ROB_DEPTH-1:0]    exec_q;
  rob_idx_t                head_q, tail_q;
  logic [$clog2(ROB_DEPTH+1)-1:0] count_q;

  assign alloc_idx_o = tail_q;
  assign full_o      = (count_q == ($clog2(ROB_DEPTH+1))'(ROB_DEPTH));
  assign empty_o     = (count_q == '0);
  assign commit_o    = !empty_o && exec_q[head_q];
  assign commit_has_dst_o = ent_q[head_q].has_dst;
  assign commit_old_dst_o = ent_q[head_q].old_dst;
  assign commit_src_en_o  = ent_q[head_q].src_en;
  assign commit_src_o     = ent_q[head_q].src;

  always_ff @(posedge clk) begin
    if (alloc_i && !full_o)
      ent_q[tail_q] <= '{has_dst: alloc_has_dst_i, old_dst: alloc_old_dst_i,
                         src_en: alloc_src_en_i, src: alloc_src_i};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      exec_q <= '0; head_q <= '0; tail_q <= '0; count_q <= '0;
    end else begin
      for (int k = 0; k < 2; k++) if (exec_en_i[k]) exec_q[exec_idx_i[k]] <= 1'b1;
      if (alloc_i && !full_o) begin
        exec_q[tail_q] <= 1'b0;
        tail_q <= tail_q + 1'b1;
      end
      if (commit_o) head_q <= head_q + 1'b1;
      count_q <= count_q + ($clog2(ROB_DEPTH+1))'(alloc_i && !full_o) - ($clog2(ROB_DEPTH+1))'(commit_o);
    end
  end

  a_no_alloc_full: assert property (@(posedge clk) disable iff (!rst_n) alloc_i |-> !full_o);
endmodule
