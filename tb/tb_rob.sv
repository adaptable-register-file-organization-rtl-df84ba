// tb_rob: checks the reorder buffer: entries allocated in order are marked
// executed in random order by two ports, and commit strictly in allocation
// order, one per cycle, only once executed, carrying the old destination
// and source VVRs given at allocation; full and empty flags match a model.
module tb_rob;
  import ava_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic alloc = 0, has_dst = 0, full, empty, commit, c_has_dst;
  vvr_t old_dst = '0, c_old;
  logic [2:0] src_en = '0, c_src_en;
  vvr_t [2:0] src = '0, c_src;
  rob_idx_t idx;
  logic exec_en [2]; rob_idx_t exec_idx [2];
  typedef struct { int idx; logic hd; vvr_t od; logic [2:0] se; vvr_t [2:0] s; bit done; } ent_t;
  ent_t q [$];
  int checks = 0, failures = 0, ncommit = 0;

  rob dut (.clk, .rst_n, .alloc_i(alloc), .alloc_has_dst_i(has_dst), .alloc_old_dst_i(old_dst), .alloc_src_en_i(src_en),
           .alloc_src_i(src), .alloc_idx_o(idx), .full_o(full), .empty_o(empty), .exec_en_i(exec_en), .exec_idx_i(exec_idx),
           .commit_o(commit), .commit_has_dst_o(c_has_dst), .commit_old_dst_o(c_old), .commit_src_en_o(c_src_en),
           .commit_src_o(c_src));

  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int k = 0; k < 2; k++) begin exec_en[k] = 0; exec_idx[k] = '0; end
    #12 rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      int pick [2];
      @(negedge clk);
      // model check of commit and flags
      checks++;
      if (full != (q.size() == ROB_DEPTH) || empty != (q.size() == 0)) begin failures++; $display("flags"); end
      checks++;
      if (commit != (q.size() != 0 && q[0].done)) begin failures++; $display("t=%0d commit %0d", t, commit); end
      else if (commit && (c_has_dst != q[0].hd || c_old != q[0].od || c_src_en != q[0].se || c_src != q[0].s)) begin
        failures++; $display("commit payload");
      end
      alloc = !full && $urandom % 2; has_dst = $urandom % 2; old_dst = vvr_t'($urandom);
      src_en = 3'($urandom); src = 18'($urandom);
      for (int k = 0; k < 2; k++) begin
        exec_en[k] = 0; pick[k] = -1;
        if (q.size() != 0 && $urandom % 2) begin
          pick[k] = $urandom % q.size();
          exec_en[k] = 1; exec_idx[k] = rob_idx_t'(q[pick[k]].idx);
        end
      end
      @(posedge clk);
      if (commit) begin void'(q.pop_front()); ncommit++; for (int k = 0; k < 2; k++) if (pick[k] >= 0) pick[k]--; end
      for (int k = 0; k < 2; k++) if (pick[k] >= 0) q[pick[k]].done = 1;
      if (alloc) q.push_back('{int'(idx), has_dst, old_dst, src_en, src, 0});
      #1 alloc = 0;
    end
    checks++; if (ncommit < 1000) begin failures++; $display("only %0d commits", ncommit); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
