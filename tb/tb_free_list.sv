// tb_free_list: checks the circular free list against a queue model: the
// initial contents after reset (the FRL configuration, VVRs 32..63), random
// push/pop traffic including simultaneous push and pop, and a reload to
// 0..7 as used by the PFRL at MVL=128.
module tb_free_list;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pop = 0, push = 0, reload = 0, empty;
  logic [5:0] head, pval = '0;
  logic [6:0] rcount = '0, count;
  int q [$];
  int checks = 0, failures = 0;

  free_list #(.DEPTH(64), .W(6), .INIT_BASE(32), .INIT_COUNT(32)) dut (
    .clk, .rst_n, .pop_i(pop), .head_o(head), .empty_o(empty), .push_i(push), .push_val_i(pval),
    .reload_i(reload), .reload_count_i(rcount), .count_o(count));

  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk();
    checks++;
    if (count != 7'(q.size()) || empty != (q.size() == 0) || (q.size() != 0 && head != 6'(q[0]))) begin
      failures++; $display("count %0d/%0d head %0d/%0d", count, q.size(), head, q.size() ? q[0] : -1);
    end
  endtask

  initial begin
    for (int i = 32; i < 64; i++) q.push_back(i);
    #12 rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      chk();
      if (t == 1500) begin
        reload = 1; rcount = 7'd8; push = 0; pop = 0;
        @(posedge clk); #1 reload = 0;
        q.delete(); for (int i = 0; i < 8; i++) q.push_back(i);
        continue;
      end
      pop  = (q.size() != 0) && ($urandom % 2);
      push = (q.size() < 64 || pop) && ($urandom % 2);
      pval = 6'($urandom);
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(int'(pval));
      #1 pop = 0; push = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
